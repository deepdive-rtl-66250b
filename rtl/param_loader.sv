// param_loader: memory-to-memory burst loader ("Mem2Mem") of a CU.
//
// Copies the parameters of the CU's operators from shared memory into their
// scratchpads. The parameters lie as NSEG consecutive segments starting at
// cfg_base; each segment starts on a fresh memory word and holds
// seg_count[i] elements of 2^seg_lg[i] bits: the weights of one operator
// (packed 4- or 8-bit values) or its quantization records (one 64-bit word
// per output channel). For segment i the loader emits one write per cycle on
// pl_*: operator seg_op[i], kind seg_kind[i], and a (row, column) position
// that steps through seg_cols[i] columns per row. Segments with a count of 0
// are skipped. done stays high from the last write until the next start.
// The paper shows weights and quantization parameters burst-read from DDR
// into per-operator buffers; the segment layout is this design's choice.
module param_loader
  import dd_pkg::*;
#(
  parameter int unsigned NSEG   = 6,
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned DW     = 64
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [ADDR_W-1:0]         cfg_base,
  input  logic [NSEG-1:0][31:0]     seg_count,
  input  logic [NSEG-1:0][2:0]      seg_lg,
  input  logic [NSEG-1:0][15:0]     seg_cols,
  input  logic [NSEG-1:0][1:0]      seg_op,
  input  seg_kind_e [NSEG-1:0]      seg_kind,
  output logic                      mem_req,
  output logic                      mem_we,
  output logic [ADDR_W-1:0]         mem_addr,
  output logic [DW-1:0]             mem_wdata,
  input  logic                      mem_gnt,
  input  logic                      mem_rvalid,
  input  logic [DW-1:0]             mem_rdata,
  output logic                      pl_we,
  output logic [1:0]                pl_op,
  output seg_kind_e                 pl_kind,
  output logic [15:0]               pl_row,
  output logic [15:0]               pl_col,
  output logic [DW-1:0]             pl_data,
  output logic                      done
);
  typedef enum logic [1:0] {S_IDLE, S_LAUNCH, S_RUN, S_DONE} state_e;
  localparam int unsigned SW = (NSEG <= 1) ? 1 : $clog2(NSEG);

  state_e         state;
  logic [SW-1:0]  seg;
  logic [ADDR_W-1:0] base;
  logic           rd_start, rd_done, el_valid;
  logic [DW-1:0]  el;
  logic [31:0]    seg_words;

  assign seg_words = 32'((64'(seg_count[seg]) << seg_lg[seg]) + 64'(DW - 1)) / 32'(DW);
  assign rd_start  = (state == S_LAUNCH);
  assign done      = (state == S_DONE);

  mem_to_stream #(.ADDR_W(ADDR_W), .DW(DW), .OUT_W(DW), .FD(8)) u_rd (
    .clk, .rst_n, .start(rd_start), .cfg_base(base), .cfg_count(seg_count[seg]), .cfg_lg(seg_lg[seg]),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata,
    .out_valid(el_valid), .out_ready(1'b1), .out_data(el), .done(rd_done));

  assign pl_we   = (state == S_RUN) && el_valid;
  assign pl_op   = seg_op[seg];
  assign pl_kind = seg_kind[seg];
  assign pl_data = el;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; seg <= '0; base <= '0; pl_row <= '0; pl_col <= '0;
    end else if (start) begin
      state <= S_LAUNCH; seg <= '0; base <= cfg_base; pl_row <= '0; pl_col <= '0;
    end else begin
      case (state)
        S_LAUNCH: state <= S_RUN;
        S_RUN: begin
          if (pl_we) begin
            if (pl_col == seg_cols[seg] - 1'b1) begin
              pl_col <= '0;
              pl_row <= pl_row + 1'b1;
            end else pl_col <= pl_col + 1'b1;
          end
          if (rd_done) begin
            base   <= base + seg_words;
            pl_row <= '0;
            pl_col <= '0;
            if (int'(seg) == NSEG - 1) state <= S_DONE;
            else begin
              seg   <= seg + 1'b1;
              state <= S_LAUNCH;
            end
          end
        end
        default: ;
      endcase
    end
  end
endmodule
