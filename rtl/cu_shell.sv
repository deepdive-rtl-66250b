// cu_shell: the part every compute unit has in common.
//
// Holds the CU's registers (cu_regs), its DMA and the sequencer. The DMA is
// a four-port mem_arbiter in front of the CU's memory port serving the
// parameter loader (Mem2Mem), the input feature reader (Mem to Stream), a
// second reader for the residual input and the output writer (Stream to
// Mem). A start written by the host runs:
//   LOAD  - the loader copies all parameter segments into the scratchpads;
//   RUN   - op_start clears the datapath, the readers stream in_count input
//           elements and res_count residual elements, the writer collects
//           out_count output elements;
//   DONE  - done is set in STATUS and the interrupt raised, the CU is idle.
// The CU wrapper supplies the segment table and the element counts, which it
// derives from the layer shape in the registers.
// The load-then-stream order, the per-CU DMA and the interrupt follow the
// paper; the sequencer states and ports are this design's.
module cu_shell
  import dd_pkg::*;
#(
  parameter int unsigned NSEG   = 6,
  parameter int unsigned IN_LG  = 2,    // log2 of input element width
  parameter int unsigned OUT_LG = 2,    // log2 of output element width
  parameter int unsigned IN_W   = 4,
  parameter int unsigned OUT_W  = 4,
  parameter int unsigned RES_W  = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       reg_we,
  input  logic [3:0]                 reg_addr,
  input  logic [31:0]                reg_wdata,
  output logic [31:0]                reg_rdata,
  output logic                       irq,
  output logic                       mem_req,
  output logic                       mem_we,
  output logic [ADDR_W-1:0]          mem_addr,
  output logic [MEM_DW-1:0]          mem_wdata,
  input  logic                       mem_gnt,
  input  logic                       mem_rvalid,
  input  logic [MEM_DW-1:0]          mem_rdata,
  output logic [NUM_REGS-1:0][31:0]  cfg,
  input  logic [NSEG-1:0][31:0]      seg_count,
  input  logic [NSEG-1:0][2:0]       seg_lg,
  input  logic [NSEG-1:0][15:0]      seg_cols,
  input  logic [NSEG-1:0][1:0]       seg_op,
  input  seg_kind_e [NSEG-1:0]       seg_kind,
  input  logic [31:0]                in_count,
  input  logic [31:0]                res_count,
  input  logic [31:0]                out_count,
  output logic                       pl_we,
  output logic [1:0]                 pl_op,
  output seg_kind_e                  pl_kind,
  output logic [15:0]                pl_row,
  output logic [15:0]                pl_col,
  output logic [MEM_DW-1:0]          pl_data,
  output logic                       op_start,
  output logic                       in_valid,
  input  logic                       in_ready,
  output logic [IN_W-1:0]            in_data,
  output logic                       res_valid,
  input  logic                       res_ready,
  output logic [RES_W-1:0]           res_data,
  input  logic                       out_valid,
  output logic                       out_ready,
  input  logic [OUT_W-1:0]           out_data
);
  typedef enum logic [1:0] {C_IDLE, C_LOAD, C_RUN, C_DONE} cstate_e;
  cstate_e state;
  logic    start, busy, pl_start, pl_done, wr_done, rd_done, res_done;

  cu_regs u_regs (.clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .reg_rdata, .cfg, .start,
                  .busy, .done_set(state == C_DONE), .irq);

  assign busy     = (state != C_IDLE);
  assign pl_start = start && (state == C_IDLE);

  // DMA ports: 0 loader, 1 input reader, 2 residual reader, 3 writer.
  logic [3:0]                  p_req, p_we, p_gnt, p_rvalid;
  logic [3:0][ADDR_W-1:0]      p_addr;
  logic [3:0][MEM_DW-1:0]      p_wdata;
  logic [MEM_DW-1:0]           p_rdata;

  mem_arbiter #(.NP(4), .ADDR_W(ADDR_W), .DW(MEM_DW), .TAGD(16)) u_dma_arb (
    .clk, .rst_n, .up_req(p_req), .up_we(p_we), .up_addr(p_addr), .up_wdata(p_wdata),
    .up_gnt(p_gnt), .up_rvalid(p_rvalid), .up_rdata(p_rdata),
    .dn_req(mem_req), .dn_we(mem_we), .dn_addr(mem_addr), .dn_wdata(mem_wdata),
    .dn_gnt(mem_gnt), .dn_rvalid(mem_rvalid), .dn_rdata(mem_rdata));

  param_loader #(.NSEG(NSEG), .ADDR_W(ADDR_W), .DW(MEM_DW)) u_loader (
    .clk, .rst_n, .start(pl_start), .cfg_base(cfg[REG_PRM_ADDR]),
    .seg_count, .seg_lg, .seg_cols, .seg_op, .seg_kind,
    .mem_req(p_req[0]), .mem_we(p_we[0]), .mem_addr(p_addr[0]), .mem_wdata(p_wdata[0]),
    .mem_gnt(p_gnt[0]), .mem_rvalid(p_rvalid[0]), .mem_rdata(p_rdata),
    .pl_we, .pl_op, .pl_kind, .pl_row, .pl_col, .pl_data, .done(pl_done));

  logic [MEM_DW-1:0] in_wide, res_wide;
  mem_to_stream #(.ADDR_W(ADDR_W), .DW(MEM_DW), .OUT_W(MEM_DW), .FD(8)) u_in_rd (
    .clk, .rst_n, .start(op_start), .cfg_base(cfg[REG_IN_ADDR]), .cfg_count(in_count),
    .cfg_lg(3'(IN_LG)),
    .mem_req(p_req[1]), .mem_we(p_we[1]), .mem_addr(p_addr[1]), .mem_wdata(p_wdata[1]),
    .mem_gnt(p_gnt[1]), .mem_rvalid(p_rvalid[1]), .mem_rdata(p_rdata),
    .out_valid(in_valid), .out_ready(in_ready), .out_data(in_wide), .done(rd_done));
  assign in_data = IN_W'(in_wide);

  mem_to_stream #(.ADDR_W(ADDR_W), .DW(MEM_DW), .OUT_W(MEM_DW), .FD(8)) u_res_rd (
    .clk, .rst_n, .start(op_start), .cfg_base(cfg[REG_RES_ADDR]), .cfg_count(res_count),
    .cfg_lg(3'(OUT_LG)),
    .mem_req(p_req[2]), .mem_we(p_we[2]), .mem_addr(p_addr[2]), .mem_wdata(p_wdata[2]),
    .mem_gnt(p_gnt[2]), .mem_rvalid(p_rvalid[2]), .mem_rdata(p_rdata),
    .out_valid(res_valid), .out_ready(res_ready), .out_data(res_wide), .done(res_done));
  assign res_data = RES_W'(res_wide);

  stream_to_mem #(.ADDR_W(ADDR_W), .DW(MEM_DW), .IN_W(OUT_W)) u_wr (
    .clk, .rst_n, .start(op_start), .cfg_base(cfg[REG_OUT_ADDR]), .cfg_count(out_count),
    .cfg_lg(3'(OUT_LG)), .in_valid(out_valid), .in_ready(out_ready), .in_data(out_data),
    .mem_req(p_req[3]), .mem_we(p_we[3]), .mem_addr(p_addr[3]), .mem_wdata(p_wdata[3]),
    .mem_gnt(p_gnt[3]), .mem_rvalid(p_rvalid[3]), .mem_rdata(p_rdata), .done(wr_done));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; op_start <= 1'b0;
    end else begin
      op_start <= 1'b0;
      case (state)
        C_IDLE: if (start) state <= C_LOAD;
        C_LOAD: if (pl_done) begin
          state    <= C_RUN;
          op_start <= 1'b1;
        end
        C_RUN:  if (!op_start && wr_done) state <= C_DONE;
        C_DONE: state <= C_IDLE;
        default: state <= C_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = rd_done ^ res_done;
endmodule
