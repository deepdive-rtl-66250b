// stream_to_mem: DMA write channel ("Stream to Mem", the write buffer).
//
// After start it accepts cfg_count elements of 2^cfg_lg bits, packs them
// into DW-bit words (element 0 in the low bits) and writes the words to
// base, base+1, ... A word is written when it is full or holds the last
// element; the input is held off while a write waits for its grant. done
// rises after the last word has been granted. Unused high bits of the last
// word are written as zero. base, count and width are captured at start.
// The paper names this unit; packing and handshake are this design's.
module stream_to_mem #(
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned DW     = 64,
  parameter int unsigned IN_W   = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [ADDR_W-1:0]  cfg_base,
  input  logic [31:0]        cfg_count,
  input  logic [2:0]         cfg_lg,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [IN_W-1:0]    in_data,
  output logic               mem_req,
  output logic               mem_we,
  output logic [ADDR_W-1:0]  mem_addr,
  output logic [DW-1:0]      mem_wdata,
  input  logic               mem_gnt,
  input  logic               mem_rvalid,
  input  logic [DW-1:0]      mem_rdata,
  output logic               done
);
  // configuration captured at start, so the host may reprogram the next
  // transfer while this one finishes
  logic [ADDR_W-1:0] r_base;
  logic [31:0]       r_count;
  logic [2:0]        r_lg;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_base <= '0; r_count <= '0; r_lg <= 3'd2;
    end else if (start) begin
      r_base <= cfg_base; r_count <= cfg_count; r_lg <= cfg_lg;
    end
  end
  logic [31:0]   got, words;
  logic [6:0]    e_idx, epw;
  logic [DW-1:0] acc;
  logic          pending, active;
  logic [63:0]   mask;

  assign epw       = 7'(DW >> r_lg);
  assign mask      = (r_lg >= 3'd6) ? '1 : ((64'd1 << (64'd1 << r_lg)) - 64'd1);
  assign in_ready  = active && !start && !pending && (got < r_count);
  assign mem_req   = pending && !start;
  assign mem_we    = 1'b1;
  assign mem_addr  = r_base + words;
  assign mem_wdata = acc;
  assign done      = active && !pending && (got == r_count);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got <= '0; words <= '0; e_idx <= '0; acc <= '0; pending <= 1'b0; active <= 1'b0;
    end else if (start) begin
      got <= '0; words <= '0; e_idx <= '0; acc <= '0; pending <= 1'b0; active <= 1'b1;
    end else begin
      if (in_valid && in_ready) begin
        acc <= acc | DW'((64'(in_data) & mask) << (32'(e_idx) << r_lg));
        got <= got + 1'b1;
        if ((e_idx == epw - 1'b1) || (got == r_count - 1)) begin
          pending <= 1'b1;
          e_idx   <= '0;
        end else e_idx <= e_idx + 1'b1;
      end
      if (pending && mem_gnt) begin
        pending <= 1'b0;
        acc     <= '0;
        words   <= words + 1'b1;
      end
    end
  end

  a_no_read_data: assert property (@(posedge clk) disable iff (!rst_n) !mem_rvalid);
  logic unused;
  assign unused = ^mem_rdata;
endmodule
