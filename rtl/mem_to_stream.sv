// mem_to_stream: DMA read channel ("Mem to Stream").
//
// After start it reads the words base, base+1, ... holding cfg_count packed
// elements of 2^cfg_lg bits each (element 0 in the low bits of a word) and
// streams them out one element per cycle, zero-extended to OUT_W bits. Reads
// are issued only while the outstanding reads plus the buffered words fit in
// the FD-word FIFO, so returning data is never dropped. done rises once all
// elements have left. The same reader serves feature maps (4 or 8 bits) and,
// inside the parameter loader, weights and 64-bit quantization records.
// base, count and width are captured at start, so the next transfer may be
// programmed while this one finishes; no request is issued in the start cycle.
// The paper names this unit; packing and flow control are this design's.
module mem_to_stream #(
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned DW     = 64,
  parameter int unsigned OUT_W  = 64,
  parameter int unsigned FD     = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [ADDR_W-1:0]  cfg_base,
  input  logic [31:0]        cfg_count,   // elements
  input  logic [2:0]         cfg_lg,      // log2 of element width: 2..6
  output logic               mem_req,
  output logic               mem_we,
  output logic [ADDR_W-1:0]  mem_addr,
  output logic [DW-1:0]      mem_wdata,
  input  logic               mem_gnt,
  input  logic               mem_rvalid,
  input  logic [DW-1:0]      mem_rdata,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [OUT_W-1:0]   out_data,
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
  localparam int unsigned FDW = $clog2(FD) + 1;
  logic [31:0]    words_total, words_req, sent;
  logic [6:0]     e_idx, epw;
  logic [FDW-1:0] reserved;
  logic           active;
  logic           wf_valid, wf_pop, f_in_ready;
  logic [DW-1:0]  word;
  logic [63:0]    mask;

  assign words_total = 32'((64'(r_count) << r_lg) + 64'(DW - 1)) / 32'(DW);
  assign epw         = 7'(DW >> r_lg);
  assign mask        = (r_lg >= 3'd6) ? '1 : ((64'd1 << (64'd1 << r_lg)) - 64'd1);

  assign mem_req   = active && !start && (words_req < words_total) && (reserved < FDW'(FD));
  assign mem_we    = 1'b0;
  assign mem_addr  = r_base + words_req;
  assign mem_wdata = '0;

  assign out_valid = active && wf_valid && (sent < r_count);
  assign out_data  = OUT_W'((64'(word) >> (32'(e_idx) << r_lg)) & mask);
  assign wf_pop    = out_valid && out_ready && ((e_idx == epw - 1'b1) || (sent == r_count - 1));
  assign done      = active && (sent == r_count);

  stream_fifo #(.DEPTH(FD), .W(DW)) u_wfifo (
    .clk, .rst_n, .clear(start), .in_valid(mem_rvalid), .in_ready(f_in_ready), .in_data(mem_rdata),
    .out_valid(wf_valid), .out_ready(wf_pop), .out_data(word), .count());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; words_req <= '0; sent <= '0; e_idx <= '0; reserved <= '0;
    end else if (start) begin
      active <= 1'b1; words_req <= '0; sent <= '0; e_idx <= '0; reserved <= '0;
    end else begin
      if (mem_req && mem_gnt) words_req <= words_req + 1'b1;
      reserved <= reserved + FDW'(mem_req && mem_gnt) - FDW'(wf_pop);
      if (out_valid && out_ready) begin
        sent  <= sent + 1'b1;
        e_idx <= wf_pop ? '0 : e_idx + 1'b1;
      end
    end
  end

  a_rdata_room: assert property (@(posedge clk) disable iff (!rst_n) mem_rvalid |-> f_in_ready);
endmodule
