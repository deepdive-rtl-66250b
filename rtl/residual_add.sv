// residual_add: the residual connection ("+") at the end of the Body CU.
//
// Joins two channel-wise streams element by element: a (projection output)
// and b (the block's input tensor, read again from memory in the same order).
// The output is clip(((a + b) * mult [+ round]) >>> shift + zp) with the
// record cfg_qp, so the two operands are assumed to share one scale, which the
// record maps to the output scale. With cfg_en low the b stream is ignored
// and a passes through unchanged (blocks without a residual connection).
// Purely combinational join: out_valid needs both inputs, each input is
// consumed in the cycle the output is.
// The paper places the addition inside the Body CU; the common-scale
// requantization is this design's choice.
module residual_add
  import dd_pkg::*;
#(
  parameter int unsigned BW = 4
) (
  input  logic           cfg_en,
  input  qparam_t        cfg_qp,
  input  logic           cfg_round,
  input  logic           a_valid,
  output logic           a_ready,
  input  logic [BW-1:0]  a_data,
  input  logic           b_valid,
  output logic           b_ready,
  input  logic [BW-1:0]  b_data,
  output logic           out_valid,
  input  logic           out_ready,
  output logic [BW-1:0]  out_data
);
  logic [15:0] q;
  assign q         = requant(32'(a_data) + 32'(b_data), cfg_qp, cfg_round, BW);
  assign out_valid = a_valid && (b_valid || !cfg_en);
  assign a_ready   = out_ready && (b_valid || !cfg_en);
  assign b_ready   = cfg_en && out_ready && a_valid;
  assign out_data  = cfg_en ? BW'(q) : a_data;
endmodule
