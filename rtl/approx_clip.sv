// approx_clip: the Approximator & Clip unit at the end of every operator.
//
// Takes a signed accumulator and the quantization record of its output channel
// and returns clip(((acc + bias) * mult [+ 2^(shift-1)]) >>> shift + zp) in
// [0, 2^BW_OUT-1]. round_en selects round-to-nearest, otherwise the low bits
// are truncated. Clipping to the unsigned code range is what the paper uses to
// fold ReLU6 into the convolution; the fixed-point form of the scale is this
// design's choice. Timing: one register stage, a result every cycle,
// latency LAT = 1. A TAG_W side band is delayed with the data.
module approx_clip
  import dd_pkg::*;
#(
  parameter int unsigned ACC_W  = 32,
  parameter int unsigned BW_OUT = 4,
  parameter int unsigned TAG_W  = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     round_en,
  input  logic                     in_valid,
  input  logic signed [ACC_W-1:0]  in_acc,
  input  qparam_t                  in_qp,
  input  logic [TAG_W-1:0]         in_tag,
  output logic                     out_valid,
  output logic [BW_OUT-1:0]        out_q,
  output logic [TAG_W-1:0]         out_tag
);
  logic [15:0] q;
  assign q = requant(32'(in_acc), in_qp, round_en, BW_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
  always_ff @(posedge clk) begin
    out_q   <= BW_OUT'(q);
    out_tag <= in_tag;
  end
endmodule
