// dd_pkg: types and constants shared by the DeepDive accelerator.
//
// Every convolution result in the accelerator leaves its operator through the
// same requantization step: the signed accumulator gets the per-output-channel
// bias added, is multiplied by a 16-bit fixed-point scale, shifted right with
// optional round-to-nearest, offset by the zero point and clipped to the
// unsigned range [0, 2^BW-1]. Clipping at zero and at the top code is what
// makes ReLU6 free once the scale maps the real range [0, 6] onto the codes.
// The clip range and the per-channel scheme follow the paper; the field widths
// of the parameter record (32-bit bias, 16-bit multiplier, 8-bit shift, 8-bit
// zero point, packed into one 64-bit memory word) are this design's choice.
//
// The register map of a compute unit (CU) and the memory word width are also
// defined here.
package dd_pkg;

  // Activation bit width of the quantized network (4) and of the first layer (8).
  localparam int unsigned BW     = 4;
  localparam int unsigned BW_NC  = 8;
  // Width of one word of the shared memory port.
  localparam int unsigned MEM_DW = 64;
  localparam int unsigned ADDR_W = 32;

  // Per-output-channel quantization parameters, one memory word each.
  typedef struct packed {
    logic signed [31:0] bias;   // added to the accumulator
    logic        [15:0] mult;   // fixed-point scale
    logic        [7:0]  shift;  // right shift after scaling
    logic        [7:0]  zp;     // output zero point
  } qparam_t;

  // Requantize one accumulator: clip(((acc + bias) * mult [+ round]) >>> shift + zp).
  function automatic logic [15:0] requant(input logic signed [31:0] acc,
                                          input qparam_t qp,
                                          input logic round_en,
                                          input int unsigned bw_out);
    logic signed [63:0] s;
    logic signed [63:0] p;
    logic signed [63:0] hi;
    s = 64'(acc) + 64'(qp.bias);
    p = s * $signed({48'd0, qp.mult});
    if (round_en && qp.shift != 8'd0) p = p + (64'sd1 <<< (qp.shift - 8'd1));
    p = p >>> qp.shift;
    p = p + $signed({56'd0, qp.zp});
    hi = (64'sd1 <<< bw_out) - 64'sd1;
    if (p < 0)       return 16'd0;
    else if (p > hi) return 16'(hi);
    else             return 16'(p);
  endfunction

  // Output size of a KxK convolution with padding K/2 and stride 1 or 2.
  function automatic logic [15:0] conv_out(input logic [15:0] h, input logic [1:0] stride,
                                           input int unsigned k);
    logic [15:0] span;
    span = h + 16'(2 * (k / 2)) - 16'(k);
    return ((stride == 2'd2) ? (span >> 1) : span) + 16'd1;
  endfunction

  // CU register map (word index on the register bus).
  localparam int unsigned REG_CTRL     = 0;   // w: bit0 start, bit1 clear done/irq; bit2 irq enable
  localparam int unsigned REG_STATUS   = 1;   // r: bit0 busy, bit1 done
  localparam int unsigned REG_IN_ADDR  = 2;   // input feature tensor (word address)
  localparam int unsigned REG_OUT_ADDR = 3;   // output feature tensor
  localparam int unsigned REG_RES_ADDR = 4;   // residual input tensor (Body CU)
  localparam int unsigned REG_PRM_ADDR = 5;   // weights and quantization parameters
  localparam int unsigned REG_H        = 6;   // input height = width
  localparam int unsigned REG_N        = 7;   // input channels
  localparam int unsigned REG_M        = 8;   // output channels
  localparam int unsigned REG_E        = 9;   // expanded channels (Body CU)
  localparam int unsigned REG_STRIDE   = 10;  // bit0..1 stride, bit4 residual enable
  localparam int unsigned REG_ROUND    = 11;  // bit0 round-to-nearest instead of truncate
  localparam int unsigned REG_AUXQ_LO  = 12;  // extra qparam (pool / residual scale), low word
  localparam int unsigned REG_AUXQ_HI  = 13;  // high word
  localparam int unsigned NUM_REGS     = 16;

  // Kinds of parameter segment handled by the loader.
  typedef enum logic [0:0] {SEG_WEIGHT = 1'b0, SEG_QPARAM = 1'b1} seg_kind_e;

endpackage
