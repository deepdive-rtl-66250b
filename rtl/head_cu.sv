// head_cu: Head compute unit.
//
// Runs the network's first, non-repeating layers once per image: a normal
// 3x3 convolution on the 8-bit image (cfg N input channels, E output
// channels, stride from STRIDE[1:0]), a depthwise 3x3 convolution on those E
// channels (stride STRIDE[3:2]) and a pointwise convolution to M channels.
// The three operators are fused by element streams, so the intermediate
// feature maps never leave the CU; only the image is read and the PW output
// written. For MobileNet-V2 at width 0.75 that is 3->24 (stride 2), 24
// depthwise, 24->16.
// Parameter segments, in order: NC weights (8-bit, row = output channel,
// column = (c*3+ky)*3+kx), NC records, DW weights (4-bit, one row), DW
// records, PW weights (row = output channel, column = input channel), PW
// records. Register map and sequencing: see cu_regs and cu_shell.
// The operator chain follows the paper's Head CU; the maxima (N_MAX, W_MAX)
// come from the MobileNet-V2 0.75 / 224 configuration.
module head_cu
  import dd_pkg::*;
#(
  parameter int unsigned NC_N_MAX = 3,
  parameter int unsigned NC_M_MAX = 24,
  parameter int unsigned NC_W_MAX = 224,
  parameter int unsigned DW_N_MAX = 24,
  parameter int unsigned DW_W_MAX = 112,
  parameter int unsigned PW_M_MAX = 16,
  parameter int unsigned K        = 3
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                reg_we,
  input  logic [3:0]          reg_addr,
  input  logic [31:0]         reg_wdata,
  output logic [31:0]         reg_rdata,
  output logic                irq,
  output logic                mem_req,
  output logic                mem_we,
  output logic [ADDR_W-1:0]   mem_addr,
  output logic [MEM_DW-1:0]   mem_wdata,
  input  logic                mem_gnt,
  input  logic                mem_rvalid,
  input  logic [MEM_DW-1:0]   mem_rdata
);
  logic [NUM_REGS-1:0][31:0] cfg;
  logic [15:0] h, n, e, m, h1, h2;
  logic [1:0]  s_nc, s_dw;
  logic        rnd;
  assign h    = cfg[REG_H][15:0];
  assign n    = cfg[REG_N][15:0];
  assign e    = cfg[REG_E][15:0];
  assign m    = cfg[REG_M][15:0];
  assign s_nc = cfg[REG_STRIDE][1:0];
  assign s_dw = cfg[REG_STRIDE][3:2];
  assign rnd  = cfg[REG_ROUND][0];
  assign h1   = conv_out(h, s_nc, K);
  assign h2   = conv_out(h1, s_dw, K);

  logic [5:0][31:0] seg_count;
  logic [5:0][2:0]  seg_lg;
  logic [5:0][15:0] seg_cols;
  logic [5:0][1:0]  seg_op;
  seg_kind_e [5:0]  seg_kind;
  always_comb begin
    seg_count = {32'(m), 32'(m) * 32'(e), 32'(e), 32'(e) * 32'(K*K), 32'(e), 32'(e) * 32'(n) * 32'(K*K)};
    seg_lg    = {3'd6, 3'd2, 3'd6, 3'd2, 3'd6, 3'd3};
    seg_cols  = {16'd1, e, 16'd1, e * 16'(K*K), 16'd1, n * 16'(K*K)};
    seg_op    = {2'd2, 2'd2, 2'd1, 2'd1, 2'd0, 2'd0};
    seg_kind  = {SEG_QPARAM, SEG_WEIGHT, SEG_QPARAM, SEG_WEIGHT, SEG_QPARAM, SEG_WEIGHT};
  end

  logic              pl_we;
  logic [1:0]        pl_op;
  seg_kind_e         pl_kind;
  logic [15:0]       pl_row, pl_col;
  logic [MEM_DW-1:0] pl_data;
  logic              op_start;
  logic              s0_v, s0_r, s1_v, s1_r, s2_v, s2_r, s3_v, s3_r;
  logic [7:0]        s0_d;
  logic [3:0]        s1_d, s2_d, s3_d;
  logic              res_v;
  logic [3:0]        res_d;

  cu_shell #(.NSEG(6), .IN_LG(3), .OUT_LG(2), .IN_W(8), .OUT_W(4), .RES_W(4)) u_shell (
    .clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .reg_rdata, .irq,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata,
    .cfg, .seg_count, .seg_lg, .seg_cols, .seg_op, .seg_kind,
    .in_count(32'(h) * 32'(h) * 32'(n)), .res_count(32'd0), .out_count(32'(h2) * 32'(h2) * 32'(m)),
    .pl_we, .pl_op, .pl_kind, .pl_row, .pl_col, .pl_data, .op_start,
    .in_valid(s0_v), .in_ready(s0_r), .in_data(s0_d),
    .res_valid(res_v), .res_ready(1'b0), .res_data(res_d),
    .out_valid(s3_v), .out_ready(s3_r), .out_data(s3_d));

  conv_kxk #(.DEPTHWISE(1'b0), .N_MAX(NC_N_MAX), .M_MAX(NC_M_MAX), .K(K), .W_MAX(NC_W_MAX),
             .BW_IN(8), .BW_W(8), .BW_OUT(4)) u_nc (
    .clk, .rst_n, .start(op_start), .cfg_n(n), .cfg_m(e), .cfg_h(h), .cfg_stride(s_nc), .cfg_round(rnd),
    .wt_we(pl_we && pl_op == 2'd0 && pl_kind == SEG_WEIGHT), .wt_row(pl_row), .wt_col(pl_col),
    .wt_data(pl_data[7:0]),
    .qp_we(pl_we && pl_op == 2'd0 && pl_kind == SEG_QPARAM), .qp_idx(pl_row), .qp_data(qparam_t'(pl_data)),
    .in_valid(s0_v), .in_ready(s0_r), .in_data(s0_d), .out_valid(s1_v), .out_ready(s1_r), .out_data(s1_d));

  conv_kxk #(.DEPTHWISE(1'b1), .N_MAX(DW_N_MAX), .M_MAX(1), .K(K), .W_MAX(DW_W_MAX),
             .BW_IN(4), .BW_W(4), .BW_OUT(4)) u_dw (
    .clk, .rst_n, .start(op_start), .cfg_n(e), .cfg_m(e), .cfg_h(h1), .cfg_stride(s_dw), .cfg_round(rnd),
    .wt_we(pl_we && pl_op == 2'd1 && pl_kind == SEG_WEIGHT), .wt_row(pl_row), .wt_col(pl_col),
    .wt_data(pl_data[3:0]),
    .qp_we(pl_we && pl_op == 2'd1 && pl_kind == SEG_QPARAM), .qp_idx(pl_row), .qp_data(qparam_t'(pl_data)),
    .in_valid(s1_v), .in_ready(s1_r), .in_data(s1_d), .out_valid(s2_v), .out_ready(s2_r), .out_data(s2_d));

  pw_conv #(.N_MAX(DW_N_MAX), .M_MAX(PW_M_MAX), .BW_IN(4), .BW_W(4), .BW_OUT(4)) u_pw (
    .clk, .rst_n, .start(op_start), .cfg_n(e), .cfg_m(m), .cfg_round(rnd),
    .wt_we(pl_we && pl_op == 2'd2 && pl_kind == SEG_WEIGHT), .wt_row(pl_row), .wt_col(pl_col),
    .wt_data(pl_data[3:0]),
    .qp_we(pl_we && pl_op == 2'd2 && pl_kind == SEG_QPARAM), .qp_idx(pl_row), .qp_data(qparam_t'(pl_data)),
    .in_valid(s2_v), .in_ready(s2_r), .in_data(s2_d), .out_valid(s3_v), .out_ready(s3_r), .out_data(s3_d));

  logic unused;
  assign unused = res_v ^ (^res_d);
endmodule
