// body_cu: Body compute unit, one inverted residual block (IRB) per call.
//
// The host calls it once per IRB (16 times for MobileNet-V2). Each call runs
// a pointwise expansion N -> E, a depthwise 3x3 convolution on E channels with
// stride STRIDE[1:0] (1 or 2), a pointwise projection E -> M and, when
// STRIDE[4] is set, the residual addition of the block's input, which the
// second DMA reader streams again from RES_ADDR in step with the projection
// output (the host sets RES_ADDR = IN_ADDR; N = M and stride 1 are required
// then). The residual result is scaled by the extra record in AUXQ. All four
// stages are fused by element streams inside the CU.
// Its buffers are sized for the largest layer of any block: the line buffer
// for the widest early map (W_MAX = 112) and the parallelism for the deepest
// late one (720 expanded channels), both from MobileNet-V2 0.75 / 224, as the
// paper sizes the Body CU for memory-bound and compute-bound blocks at once.
// Parameter segments: expansion weights and records, depthwise weights and
// records, projection weights and records (layout as in head_cu).
module body_cu
  import dd_pkg::*;
#(
  parameter int unsigned N_MAX = 120,
  parameter int unsigned E_MAX = 720,
  parameter int unsigned M_MAX = 240,
  parameter int unsigned W_MAX = 112,
  parameter int unsigned K     = 3
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
  logic [15:0] h, n, e, m, h2;
  logic [1:0]  s_dw;
  logic        rnd, res_en;
  qparam_t     res_qp;
  assign h      = cfg[REG_H][15:0];
  assign n      = cfg[REG_N][15:0];
  assign e      = cfg[REG_E][15:0];
  assign m      = cfg[REG_M][15:0];
  assign s_dw   = cfg[REG_STRIDE][1:0];
  assign res_en = cfg[REG_STRIDE][4];
  assign rnd    = cfg[REG_ROUND][0];
  assign res_qp = qparam_t'({cfg[REG_AUXQ_HI], cfg[REG_AUXQ_LO]});
  assign h2     = conv_out(h, s_dw, K);

  logic [5:0][31:0] seg_count;
  logic [5:0][2:0]  seg_lg;
  logic [5:0][15:0] seg_cols;
  logic [5:0][1:0]  seg_op;
  seg_kind_e [5:0]  seg_kind;
  always_comb begin
    seg_count = {32'(m), 32'(m) * 32'(e), 32'(e), 32'(e) * 32'(K*K), 32'(e), 32'(e) * 32'(n)};
    seg_lg    = {3'd6, 3'd2, 3'd6, 3'd2, 3'd6, 3'd2};
    seg_cols  = {16'd1, e, 16'd1, e * 16'(K*K), 16'd1, n};
    seg_op    = {2'd2, 2'd2, 2'd1, 2'd1, 2'd0, 2'd0};
    seg_kind  = {SEG_QPARAM, SEG_WEIGHT, SEG_QPARAM, SEG_WEIGHT, SEG_QPARAM, SEG_WEIGHT};
  end

  logic [31:0] out_count;
  assign out_count = 32'(h2) * 32'(h2) * 32'(m);

  logic              pl_we;
  logic [1:0]        pl_op;
  seg_kind_e         pl_kind;
  logic [15:0]       pl_row, pl_col;
  logic [MEM_DW-1:0] pl_data;
  logic              op_start;
  logic              s0_v, s0_r, s1_v, s1_r, s2_v, s2_r, s3_v, s3_r, s4_v, s4_r, r_v, r_r;
  logic [3:0]        s0_d, s1_d, s2_d, s3_d, s4_d, r_d;

  cu_shell #(.NSEG(6), .IN_LG(2), .OUT_LG(2), .IN_W(4), .OUT_W(4), .RES_W(4)) u_shell (
    .clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .reg_rdata, .irq,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata,
    .cfg, .seg_count, .seg_lg, .seg_cols, .seg_op, .seg_kind,
    .in_count(32'(h) * 32'(h) * 32'(n)), .res_count(res_en ? out_count : 32'd0), .out_count,
    .pl_we, .pl_op, .pl_kind, .pl_row, .pl_col, .pl_data, .op_start,
    .in_valid(s0_v), .in_ready(s0_r), .in_data(s0_d),
    .res_valid(r_v), .res_ready(r_r), .res_data(r_d),
    .out_valid(s4_v), .out_ready(s4_r), .out_data(s4_d));

  pw_conv #(.N_MAX(N_MAX), .M_MAX(E_MAX), .BW_IN(4), .BW_W(4), .BW_OUT(4)) u_pw_exp (
    .clk, .rst_n, .start(op_start), .cfg_n(n), .cfg_m(e), .cfg_round(rnd),
    .wt_we(pl_we && pl_op == 2'd0 && pl_kind == SEG_WEIGHT), .wt_row(pl_row), .wt_col(pl_col),
    .wt_data(pl_data[3:0]),
    .qp_we(pl_we && pl_op == 2'd0 && pl_kind == SEG_QPARAM), .qp_idx(pl_row), .qp_data(qparam_t'(pl_data)),
    .in_valid(s0_v), .in_ready(s0_r), .in_data(s0_d), .out_valid(s1_v), .out_ready(s1_r), .out_data(s1_d));

  conv_kxk #(.DEPTHWISE(1'b1), .N_MAX(E_MAX), .M_MAX(1), .K(K), .W_MAX(W_MAX),
             .BW_IN(4), .BW_W(4), .BW_OUT(4)) u_dw (
    .clk, .rst_n, .start(op_start), .cfg_n(e), .cfg_m(e), .cfg_h(h), .cfg_stride(s_dw), .cfg_round(rnd),
    .wt_we(pl_we && pl_op == 2'd1 && pl_kind == SEG_WEIGHT), .wt_row(pl_row), .wt_col(pl_col),
    .wt_data(pl_data[3:0]),
    .qp_we(pl_we && pl_op == 2'd1 && pl_kind == SEG_QPARAM), .qp_idx(pl_row), .qp_data(qparam_t'(pl_data)),
    .in_valid(s1_v), .in_ready(s1_r), .in_data(s1_d), .out_valid(s2_v), .out_ready(s2_r), .out_data(s2_d));

  pw_conv #(.N_MAX(E_MAX), .M_MAX(M_MAX), .BW_IN(4), .BW_W(4), .BW_OUT(4)) u_pw_prj (
    .clk, .rst_n, .start(op_start), .cfg_n(e), .cfg_m(m), .cfg_round(rnd),
    .wt_we(pl_we && pl_op == 2'd2 && pl_kind == SEG_WEIGHT), .wt_row(pl_row), .wt_col(pl_col),
    .wt_data(pl_data[3:0]),
    .qp_we(pl_we && pl_op == 2'd2 && pl_kind == SEG_QPARAM), .qp_idx(pl_row), .qp_data(qparam_t'(pl_data)),
    .in_valid(s2_v), .in_ready(s2_r), .in_data(s2_d), .out_valid(s3_v), .out_ready(s3_r), .out_data(s3_d));

  residual_add #(.BW(4)) u_res (
    .cfg_en(res_en), .cfg_qp(res_qp), .cfg_round(rnd),
    .a_valid(s3_v), .a_ready(s3_r), .a_data(s3_d), .b_valid(r_v), .b_ready(r_r), .b_data(r_d),
    .out_valid(s4_v), .out_ready(s4_r), .out_data(s4_d));
endmodule
