// tail_cu: Tail compute unit.
//
// Pointwise convolution N -> M on an h x h map, then the reshape buffer and
// global average pool, producing one M-element vector ready for the
// classifier. The pool's scale record is taken from AUXQ (the host folds
// 1/(h*h) into it). For MobileNet-V2 0.75 / 224: 240 -> 1280 on 7 x 7.
// Parameter segments: PW weights (row = output channel), PW records.
module tail_cu
  import dd_pkg::*;
#(
  parameter int unsigned N_MAX = 240,
  parameter int unsigned M_MAX = 1280
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
  logic [15:0] h, n, m;
  logic        rnd;
  assign h   = cfg[REG_H][15:0];
  assign n   = cfg[REG_N][15:0];
  assign m   = cfg[REG_M][15:0];
  assign rnd = cfg[REG_ROUND][0];

  logic [1:0][31:0] seg_count;
  logic [1:0][2:0]  seg_lg;
  logic [1:0][15:0] seg_cols;
  logic [1:0][1:0]  seg_op;
  seg_kind_e [1:0]  seg_kind;
  always_comb begin
    seg_count = {32'(m), 32'(m) * 32'(n)};
    seg_lg    = {3'd6, 3'd2};
    seg_cols  = {16'd1, n};
    seg_op    = '0;
    seg_kind  = {SEG_QPARAM, SEG_WEIGHT};
  end

  logic              pl_we;
  logic [1:0]        pl_op;
  seg_kind_e         pl_kind;
  logic [15:0]       pl_row, pl_col;
  logic [MEM_DW-1:0] pl_data;
  logic              op_start;
  logic              s0_v, s0_r, s1_v, s1_r, s2_v, s2_r, r_v;
  logic [3:0]        s0_d, s1_d, s2_d, r_d;

  cu_shell #(.NSEG(2), .IN_LG(2), .OUT_LG(2), .IN_W(4), .OUT_W(4), .RES_W(4)) u_shell (
    .clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .reg_rdata, .irq,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata,
    .cfg, .seg_count, .seg_lg, .seg_cols, .seg_op, .seg_kind,
    .in_count(32'(h) * 32'(h) * 32'(n)), .res_count(32'd0), .out_count(32'(m)),
    .pl_we, .pl_op, .pl_kind, .pl_row, .pl_col, .pl_data, .op_start,
    .in_valid(s0_v), .in_ready(s0_r), .in_data(s0_d),
    .res_valid(r_v), .res_ready(1'b0), .res_data(r_d),
    .out_valid(s2_v), .out_ready(s2_r), .out_data(s2_d));

  pw_conv #(.N_MAX(N_MAX), .M_MAX(M_MAX), .BW_IN(4), .BW_W(4), .BW_OUT(4)) u_pw (
    .clk, .rst_n, .start(op_start), .cfg_n(n), .cfg_m(m), .cfg_round(rnd),
    .wt_we(pl_we && pl_kind == SEG_WEIGHT), .wt_row(pl_row), .wt_col(pl_col), .wt_data(pl_data[3:0]),
    .qp_we(pl_we && pl_kind == SEG_QPARAM), .qp_idx(pl_row), .qp_data(qparam_t'(pl_data)),
    .in_valid(s0_v), .in_ready(s0_r), .in_data(s0_d), .out_valid(s1_v), .out_ready(s1_r), .out_data(s1_d));

  avg_pool #(.C_MAX(M_MAX), .BW_IN(4), .BW_OUT(4)) u_avg (
    .clk, .rst_n, .start(op_start), .cfg_c(m), .cfg_hw(h * h),
    .cfg_qp(qparam_t'({cfg[REG_AUXQ_HI], cfg[REG_AUXQ_LO]})), .cfg_round(rnd),
    .in_valid(s1_v), .in_ready(s1_r), .in_data(s1_d), .out_valid(s2_v), .out_ready(s2_r), .out_data(s2_d));

  logic unused;
  assign unused = r_v ^ (^r_d) ^ (^pl_op);
endmodule
