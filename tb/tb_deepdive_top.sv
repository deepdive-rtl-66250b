// tb_deepdive_top: end-to-end test of the accelerator top at its default
// (MobileNet-V2 0.75) sizes, with one small image run through every CU.
// The host side is modelled by tasks on the register bus: they place each
// CU's parameter segments in the DDR model, program the CU registers
// (pointers, shape, strides, rounding, extra record), start it with the
// interrupt enabled, wait for its irq and clear it. The memory answers with
// random grant stalls.
// Sequence (image A, 16x16x3, 8-bit):
//   Head   NC 3->8 stride 2, DW stride 1, PW 8->6             -> 8x8x6
//   Body 1 PW 6->12, DW stride 1, PW 12->6, residual add      -> 8x8x6
//   Body 2 PW 6->10, DW stride 2, PW 10->9, no residual       -> 4x4x9
//   Tail   PW 9->20, average pool                             -> 20
//   Classifier 20->10, 16-bit outputs                          -> 10
// A second image B goes through the Head while Body 1 runs, so two CUs share
// the memory port. Every output tensor is compared word-for-word (element
// by element) with the chained reference models of dd_tb_pkg.
// Mechanism counters (each must be non-zero, else it counts as a failure):
// memory grant stalls, cycles with two CUs requesting memory, cycles with
// two CUs busy at once, back-pressure inside a fused operator chain, residual
// operand transfers, stride-2 output rows, and one interrupt per CU start.
module tb_deepdive_top;
  import dd_pkg::*;
  import dd_tb_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        reg_we;
  logic [5:0]  reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic [3:0]  irq;
  logic        mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0] mem_addr;
  logic [63:0] mem_wdata, mem_rdata;

  deepdive_top u_top (.clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .reg_rdata, .irq,
                      .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata);
  ddr_model #(.WORDS(65536), .LAT(6), .STALL(1'b1)) u_ddr (
    .clk, .rst_n, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
    .gnt(mem_gnt), .rvalid(mem_rvalid), .rdata(mem_rdata));

  // ---------------- mechanism counters ----------------
  int n_gnt_stall = 0, n_contention = 0, n_concurrent = 0, n_backpressure = 0;
  int n_residual = 0, n_s2_rows = 0;
  int n_irq[4] = '{0, 0, 0, 0}, n_start[4] = '{0, 0, 0, 0};
  logic [3:0] irq_d = '0;
  always @(posedge clk) if (rst_n) begin
    if (mem_req && !mem_gnt) n_gnt_stall++;
    if ($countones(u_top.c_req) >= 2) n_contention++;
    if (u_top.u_head.u_shell.busy && u_top.u_body.u_shell.busy) n_concurrent++;
    if (u_top.u_body.u_dw.in_valid && !u_top.u_body.u_dw.in_ready) n_backpressure++;
    if (u_top.u_body.u_res.b_valid && u_top.u_body.u_res.b_ready) n_residual++;
    if (u_top.u_body.u_dw.cfg_stride == 2'd2 && u_top.u_body.u_dw.advance && u_top.u_body.u_dw.ox == '0) n_s2_rows++;
    for (int i = 0; i < 4; i++) if (irq[i] && !irq_d[i]) n_irq[i]++;
    irq_d <= irq;
  end

  // ---------------- host helpers ----------------
  task automatic wreg(int cu, int a, logic [31:0] d);
    @(negedge clk);
    reg_we = 1; reg_addr = 6'(cu * 16 + a); reg_wdata = d;
    @(negedge clk);
    reg_we = 0;
  endtask

  // append a segment of elements (lg < 6) or records to the parameter area
  task automatic put_seg(inout int addr, input iq_t v, input int lg);
    logic [63:0] words[$];
    pack(v, lg, words);
    foreach (words[i]) u_ddr.mem[addr + i] = words[i];
    addr += words.size();
  endtask
  task automatic put_qp(inout int addr, input rqq_t q);
    foreach (q[i]) u_ddr.mem[addr + i] = qp_word(q[i]);
    addr += q.size();
  endtask
  task automatic put_tensor(int addr, iq_t v, int lg);
    int a;
    a = addr;
    put_seg(a, v, lg);
  endtask
  function automatic iq_t get_tensor(int addr, int cnt, int lg);
    iq_t v;
    int epw;
    epw = 64 >> lg;
    for (int i = 0; i < cnt; i++) begin
      logic [63:0] w;
      w = u_ddr.mem[addr + i / epw];
      v.push_back(int'((w >> ((i % epw) << lg)) & ((64'd1 << (1 << lg)) - 1)));
    end
    return v;
  endfunction

  task automatic compare(string what, iq_t got, iq_t expv);
    int bad;
    bad = 0;
    for (int i = 0; i < expv.size(); i++) begin
      checks++;
      if (got[i] != expv[i]) begin
        failures++; bad++;
        if (bad < 6) $display("%s element %0d: got %0d expected %0d", what, i, got[i], expv[i]);
      end
    end
    $display("%s: %0d elements compared, %0d wrong", what, expv.size(), bad);
  endtask

  task automatic setup_cu(int cu, int in_a, int out_a, int res_a, int prm_a, int h, int n, int m, int e,
                         int stride, bit rnd, logic [63:0] auxq);
    wreg(cu, REG_IN_ADDR, 32'(in_a));
    wreg(cu, REG_OUT_ADDR, 32'(out_a));
    wreg(cu, REG_RES_ADDR, 32'(res_a));
    wreg(cu, REG_PRM_ADDR, 32'(prm_a));
    wreg(cu, REG_H, 32'(h));
    wreg(cu, REG_N, 32'(n));
    wreg(cu, REG_M, 32'(m));
    wreg(cu, REG_E, 32'(e));
    wreg(cu, REG_STRIDE, 32'(stride));
    wreg(cu, REG_ROUND, 32'(rnd));
    wreg(cu, REG_AUXQ_LO, auxq[31:0]);
    wreg(cu, REG_AUXQ_HI, auxq[63:32]);
  endtask
  task automatic go(int cu);
    wreg(cu, REG_CTRL, 32'h5);
    n_start[cu]++;
  endtask
  task automatic wait_irq(int cu);
    while (!irq[cu]) @(negedge clk);
    @(negedge clk); reg_addr = 6'(cu * 16 + REG_STATUS); #1;
    checks++;
    if (reg_rdata[1:0] != 2'b10) begin failures++; $display("CU %0d status %b after irq", cu, reg_rdata[1:0]); end
    wreg(cu, REG_CTRL, 32'h2);
    checks++;
    if (irq[cu]) begin failures++; $display("CU %0d irq not cleared", cu); end
  endtask

  // ---------------- layer data ----------------
  localparam int IMG_A = 'h0000, IMG_B = 'h0200, HO_A = 'h0400, HO_B = 'h0500, B1_O = 'h0600;
  localparam int B2_O = 'h0700, T_O = 'h0800, C_O = 'h0900;
  localparam int P_HEAD = 'h1000, P_B1 = 'h2000, P_B2 = 'h3000, P_TAIL = 'h4000, P_CLS = 'h5000;

  iq_t  img_a, img_b, hw_nc, hw_dw, hw_pw, b1_exp, b1_dw, b1_prj, b2_exp, b2_dw, b2_prj, t_w, c_w;
  rqq_t hq_nc, hq_dw, hq_pw, b1q_exp, b1q_dw, b1q_prj, b1q_res, b2q_exp, b2q_dw, b2q_prj, tq, tq_avg, cq;

  function automatic iq_t ref_head(iq_t x);
    iq_t a, b;
    a = ref_conv(x, 16, 3, 8, 2, 3, 1'b0, hw_nc, hq_nc, 1'b1, 4);
    b = ref_conv(a, 8, 8, 8, 1, 3, 1'b1, hw_dw, hq_dw, 1'b1, 4);
    return ref_pw(b, 64, 8, 6, hw_pw, hq_pw, 1'b1, 4);
  endfunction

  initial begin
    iq_t e_ha, e_hb, e_b1, e_b2, e_t, e_c, t1, t2;
    int pa;
    reg_we = 0; reg_addr = 0; reg_wdata = 0;
    // image and parameters
    img_a = rand_act(16*16*3, 8); img_b = rand_act(16*16*3, 8);
    hw_nc = rand_wt(8*3*9, 8);  hq_nc = rand_qp(8, 14);
    hw_dw = rand_wt(8*9, 4);    hq_dw = rand_qp(8, 7);
    hw_pw = rand_wt(6*8, 4);    hq_pw = rand_qp(6, 6);
    b1_exp = rand_wt(12*6, 4);  b1q_exp = rand_qp(12, 6);
    b1_dw = rand_wt(12*9, 4);   b1q_dw = rand_qp(12, 7);
    b1_prj = rand_wt(6*12, 4);  b1q_prj = rand_qp(6, 7);
    b1q_res = rand_qp(1, 2);
    b2_exp = rand_wt(10*6, 4);  b2q_exp = rand_qp(10, 6);
    b2_dw = rand_wt(10*9, 4);   b2q_dw = rand_qp(10, 7);
    b2_prj = rand_wt(9*10, 4);  b2q_prj = rand_qp(9, 7);
    t_w = rand_wt(20*9, 4);     tq = rand_qp(20, 6);  tq_avg = rand_qp(1, 11);
    c_w = rand_wt(10*20, 4);    cq = rand_qp(10, 2);
    put_tensor(IMG_A, img_a, 3);
    put_tensor(IMG_B, img_b, 3);
    pa = P_HEAD;
    put_seg(pa, hw_nc, 3); put_qp(pa, hq_nc); put_seg(pa, hw_dw, 2); put_qp(pa, hq_dw); put_seg(pa, hw_pw, 2); put_qp(pa, hq_pw);
    pa = P_B1;
    put_seg(pa, b1_exp, 2); put_qp(pa, b1q_exp); put_seg(pa, b1_dw, 2); put_qp(pa, b1q_dw); put_seg(pa, b1_prj, 2); put_qp(pa, b1q_prj);
    pa = P_B2;
    put_seg(pa, b2_exp, 2); put_qp(pa, b2q_exp); put_seg(pa, b2_dw, 2); put_qp(pa, b2q_dw); put_seg(pa, b2_prj, 2); put_qp(pa, b2q_prj);
    pa = P_TAIL;
    put_seg(pa, t_w, 2); put_qp(pa, tq);
    pa = P_CLS;
    put_seg(pa, c_w, 2); put_qp(pa, cq);

    // reference chain
    e_ha = ref_head(img_a);
    e_hb = ref_head(img_b);
    t1   = ref_pw(e_ha, 64, 6, 12, b1_exp, b1q_exp, 1'b1, 4);
    t2   = ref_conv(t1, 8, 12, 12, 1, 3, 1'b1, b1_dw, b1q_dw, 1'b1, 4);
    t1   = ref_pw(t2, 64, 12, 6, b1_prj, b1q_prj, 1'b1, 4);
    e_b1 = ref_res(t1, e_ha, b1q_res[0], 1'b1, 4);
    t1   = ref_pw(e_b1, 64, 6, 10, b2_exp, b2q_exp, 1'b0, 4);
    t2   = ref_conv(t1, 8, 10, 10, 2, 3, 1'b1, b2_dw, b2q_dw, 1'b0, 4);
    e_b2 = ref_pw(t2, 16, 10, 9, b2_prj, b2q_prj, 1'b0, 4);
    t1   = ref_pw(e_b2, 16, 9, 20, t_w, tq, 1'b1, 4);
    e_t  = ref_avg(t1, 16, 20, tq_avg[0], 1'b1, 4);
    e_c  = ref_pw(e_t, 1, 20, 10, c_w, cq, 1'b1, 16);

    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);

    // Head on image A
    setup_cu(0, IMG_A, HO_A, 0, P_HEAD, 16, 3, 6, 8, 32'h6, 1'b1, '0);   // NC stride 2, DW stride 1
    go(0);
    wait_irq(0);
    compare("head A", get_tensor(HO_A, 8*8*6, 2), e_ha);

    // Body 1 on A while the Head processes image B
    setup_cu(1, HO_A, B1_O, HO_A, P_B1, 8, 6, 6, 12, 32'h11, 1'b1, qp_word(b1q_res[0]));
    setup_cu(0, IMG_B, HO_B, 0, P_HEAD, 16, 3, 6, 8, 32'h6, 1'b1, '0);
    go(1);
    go(0);
    fork
      wait_irq(1);
      wait_irq(0);
    join
    compare("body 1 (residual)", get_tensor(B1_O, 8*8*6, 2), e_b1);
    compare("head B (concurrent)", get_tensor(HO_B, 8*8*6, 2), e_hb);

    // Body 2: stride 2, no residual
    setup_cu(1, B1_O, B2_O, 0, P_B2, 8, 6, 9, 10, 32'h2, 1'b0, '0);
    go(1);
    wait_irq(1);
    compare("body 2 (stride 2)", get_tensor(B2_O, 4*4*9, 2), e_b2);

    // Tail
    setup_cu(2, B2_O, T_O, 0, P_TAIL, 4, 9, 20, 0, 32'h1, 1'b1, qp_word(tq_avg[0]));
    go(2);
    wait_irq(2);
    compare("tail", get_tensor(T_O, 20, 2), e_t);

    // Classifier
    setup_cu(3, T_O, C_O, 0, P_CLS, 1, 20, 10, 0, 32'h1, 1'b1, '0);
    go(3);
    wait_irq(3);
    compare("classifier", get_tensor(C_O, 10, 4), e_c);

    // mechanisms
    $display("memory grant stalls:             %0d", n_gnt_stall);
    $display("cycles with 2+ CUs on memory:    %0d", n_contention);
    $display("cycles with Head and Body busy:  %0d", n_concurrent);
    $display("fused-chain back-pressure:       %0d", n_backpressure);
    $display("residual operand transfers:      %0d", n_residual);
    $display("stride-2 output rows:            %0d", n_s2_rows);
    foreach (n_irq[i]) $display("CU %0d: %0d starts, %0d interrupts", i, n_start[i], n_irq[i]);
    checks += 6;
    if (n_gnt_stall == 0)    begin failures++; $display("never: memory grant stall"); end
    if (n_contention == 0)   begin failures++; $display("never: memory contention"); end
    if (n_concurrent == 0)   begin failures++; $display("never: concurrent CUs"); end
    if (n_backpressure == 0) begin failures++; $display("never: fused-chain back-pressure"); end
    if (n_residual != 8*8*6) begin failures++; $display("residual transfers %0d, expected %0d", n_residual, 8*8*6); end
    if (n_s2_rows == 0)      begin failures++; $display("never: stride-2 row"); end
    foreach (n_irq[i]) begin
      checks++;
      if (n_irq[i] == 0 || n_irq[i] != n_start[i]) begin failures++; $display("CU %0d interrupts do not match starts", i); end
    end
    $display("finished at cycle %0d", $time / 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
