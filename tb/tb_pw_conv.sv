// tb_pw_conv: checks the pointwise convolution operator against the
// reference 1x1 convolution of dd_tb_pkg.
// Random weights and records are written through the scratchpad ports, then
// random tensors are streamed in with random input gaps and random output
// back-pressure, for several channel counts (including cfg_n = N_MAX and
// cfg_m = M_MAX). Every output element is compared. A run with no gaps and
// no back-pressure checks the paper's rate of one output element per cycle
// (the input also moves one element per cycle, so a pixel takes max(n, m)
// cycles): the run must end within pix*max(n, m) + n + 20 cycles.
// It also counts the cycles where the scratchpad was full and the input had
// to wait (double-buffer back-pressure) and fails if that never happened.
module tb_pw_conv;
  import dd_pkg::*;
  import dd_tb_pkg::*;
  localparam int NM = 12, MM = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, in_waits = 0;

  logic        start, cfg_round, wt_we, qp_we, iv, ir, ov, ordy;
  logic [15:0] cfg_n, cfg_m, wt_row, wt_col, qp_idx;
  logic [3:0]  wt_data, idata, od;
  qparam_t     qp_data;

  pw_conv #(.N_MAX(NM), .M_MAX(MM)) dut (
    .clk, .rst_n, .start, .cfg_n, .cfg_m, .cfg_round, .wt_we, .wt_row, .wt_col, .wt_data,
    .qp_we, .qp_idx, .qp_data, .in_valid(iv), .in_ready(ir), .in_data(idata),
    .out_valid(ov), .out_ready(ordy), .out_data(od));

  task automatic run(int pix, int n, int m, bit gaps, bit rnd);
    iq_t x, w, expv;
    rqq_t qp;
    int got, cyc0, cyc;
    x    = rand_act(pix*n, 4);
    w    = rand_wt(m*n, 4);
    qp   = rand_qp(m, 6);
    expv = ref_pw(x, pix, n, m, w, qp, rnd, 4);
    @(negedge clk);
    cfg_n = 16'(n); cfg_m = 16'(m); cfg_round = rnd;
    for (int i = 0; i < w.size(); i++) begin
      wt_we = 1; wt_row = 16'(i / n); wt_col = 16'(i % n); wt_data = 4'(w[i]);
      @(negedge clk);
    end
    wt_we = 0;
    for (int i = 0; i < m; i++) begin
      qp_we = 1; qp_idx = 16'(i); qp_data = qparam_t'(qp_word(qp[i]));
      @(negedge clk);
    end
    qp_we = 0;
    start = 1; @(negedge clk); start = 0;
    cyc0 = $time / 10;
    got = 0;
    fork
      begin
        for (int i = 0; i < x.size(); i++) begin
          iv = gaps ? ($urandom_range(3, 0) != 0) : 1'b1;
          idata = 4'(x[i]);
          while (1) begin
            @(posedge clk);
            if (iv && !ir) in_waits++;
            if (iv && ir) break;
            #1 iv = gaps ? ($urandom_range(3, 0) != 0) : 1'b1;
          end
          #1;
        end
        iv = 0;
      end
      begin
        while (got < expv.size()) begin
          ordy = gaps ? ($urandom_range(2, 0) != 0) : 1'b1;
          @(posedge clk);
          if (ov && ordy) begin
            checks++;
            if (int'(od) != expv[got]) begin
              failures++;
              if (failures < 10) $display("pix=%0d n=%0d m=%0d idx %0d: got %0d exp %0d", pix, n, m, got, od, expv[got]);
            end
            got++;
          end
          #1;
        end
        ordy = 0;
      end
    join
    cyc = $time / 10 - cyc0;
    if (!gaps) begin
      checks++;
      if (cyc > pix*((m > n) ? m : n) + n + 20) begin
        failures++;
        $display("rate: %0d cycles for %0d outputs (limit %0d)", cyc, pix*m, pix*((m > n) ? m : n) + n + 20);
      end
      $display("pix=%0d n=%0d m=%0d: %0d cycles for %0d outputs", pix, n, m, cyc, pix*m);
    end
    repeat (4) @(negedge clk);
    checks++;
    if (ov) begin failures++; $display("extra output"); end
  endtask

  initial begin
    start = 0; cfg_round = 0; wt_we = 0; qp_we = 0; iv = 0; ordy = 0;
    cfg_n = 1; cfg_m = 1; wt_row = 0; wt_col = 0; qp_idx = 0; wt_data = 0; idata = 0; qp_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(20, 5, 7, 1, 0);
    run(15, NM, MM, 1, 1);
    run(30, 1, 3, 1, 0);
    run(25, 7, 1, 1, 1);
    run(40, 6, 8, 0, 1);
    run(40, NM, MM, 0, 0);
    checks++;
    if (in_waits == 0) failures++;
    $display("input wait cycles (scratchpad full): %0d", in_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
