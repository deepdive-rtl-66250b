// tb_avg_pool: checks the reshape/average-pool unit against the reference
// average of dd_tb_pkg.
// Random feature maps (pix pixels of c channels, channel fastest) are
// streamed in with random gaps; the per-channel results are drained with
// random back-pressure and compared with clip(round(sum*mult >> shift) + zp).
// One run without gaps checks the timing: input at one element per cycle and
// the c results within c + 4 cycles after the last input. The run also
// checks that the input is held off (in_ready low) while the results drain.
module tb_avg_pool;
  import dd_pkg::*;
  import dd_tb_pkg::*;
  localparam int CM = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, held = 0;

  logic        start, cfg_round, iv, ir, ov, ordy;
  logic [15:0] cfg_c, cfg_hw;
  logic [3:0]  idata, od;
  qparam_t     cfg_qp;

  avg_pool #(.C_MAX(CM)) dut (
    .clk, .rst_n, .start, .cfg_c, .cfg_hw, .cfg_qp, .cfg_round,
    .in_valid(iv), .in_ready(ir), .in_data(idata), .out_valid(ov), .out_ready(ordy), .out_data(od));

  always @(posedge clk) if (ov && !ir) held++;

  task automatic run(int pix, int c, bit gaps, bit rnd);
    iq_t x, expv;
    rqq_t qp;
    int got, t_in, t_out;
    x    = rand_act(pix*c, 4);
    qp   = rand_qp(1, 8);
    expv = ref_avg(x, pix, c, qp[0], rnd, 4);
    @(negedge clk);
    cfg_c = 16'(c); cfg_hw = 16'(pix); cfg_round = rnd; cfg_qp = qparam_t'(qp_word(qp[0]));
    start = 1; @(negedge clk); start = 0;
    got = 0; t_in = 0;
    fork
      begin
        for (int i = 0; i < x.size(); i++) begin
          iv = gaps ? ($urandom_range(2, 0) != 0) : 1'b1;
          idata = 4'(x[i]);
          while (1) begin
            @(posedge clk);
            if (iv && ir) break;
            #1 iv = gaps ? ($urandom_range(2, 0) != 0) : 1'b1;
          end
          #1;
        end
        iv = 0;
        t_in = $time / 10;
      end
      begin
        while (got < c) begin
          ordy = gaps ? ($urandom_range(1, 0) != 0) : 1'b1;
          @(posedge clk);
          if (ov && ordy) begin
            checks++;
            if (int'(od) != expv[got]) begin
              failures++;
              if (failures < 10) $display("pix=%0d c=%0d ch %0d: got %0d exp %0d", pix, c, got, od, expv[got]);
            end
            got++;
          end
          #1;
        end
        ordy = 0;
        t_out = $time / 10;
      end
    join
    if (!gaps) begin
      checks++;
      if (t_out - t_in > c + 4) begin failures++; $display("drain took %0d cycles", t_out - t_in); end
    end
    repeat (3) @(negedge clk);
    checks++;
    if (ov) begin failures++; $display("extra output"); end
  endtask

  initial begin
    start = 0; cfg_round = 0; iv = 0; ordy = 0; cfg_c = 1; cfg_hw = 1; idata = 0; cfg_qp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(49, CM, 1, 1);
    run(9, 5, 1, 0);
    run(1, 3, 1, 1);
    run(16, 12, 0, 1);
    run(49, CM, 0, 0);
    checks++;
    if (held == 0) failures++;
    $display("cycles input held during drain: %0d", held);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
