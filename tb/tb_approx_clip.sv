// tb_approx_clip: checks the approximator & clip unit against the reference
// requantization of dd_tb_pkg for random accumulators and records, in both
// truncate and round modes and for 4- and 16-bit outputs, including values
// that must clip at 0 and at the top code. Latency must be one cycle.
module tb_approx_clip;
  import dd_pkg::*;
  import dd_tb_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               rnd, iv, ov4, ov16;
  logic signed [31:0] acc;
  qparam_t            qp;
  logic [3:0]         q4;
  logic [15:0]        q16;
  logic               t4, t16;

  approx_clip #(.ACC_W(32), .BW_OUT(4),  .TAG_W(1)) u4  (.clk, .rst_n, .round_en(rnd), .in_valid(iv),
    .in_acc(acc), .in_qp(qp), .in_tag(1'b1), .out_valid(ov4), .out_q(q4), .out_tag(t4));
  approx_clip #(.ACC_W(32), .BW_OUT(16), .TAG_W(1)) u16 (.clk, .rst_n, .round_en(rnd), .in_valid(iv),
    .in_acc(acc), .in_qp(qp), .in_tag(1'b0), .out_valid(ov16), .out_q(q16), .out_tag(t16));

  int lo_clip = 0, hi_clip = 0;
  initial begin
    iv = 0; rnd = 0; acc = 0; qp = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      rqp_t r;
      int e4, e16;
      @(negedge clk);
      r.bias = int'($urandom_range(2000, 0)) - 1000;
      r.mult = int'($urandom_range(65535, 0));
      r.shift = int'($urandom_range(20, 0));
      r.zp = int'($urandom_range(255, 0));
      rnd = 1'($urandom);
      acc = 32'(int'($urandom_range(200000, 0)) - 100000);
      qp  = qparam_t'(qp_word(r));
      iv  = 1;
      e4  = rq(longint'(acc), r, rnd, 4);
      e16 = rq(longint'(acc), r, rnd, 16);
      if (e4 == 0) lo_clip++;
      if (e4 == 15) hi_clip++;
      @(negedge clk);
      iv = 0;
      checks++;
      if (!ov4 || !ov16 || int'(q4) != e4 || int'(q16) != e16 || t4 != 1'b1 || t16 != 1'b0) begin
        failures++;
        if (failures < 10) $display("acc=%0d r=%p rnd=%0d: got %0d/%0d exp %0d/%0d", acc, r, rnd, q4, q16, e4, e16);
      end
    end
    checks++;
    if (lo_clip == 0 || hi_clip == 0) failures++;
    $display("clipped low %0d, high %0d", lo_clip, hi_clip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
