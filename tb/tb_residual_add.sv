// tb_residual_add: checks the residual join.
// Two random operand streams with independent random valid patterns and a
// random output ready are joined; each output is compared with the reference
// requantized sum (cfg_en = 1) or with the a operand (cfg_en = 0, b ignored).
// Since the join is combinational, it also checks the handshake rules in
// every cycle: out_valid = a_valid & (b_valid | !en), and each operand is
// consumed (valid & ready) exactly when the output is; b is never consumed
// with en low.
module tb_residual_add;
  import dd_pkg::*;
  import dd_tb_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       en, rnd, av, ar, bv, br, ov, ordy;
  logic [3:0] ad, bd, od;
  qparam_t    qp;

  residual_add #(.BW(4)) dut (
    .cfg_en(en), .cfg_qp(qp), .cfg_round(rnd), .a_valid(av), .a_ready(ar), .a_data(ad),
    .b_valid(bv), .b_ready(br), .b_data(bd), .out_valid(ov), .out_ready(ordy), .out_data(od));

  task automatic run(bit e, bit r, int cnt);
    iq_t a, b, expv;
    rqq_t q;
    int ia, ib, io;
    a = rand_act(cnt, 4); b = rand_act(cnt, 4); q = rand_qp(1, 3);
    expv = e ? ref_res(a, b, q[0], r, 4) : a;
    en = e; rnd = r; qp = qparam_t'(qp_word(q[0]));
    ia = 0; ib = 0; io = 0;
    while (io < cnt) begin
      @(negedge clk);
      av = (ia < cnt) && ($urandom_range(3, 0) != 0);
      bv = (ib < cnt) && ($urandom_range(3, 0) != 0);
      ordy = ($urandom_range(3, 0) != 0);
      ad = 4'(a[ia < cnt ? ia : 0]); bd = 4'(b[ib < cnt ? ib : 0]);
      #1;
      checks++;
      if (ov != (av && (bv || !e)) || (av && ar) != (ov && ordy) || (bv && br) != (e && ov && ordy)) begin
        failures++;
        $display("handshake error: av=%b bv=%b ordy=%b ov=%b ar=%b br=%b", av, bv, ordy, ov, ar, br);
      end
      if (ov && ordy) begin
        checks++;
        if (int'(od) != expv[io]) begin
          failures++;
          if (failures < 10) $display("en=%0d idx %0d: got %0d exp %0d", e, io, od, expv[io]);
        end
        io++;
      end
      if (av && ar) ia++;
      if (bv && br) ib++;
      if (!e) ib = ia;
    end
  endtask

  initial begin
    en = 0; rnd = 0; av = 0; bv = 0; ordy = 0; ad = 0; bd = 0; qp = '0;
    run(1, 0, 400);
    run(1, 1, 400);
    run(0, 0, 200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
