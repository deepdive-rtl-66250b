// tb_stream_fifo: random pushes and pops against a queue model; checks data
// order, that the FIFO fills to DEPTH and refuses more, and the clear input.
module tb_stream_fifo;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, fulls = 0;

  logic       iv, ir, ov, orr, clr;
  logic [7:0] id, od;
  logic [3:0] cnt;
  stream_fifo #(.DEPTH(8), .W(8)) dut (.clk, .rst_n, .clear(clr), .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(orr), .out_data(od), .count(cnt));
  int q[$];

  initial begin
    iv = 0; orr = 0; id = 0; clr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      iv  = ($urandom_range(2, 0) != 0);
      orr = (it % 500 < 250) ? ($urandom_range(3, 0) == 0) : ($urandom_range(3, 0) != 0);
      id  = 8'($urandom);
      checks++;
      if (int'(cnt) != q.size() || ir != (q.size() < 8) || ov != (q.size() > 0)) begin
        failures++; $display("state mismatch cnt=%0d model=%0d", cnt, q.size());
      end
      if (q.size() == 8) fulls++;
      if (ov && orr) begin
        checks++;
        if (od != 8'(q[0])) begin failures++; $display("data %0d exp %0d", od, q[0]); end
        void'(q.pop_front());
      end
      if (iv && ir) q.push_back(int'(id));
    end
    @(negedge clk); iv = 0; orr = 0; clr = 1;
    @(negedge clk); clr = 0; q = {};
    checks++;
    if (ov || cnt != 0) failures++;
    checks++;
    if (fulls == 0) failures++;
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
