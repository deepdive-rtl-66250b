// tb_adder_tree: checks the pipelined adder tree.
// Two trees (9 and 5 inputs) get random signed vectors on random cycles; each
// sum is compared with a sum formed in the testbench, and it must appear
// exactly clog2(N) cycles after its inputs, together with its tag.
module tb_adder_tree;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;

  logic                 v9, ov9, v5, ov5;
  logic [8:0][7:0]      d9;
  logic [4:0][7:0]      d5;
  logic signed [15:0]   s9, s5;
  logic [7:0]           t9, ot9, t5, ot5;

  adder_tree #(.N(9), .IN_W(8), .OUT_W(16), .TAG_W(8)) u9 (
    .clk, .rst_n, .in_valid(v9), .in_data(d9), .in_tag(t9), .out_valid(ov9), .out_sum(s9), .out_tag(ot9));
  adder_tree #(.N(5), .IN_W(8), .OUT_W(16), .TAG_W(8)) u5 (
    .clk, .rst_n, .in_valid(v5), .in_data(d5), .in_tag(t5), .out_valid(ov5), .out_sum(s5), .out_tag(ot5));

  int exp9[$], exp5[$], due9[$], due5[$], tag9[$], tag5[$];

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    v9 = 0; v5 = 0; d9 = '0; d5 = '0; t9 = 0; t5 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      v9 = ($urandom_range(3, 0) != 0);
      v5 = ($urandom_range(1, 0) != 0);
      begin
        int s; s = 0;
        for (int i = 0; i < 9; i++) begin d9[i] = 8'($urandom); s += int'($signed(d9[i])); end
        t9 = 8'(it);
        if (v9) begin exp9.push_back(s); due9.push_back(cyc + 4); tag9.push_back(it % 256); end
      end
      begin
        int s; s = 0;
        for (int i = 0; i < 5; i++) begin d5[i] = 8'($urandom); s += int'($signed(d5[i])); end
        t5 = 8'(it + 7);
        if (v5) begin exp5.push_back(s); due5.push_back(cyc + 3); tag5.push_back((it + 7) % 256); end
      end
    end
    @(negedge clk); v9 = 0; v5 = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp9.size() != 0 || exp5.size() != 0) begin failures++; $display("missing sums"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (ov9) begin
      checks++;
      if (exp9.size() == 0) failures++;
      else begin
        int e, d, t;
        e = exp9.pop_front(); d = due9.pop_front(); t = tag9.pop_front();
        if (int'(s9) != e || d != cyc || int'(ot9) != t) begin
          failures++; $display("N=9: got %0d exp %0d at %0d due %0d", s9, e, cyc, d);
        end
      end
    end
    if (ov5) begin
      checks++;
      if (exp5.size() == 0) failures++;
      else begin
        int e, d, t;
        e = exp5.pop_front(); d = due5.pop_front(); t = tag5.pop_front();
        if (int'(s5) != e || d != cyc || int'(ot5) != t) begin
          failures++; $display("N=5: got %0d exp %0d at %0d due %0d", s5, e, cyc, d);
        end
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
