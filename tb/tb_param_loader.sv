// tb_param_loader: checks the parameter loader against the DDR model.
// Three segments (4-bit weights in rows of 5, 8-bit weights in rows of 7 and
// 64-bit quantization records) are packed into memory one after the other,
// each starting on a fresh word, and the loader is started twice with
// different sizes and base addresses. Every scratchpad write it emits
// (operator, kind, row, column, data) is compared in order with the expected
// sequence; the testbench also checks that done rises only after the last
// write and that the number of cycles stays below 3 per element + 30 per
// segment with a memory that withholds grants at random.
module tb_param_loader;
  import dd_pkg::*;
  import dd_tb_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              start, done;
  logic [31:0]       base;
  logic [2:0][31:0]  seg_count;
  logic [2:0][2:0]   seg_lg;
  logic [2:0][15:0]  seg_cols;
  logic [2:0][1:0]   seg_op;
  seg_kind_e [2:0]   seg_kind;
  logic              mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0]       mem_addr;
  logic [63:0]       mem_wdata, mem_rdata;
  logic              pl_we;
  logic [1:0]        pl_op;
  seg_kind_e         pl_kind;
  logic [15:0]       pl_row, pl_col;
  logic [63:0]       pl_data;

  param_loader #(.NSEG(3)) dut (
    .clk, .rst_n, .start, .cfg_base(base), .seg_count, .seg_lg, .seg_cols, .seg_op, .seg_kind,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata,
    .pl_we, .pl_op, .pl_kind, .pl_row, .pl_col, .pl_data, .done);
  ddr_model #(.WORDS(4096), .LAT(3), .STALL(1'b1)) u_ddr (
    .clk, .rst_n, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
    .gnt(mem_gnt), .rvalid(mem_rvalid), .rdata(mem_rdata));

  typedef struct { int op; int kind; int row; int col; logic [63:0] data; } wr_t;

  task automatic run(int b, int c0, int c1, int c2);
    wr_t exp_q[$];
    int cnts[3], lgs[3], cols[3], addr, idx, t0;
    cnts = '{c0, c1, c2}; lgs = '{2, 3, 6}; cols = '{5, 7, 1};
    addr = b;
    for (int s = 0; s < 3; s++) begin
      iq_t v;
      logic [63:0] words[$];
      v = {};
      for (int i = 0; i < cnts[s]; i++) begin
        wr_t w;
        v.push_back(lgs[s] == 6 ? int'($urandom) : int'($urandom_range((1 << (1 << lgs[s])) - 1, 0)));
        w.op = s; w.kind = (s == 2); w.row = i / cols[s]; w.col = i % cols[s];
        w.data = (lgs[s] == 6) ? 64'(v[i]) : 64'(unsigned'(v[i]));
        exp_q.push_back(w);
      end
      pack(v, lgs[s], words);
      foreach (words[i]) u_ddr.mem[addr + i] = words[i];
      addr += words.size();
    end
    @(negedge clk);
    base = 32'(b);
    for (int s = 0; s < 3; s++) begin
      seg_count[s] = 32'(cnts[s]); seg_lg[s] = 3'(lgs[s]); seg_cols[s] = 16'(cols[s]);
      seg_op[s] = 2'(s); seg_kind[s] = (s == 2) ? SEG_QPARAM : SEG_WEIGHT;
    end
    start = 1; @(negedge clk); start = 0;
    t0 = $time / 10;
    idx = 0;
    while (!done) begin
      @(posedge clk);
      if (pl_we) begin
        checks++;
        if (idx >= exp_q.size() || pl_op != 2'(exp_q[idx].op) || int'(pl_kind) != exp_q[idx].kind ||
            int'(pl_row) != exp_q[idx].row || int'(pl_col) != exp_q[idx].col || pl_data != exp_q[idx].data) begin
          failures++;
          if (failures < 10) $display("write %0d: op=%0d row=%0d col=%0d data=%h", idx, pl_op, pl_row, pl_col, pl_data);
        end
        idx++;
      end
      #1;
    end
    checks++;
    if (idx != exp_q.size()) begin failures++; $display("%0d writes, expected %0d", idx, exp_q.size()); end
    checks++;
    if ($time / 10 - t0 > 3 * exp_q.size() + 90) begin failures++; $display("load took %0d cycles", $time / 10 - t0); end
    repeat (3) @(negedge clk);
    checks++;
    if (pl_we) failures++;
  endtask

  initial begin
    start = 0; base = 0; seg_count = '0; seg_lg = '0; seg_cols = '0; seg_op = '0; seg_kind = '{SEG_WEIGHT, SEG_WEIGHT, SEG_WEIGHT};
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(10, 45, 21, 3);
    run(700, 17, 7, 5);
    run(1000, 1, 1, 1);
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
