// tb_cu_regs: checks the CU register block.
// Writes random values to every configuration register and reads them back,
// checks that writes to STATUS are ignored, that a CTRL write with bit 0
// gives exactly one start pulse one cycle later (and none while busy), that
// done_set sets STATUS.done, that CTRL bit 1 clears it, and that irq follows
// done only while CTRL bit 2 (interrupt enable) is set.
module tb_cu_regs;
  import dd_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, starts = 0;

  logic        reg_we, start, busy, done_set, irq;
  logic [3:0]  reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic [NUM_REGS-1:0][31:0] cfg;
  logic [31:0] shadow [NUM_REGS];

  cu_regs dut (.clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .reg_rdata, .cfg, .start, .busy, .done_set, .irq);

  always @(posedge clk) if (start) starts++;

  task automatic wr(int a, logic [31:0] d);
    @(negedge clk);
    reg_we = 1; reg_addr = 4'(a); reg_wdata = d;
    @(negedge clk);
    reg_we = 0;
  endtask
  task automatic expect_eq(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    reg_we = 0; reg_addr = 0; reg_wdata = 0; busy = 0; done_set = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      for (int a = 2; a < NUM_REGS; a++) begin
        shadow[a] = $urandom;
        wr(a, shadow[a]);
      end
      wr(REG_STATUS, 32'hffff_ffff);
      for (int a = 2; a < NUM_REGS; a++) begin
        @(negedge clk); reg_addr = 4'(a); #1;
        expect_eq($sformatf("reg %0d", a), reg_rdata, shadow[a]);
        expect_eq($sformatf("cfg %0d", a), cfg[a], shadow[a]);
      end
      @(negedge clk); reg_addr = 4'(REG_STATUS); #1;
      expect_eq("status after write", reg_rdata, 32'd0);
    end
    // start pulse
    starts = 0;
    wr(REG_CTRL, 32'h1);
    repeat (3) @(negedge clk);
    expect_eq("one start", 32'(starts), 32'd1);
    busy = 1;
    wr(REG_CTRL, 32'h1);
    repeat (3) @(negedge clk);
    expect_eq("no start while busy", 32'(starts), 32'd1);
    @(negedge clk); reg_addr = 4'(REG_STATUS); #1;
    expect_eq("busy bit", reg_rdata, 32'd1);
    // done and irq without enable
    busy = 0; done_set = 1; @(negedge clk); done_set = 0; #1;
    reg_addr = 4'(REG_STATUS); #1;
    expect_eq("done bit", reg_rdata, 32'd2);
    expect_eq("no irq without enable", 32'(irq), 32'd0);
    wr(REG_CTRL, 32'h2);
    reg_addr = 4'(REG_STATUS); #1;
    expect_eq("done cleared", reg_rdata, 32'd0);
    // with enable
    wr(REG_CTRL, 32'h4);
    done_set = 1; @(negedge clk); done_set = 0; #1;
    expect_eq("irq with enable", 32'(irq), 32'd1);
    reg_addr = 4'(REG_CTRL); #1;
    expect_eq("ctrl readback", reg_rdata, 32'h4);
    wr(REG_CTRL, 32'h6);
    expect_eq("irq cleared", 32'(irq), 32'd0);
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
