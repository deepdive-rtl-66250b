// tb_dma: checks the memory-side blocks together: the DMA read channel
// (mem_to_stream), the DMA write channel (stream_to_mem) and the round-robin
// memory arbiter (mem_arbiter), in front of the DDR model.
// The reader (arbiter port 0) copies a random tensor from a source area
// through a randomly throttled stream into the writer (port 1), which packs
// it into a destination area; a third port issues random single-word reads
// and writes to a scratch area and checks the read data it gets back, so the
// arbiter has to route in-order read returns to the right requester.
// Checks: every streamed element, every destination word (including the
// zero fill of the last word), every scratch read, both done flags, and that
// no port is granted without a request. Element widths 4, 8, 16 and 64 bits
// and counts that do not fill the last word are used. With a DDR that never
// stalls, copying 64 words must take at most 3 cycles per word + 40, and the
// testbench fails if the memory never withheld a grant in the stalling runs.
module tb_dma;
  import dd_tb_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, gnt_stalls = 0;

  logic [2:0]       up_req, up_we, up_gnt, up_rvalid;
  logic [2:0][31:0] up_addr;
  logic [2:0][63:0] up_wdata;
  logic [63:0]      up_rdata;
  logic             dn_req, dn_we, dn_gnt, dn_rvalid, dn_gnt_s, dn_rvalid_s, dn_gnt_f, dn_rvalid_f;
  logic [31:0]      dn_addr;
  logic [63:0]      dn_wdata, dn_rdata, dn_rdata_s, dn_rdata_f;
  logic             fast;

  mem_arbiter #(.NP(3), .TAGD(16)) u_arb (
    .clk, .rst_n, .up_req, .up_we, .up_addr, .up_wdata, .up_gnt, .up_rvalid, .up_rdata,
    .dn_req, .dn_we, .dn_addr, .dn_wdata, .dn_gnt, .dn_rvalid, .dn_rdata);
  ddr_model #(.WORDS(4096), .LAT(4), .STALL(1'b1)) u_ddr_s (
    .clk, .rst_n, .req(dn_req && !fast), .we(dn_we), .addr(dn_addr), .wdata(dn_wdata),
    .gnt(dn_gnt_s), .rvalid(dn_rvalid_s), .rdata(dn_rdata_s));
  ddr_model #(.WORDS(4096), .LAT(4), .STALL(1'b0)) u_ddr_f (
    .clk, .rst_n, .req(dn_req && fast), .we(dn_we), .addr(dn_addr), .wdata(dn_wdata),
    .gnt(dn_gnt_f), .rvalid(dn_rvalid_f), .rdata(dn_rdata_f));
  assign dn_gnt    = fast ? dn_gnt_f : dn_gnt_s;
  assign dn_rvalid = fast ? dn_rvalid_f : dn_rvalid_s;
  assign dn_rdata  = fast ? dn_rdata_f : dn_rdata_s;

  logic        start, rd_done, wr_done, rv, rr, wv, wr, gate;
  logic [31:0] src, dst, cnt;
  logic [2:0]  lg;
  logic [63:0] rdat;

  mem_to_stream #(.OUT_W(64)) u_rd (
    .clk, .rst_n, .start, .cfg_base(src), .cfg_count(cnt), .cfg_lg(lg),
    .mem_req(up_req[0]), .mem_we(up_we[0]), .mem_addr(up_addr[0]), .mem_wdata(up_wdata[0]),
    .mem_gnt(up_gnt[0]), .mem_rvalid(up_rvalid[0]), .mem_rdata(up_rdata),
    .out_valid(rv), .out_ready(rr), .out_data(rdat), .done(rd_done));
  assign wv = rv && gate;
  assign rr = wr && gate;
  stream_to_mem #(.IN_W(64)) u_wr (
    .clk, .rst_n, .start, .cfg_base(dst), .cfg_count(cnt), .cfg_lg(lg),
    .in_valid(wv), .in_ready(wr), .in_data(rdat),
    .mem_req(up_req[1]), .mem_we(up_we[1]), .mem_addr(up_addr[1]), .mem_wdata(up_wdata[1]),
    .mem_gnt(up_gnt[1]), .mem_rvalid(up_rvalid[1]), .mem_rdata(up_rdata), .done(wr_done));

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 3; p++) if (up_gnt[p] && !up_req[p]) begin
      failures++; $display("port %0d granted without request", p);
    end
    if (dn_req && !dn_gnt) gnt_stalls++;
  end

  // port 2: random single-word traffic with a scoreboard of expected read data
  logic        p2_req, p2_we;
  logic [31:0] p2_addr;
  logic [63:0] p2_wdata;
  assign up_req[2]   = p2_req;
  assign up_we[2]    = p2_we;
  assign up_addr[2]  = p2_addr;
  assign up_wdata[2] = p2_wdata;
  logic [63:0] scratch [16];
  logic [63:0] exp_q[$];
  bit          p2_on;
  always @(posedge clk) begin
    if (up_rvalid[2]) begin
      checks++;
      if (exp_q.size() == 0 || up_rdata != exp_q[0]) begin failures++; $display("port 2 read data wrong"); end
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
  end
  initial begin
    p2_req = 0; p2_we = 0; p2_addr = 0; p2_wdata = 0;
    for (int i = 0; i < 16; i++) begin
      scratch[i] = '0; u_ddr_s.mem[3000 + i] = '0; u_ddr_f.mem[3000 + i] = '0;
    end
    forever begin
      @(negedge clk);
      if (!p2_req && p2_on && $urandom_range(3, 0) == 0) begin
        p2_req = 1; p2_we = 1'($urandom_range(1, 0)); p2_addr = 32'(3000 + $urandom_range(15, 0));
        p2_wdata = {$urandom, $urandom};
      end
      @(posedge clk);
      if (p2_req && up_gnt[2]) begin
        if (p2_we) scratch[p2_addr - 3000] = p2_wdata;
        else exp_q.push_back(scratch[p2_addr - 3000]);
        #1 p2_req = 0;
      end
    end
  end

  task automatic run(int n, int l, bit throttle, bit f);
    iq_t v;
    logic [63:0] words[$];
    int got, t0, nw;
    fast = f;
    v = {};
    for (int i = 0; i < n; i++) v.push_back(l >= 6 ? int'($urandom) : int'($urandom_range((1 << (1 << l)) - 1, 0)));
    pack(v, l, words);
    nw = words.size();
    src = 32'(100 + $urandom_range(50, 0)); dst = 32'(1500 + $urandom_range(50, 0));
    for (int i = 0; i < nw; i++) begin
      if (f) u_ddr_f.mem[src + i] = words[i]; else u_ddr_s.mem[src + i] = words[i];
      if (f) u_ddr_f.mem[dst + i] = '1;       else u_ddr_s.mem[dst + i] = '1;
    end
    @(negedge clk);
    cnt = 32'(n); lg = 3'(l);
    start = 1; @(negedge clk); start = 0;
    t0 = $time / 10;
    got = 0;
    while (!(rd_done && wr_done)) begin
      gate = throttle ? ($urandom_range(2, 0) != 0) : 1'b1;
      @(posedge clk);
      if (rv && rr) begin
        checks++;
        if (l < 6 ? (int'(rdat) != v[got]) : (rdat[31:0] != 32'(v[got]))) begin
          failures++;
          if (failures < 10) $display("lg=%0d element %0d: got %0h exp %0h", l, got, rdat, v[got]);
        end
        got++;
      end
      #1;
    end
    checks++;
    if (got != n) begin failures++; $display("streamed %0d of %0d", got, n); end
    if (!throttle && f) begin
      checks++;
      if ($time / 10 - t0 > 3 * nw + 40) begin failures++; $display("copy of %0d words took %0d cycles", nw, $time / 10 - t0); end
      $display("copy of %0d words: %0d cycles", nw, $time / 10 - t0);
    end
    repeat (3) @(negedge clk);
    for (int i = 0; i < nw; i++) begin
      logic [63:0] d;
      d = f ? u_ddr_f.mem[dst + i] : u_ddr_s.mem[dst + i];
      checks++;
      if (d != words[i]) begin failures++; $display("lg=%0d dst word %0d: %h vs %h", l, i, d, words[i]); end
    end
  endtask

  initial begin
    start = 0; gate = 0; cnt = 0; lg = 2; src = 0; dst = 0; fast = 0; p2_on = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    p2_on = 1;
    run(37, 2, 1, 0);
    run(100, 3, 1, 0);
    run(9, 4, 1, 0);
    run(21, 6, 1, 0);
    run(1, 2, 0, 0);
    run(64, 6, 1, 0);
    p2_on = 0;
    repeat (20) @(negedge clk);
    run(64, 6, 0, 1);
    checks++;
    if (gnt_stalls == 0) failures++;
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("port 2 reads lost: %0d", exp_q.size()); end
    $display("grant stalls seen: %0d", gnt_stalls);
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
