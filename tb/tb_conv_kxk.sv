// tb_conv_kxk: checks the KxK convolution operator in both synthesis-time
// modes against the reference convolution of dd_tb_pkg.
// A depthwise instance (4-bit) and a normal-convolution instance (8-bit
// input and weights) are loaded with random weights and records through
// their scratchpad ports, then fed random feature maps of several sizes,
// channel counts and strides 1 and 2, with random gaps on the input and
// random back-pressure on the output. Every output element is compared. One
// run per mode without gaps or back-pressure also checks the cycle count:
// a depthwise layer must finish within h_out^2 * (n + 8) + 60 cycles and a
// normal one within h_out^2 * (m + 8) + h*h*n + 60 (window held for m cycles).
module tb_conv_kxk;
  import dd_pkg::*;
  import dd_tb_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int stall_events = 0;

  // shared control
  logic        start;
  logic [15:0] cfg_n, cfg_m, cfg_h;
  logic [1:0]  cfg_s;
  logic        cfg_round;
  logic        wt_we, qp_we;
  logic [15:0] wt_row, wt_col, qp_idx;
  logic [7:0]  wt_data;
  qparam_t     qp_data;
  logic        sel_nc;
  logic        iv, ordy;
  logic [7:0]  idata;

  logic        dw_ir, dw_ov, nc_ir, nc_ov;
  logic [3:0]  dw_od, nc_od;

  conv_kxk #(.DEPTHWISE(1'b1), .N_MAX(5), .M_MAX(1), .K(3), .W_MAX(9), .BW_IN(4), .BW_W(4), .BW_OUT(4), .FD(8)) u_dw (
    .clk, .rst_n, .start(start && !sel_nc), .cfg_n, .cfg_m, .cfg_h, .cfg_stride(cfg_s), .cfg_round,
    .wt_we(wt_we && !sel_nc), .wt_row, .wt_col, .wt_data(wt_data[3:0]), .qp_we(qp_we && !sel_nc), .qp_idx, .qp_data,
    .in_valid(iv && !sel_nc), .in_ready(dw_ir), .in_data(idata[3:0]), .out_valid(dw_ov), .out_ready(ordy), .out_data(dw_od));
  conv_kxk #(.DEPTHWISE(1'b0), .N_MAX(3), .M_MAX(4), .K(3), .W_MAX(9), .BW_IN(8), .BW_W(8), .BW_OUT(4), .FD(8)) u_nc (
    .clk, .rst_n, .start(start && sel_nc), .cfg_n, .cfg_m, .cfg_h, .cfg_stride(cfg_s), .cfg_round,
    .wt_we(wt_we && sel_nc), .wt_row, .wt_col, .wt_data, .qp_we(qp_we && sel_nc), .qp_idx, .qp_data,
    .in_valid(iv && sel_nc), .in_ready(nc_ir), .in_data(idata), .out_valid(nc_ov), .out_ready(ordy), .out_data(nc_od));

  logic ir, ov;
  logic [3:0] od;
  assign ir = sel_nc ? nc_ir : dw_ir;
  assign ov = sel_nc ? nc_ov : dw_ov;
  assign od = sel_nc ? nc_od : dw_od;

  task automatic run(bit nc, int h, int n, int m, int s, bit gaps, bit rnd);
    iq_t x, w, expv;
    rqq_t qp;
    int bw_in, cols, nout, got, cyc0, cyc, limit, oh;
    bw_in = nc ? 8 : 4;
    oh    = conv_out(h, s, 3);
    x     = rand_act(h*h*n, bw_in);
    w     = nc ? rand_wt(m*n*9, 8) : rand_wt(n*9, 4);
    qp    = rand_qp(nc ? m : n, nc ? 12 : 7);
    expv  = ref_conv(x, h, n, m, s, 3, !nc, w, qp, rnd, 4);
    @(negedge clk);
    sel_nc = nc; cfg_n = 16'(n); cfg_m = 16'(m); cfg_h = 16'(h); cfg_s = 2'(s); cfg_round = rnd;
    // load weights and records
    cols = n * 9;
    for (int i = 0; i < w.size(); i++) begin
      wt_we = 1; wt_row = 16'(nc ? i / cols : 0); wt_col = 16'(nc ? i % cols : i); wt_data = 8'(w[i]);
      @(negedge clk);
    end
    wt_we = 0;
    for (int i = 0; i < qp.size(); i++) begin
      qp_we = 1; qp_idx = 16'(i); qp_data = qparam_t'(qp_word(qp[i]));
      @(negedge clk);
    end
    qp_we = 0;
    start = 1; @(negedge clk); start = 0;
    cyc0 = $time / 10;
    nout = expv.size();
    got  = 0;
    fork
      begin
        for (int i = 0; i < x.size(); i++) begin
          iv = gaps ? ($urandom_range(3, 0) != 0) : 1'b1;
          idata = 8'(x[i]);
          while (1) begin
            @(posedge clk);
            if (iv && ir) break;
            #1 iv = gaps ? ($urandom_range(3, 0) != 0) : 1'b1;
          end
          #1;
        end
        iv = 0;
      end
      begin
        while (got < nout) begin
          ordy = gaps ? ($urandom_range(2, 0) != 0) : 1'b1;
          @(posedge clk);
          if (ov && !ordy) stall_events++;
          if (ov && ordy) begin
            checks++;
            if (int'(od) != expv[got]) begin
              failures++;
              if (failures < 10) $display("%s h=%0d s=%0d idx %0d: got %0d exp %0d", nc ? "NC" : "DW", h, s, got, od, expv[got]);
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
      limit = nc ? (oh*oh*(m + 8) + h*h*n + 60) : (oh*oh*(n + 8) + 60);
      checks++;
      if (cyc > limit) begin failures++; $display("%s too slow: %0d cycles, limit %0d", nc ? "NC" : "DW", cyc, limit); end
      $display("%s h=%0d n=%0d m=%0d s=%0d: %0d cycles for %0d outputs", nc ? "NC" : "DW", h, n, m, s, cyc, nout);
    end
    repeat (5) @(negedge clk);
    checks++;
    if (ov) begin failures++; $display("extra output"); end
  endtask

  initial begin
    start = 0; wt_we = 0; qp_we = 0; iv = 0; ordy = 0; sel_nc = 0; idata = 0;
    cfg_n = 1; cfg_m = 1; cfg_h = 3; cfg_s = 1; cfg_round = 0; wt_row = 0; wt_col = 0; wt_data = 0; qp_idx = 0; qp_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 7, 5, 5, 1, 1, 0);
    run(0, 9, 3, 3, 2, 1, 1);
    run(0, 6, 4, 4, 2, 1, 0);
    run(0, 9, 5, 5, 1, 0, 1);
    run(1, 9, 3, 4, 2, 1, 1);
    run(1, 5, 2, 3, 1, 1, 0);
    run(1, 8, 3, 4, 2, 0, 0);
    checks++;
    if (stall_events == 0) failures++;
    $display("output back-pressure cycles: %0d", stall_events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
