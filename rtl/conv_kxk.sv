// conv_kxk: KxK convolution operator, depthwise or normal (fixed at synthesis).
//
// Input and output are channel-wise element streams: the elements of a pixel
// come one after another, channel fastest, pixels in raster order. A square
// h x h input with cfg_n channels is convolved with KxK kernels, zero padding
// K/2 and stride cfg_stride (1 or 2).
//
// Datapath, following the paper's depthwise / normal-convolution diagram:
//  * 3D line buffer: LB_ROWS (= K+1 rounded to a power of two) rows of W_MAX
//    pixels, each pixel a word holding all N_MAX channels. Input rows are
//    written as they arrive; a row slot is reused once no pending output row
//    needs it, so input streaming overlaps computation.
//  * Sliding window: K x K x N_MAX registers. Each cycle one column (K rows,
//    all channels) is read from the line buffer and shifted in from the right;
//    the oldest column drops out on the left. Rows and columns outside the
//    image read as zero.
//  * Parallel multiplier: K*K*N_MAX products of unsigned activations and
//    signed weights from the weight scratchpad, registered.
//  * One pipelined adder tree of K*K inputs per channel.
//  * DEPTHWISE=0 (normal convolution): a second adder tree reduces across the
//    input channels; the window is held while the cfg_m output channels are
//    issued one per cycle, each with its own weight row.
//    DEPTHWISE=1: the N channel sums are written to a scratchpad and a
//    serializer hands them one per cycle to the approximator. The next
//    window is loaded meanwhile, but it is multiplied only after the
//    serializer has emptied the scratchpad, so an output pixel takes about
//    cfg_n + 7 cycles: slower than the paper's one window per cycle when
//    cfg_n is small (the paper's throughput would need a second scratchpad).
//  * Approximator & clip with the output channel's quantization record.
// Outputs leave through a FIFO of FD words. Issue into the pipeline happens
// only when the FIFO plus the words in flight leave room, so a stalled
// consumer never loses data.
//
// Interface: start (one cycle) clears all counters for a new tensor; the cfg_*
// inputs must be stable from start to the last output. Weights are written
// through wt_* (row = output channel for normal convolution, 0 for depthwise;
// column = (c*K + ky)*K + kx) and quantization records through qp_*.
//
// The structure follows the paper; the line-buffer depth, the stall rules,
// the stream order, zero padding value 0 and the credit scheme are this
// design's choices. The paper streams the whole window per cycle; here a
// normal convolution needs cfg_m cycles and a depthwise one cfg_n cycles per
// output pixel, since the output stream carries one element per cycle.
module conv_kxk
  import dd_pkg::*;
#(
  parameter bit          DEPTHWISE = 1'b1,
  parameter int unsigned N_MAX     = 720,
  parameter int unsigned M_MAX     = 1,
  parameter int unsigned K         = 3,
  parameter int unsigned W_MAX     = 112,
  parameter int unsigned BW_IN     = 4,
  parameter int unsigned BW_W      = 4,
  parameter int unsigned BW_OUT    = 4,
  parameter int unsigned ACC_W     = 32,
  parameter int unsigned FD        = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [15:0]          cfg_n,
  input  logic [15:0]          cfg_m,
  input  logic [15:0]          cfg_h,
  input  logic [1:0]           cfg_stride,
  input  logic                 cfg_round,
  input  logic                 wt_we,
  input  logic [15:0]          wt_row,
  input  logic [15:0]          wt_col,
  input  logic [BW_W-1:0]      wt_data,
  input  logic                 qp_we,
  input  logic [15:0]          qp_idx,
  input  qparam_t              qp_data,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [BW_IN-1:0]     in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [BW_OUT-1:0]    out_data
);
  localparam int unsigned KK      = K * K;
  localparam int unsigned P       = K / 2;
  localparam int unsigned LBW     = $clog2(K + 1);
  localparam int unsigned LB_ROWS = 1 << LBW;
  localparam int unsigned M_ROWS  = DEPTHWISE ? 1 : M_MAX;
  localparam int unsigned QN      = DEPTHWISE ? N_MAX : M_MAX;
  localparam int unsigned PW      = BW_IN + BW_W + 1;
  localparam int unsigned CW      = 16;
  localparam int unsigned FDW     = $clog2(FD) + 1;
  localparam logic signed [CW:0] S_P   = (CW+1)'(P);
  localparam logic signed [CW:0] S_KM1 = (CW+1)'(K - 1);
  localparam logic signed [CW:0] S_ONE = (CW+1)'(1);
  localparam logic signed [CW:0] S_LB  = (CW+1)'(LB_ROWS);

  // ---------------- storage ----------------
  logic [N_MAX*BW_IN-1:0]   lb   [LB_ROWS][W_MAX];
  logic [BW_IN-1:0]         win  [K][K][N_MAX];
  logic [N_MAX*KK*BW_W-1:0] wmem [M_ROWS];
  qparam_t                  qmem [QN];

  always_ff @(posedge clk) begin
    if (wt_we) wmem[wt_row][wt_col*BW_W +: BW_W] <= wt_data;
    if (qp_we) qmem[qp_idx] <= qp_data;
  end

  // ---------------- geometry ----------------
  logic        s2;
  logic [15:0] oh;
  assign s2 = (cfg_stride == 2'd2);
  assign oh = s2 ? (((cfg_h + 16'(2*P) - 16'(K)) >> 1) + 16'd1) : (cfg_h + 16'(2*P) - 16'(K) + 16'd1);

  // ---------------- input side: fill the line buffer ----------------
  logic [CW-1:0] in_x, in_y, in_c;
  logic [CW-1:0] oy;
  logic signed [CW:0] oys;       // first input row of the current output row (may be -P)
  logic signed [CW:0] r_lo;      // lowest row still needed
  logic signed [CW:0] need_hi;   // highest row needed by the current output row
  logic          in_fire;

  assign oys     = s2 ? $signed({1'b0, oy[CW-2:0], 1'b0}) - S_P : $signed({1'b0, oy}) - S_P;
  assign r_lo    = (oys < 0) ? '0 : oys;
  assign need_hi = (oys + S_KM1 > $signed({1'b0, cfg_h}) - S_ONE) ? $signed({1'b0, cfg_h}) - S_ONE
                                                                : oys + S_KM1;
  assign in_ready = (in_y < cfg_h) && ($signed({1'b0, in_y}) < r_lo + S_LB);
  assign in_fire  = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_x <= '0; in_y <= '0; in_c <= '0;
    end else if (start) begin
      in_x <= '0; in_y <= '0; in_c <= '0;
    end else if (in_fire) begin
      if (in_c == cfg_n - 1'b1) begin
        in_c <= '0;
        if (in_x == cfg_h - 1'b1) begin
          in_x <= '0;
          in_y <= in_y + 1'b1;
        end else in_x <= in_x + 1'b1;
      end else in_c <= in_c + 1'b1;
    end
  end
  always_ff @(posedge clk)
    if (in_fire) lb[in_y[LBW-1:0]][in_x][in_c*BW_IN +: BW_IN] <= in_data;

  // ---------------- window side ----------------
  logic signed [CW:0] ix, fire_ix;
  logic [CW-1:0]      ox;
  logic               win_full;
  logic               row_ready;
  logic               load;
  logic               advance;      // the job of the current window has been issued
  logic [BW_IN-1:0]   col [K][N_MAX];

  assign row_ready = (oy < oh) && ($signed({1'b0, in_y}) > need_hi);
  assign load      = row_ready && !win_full;

  always_comb begin
    for (int ky = 0; ky < K; ky++) begin
      logic signed [CW:0] iy;
      logic               in_img;
      logic [CW-1:0]      ixc;
      logic [N_MAX*BW_IN-1:0] word;
      iy     = oys + (CW+1)'(ky);
      in_img = (iy >= 0) && (iy < $signed({1'b0, cfg_h})) && (ix >= 0) && (ix < $signed({1'b0, cfg_h}));
      ixc    = in_img ? ix[CW-1:0] : '0;
      word   = lb[iy[LBW-1:0]][ixc];   // one wide line-buffer read per kernel row
      for (int c = 0; c < N_MAX; c++)
        col[ky][c] = in_img ? word[c*BW_IN +: BW_IN] : '0;
    end
  end

  always_ff @(posedge clk) begin
    if (load) begin
      for (int ky = 0; ky < K; ky++) begin
        for (int kx = 0; kx < K - 1; kx++) win[ky][kx] <= win[ky][kx+1];
        win[ky][K-1] <= col[ky];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      oy <= '0; ox <= '0; win_full <= 1'b0;
      ix <= -(CW+1)'(P); fire_ix <= (CW+1)'(K - 1 - P);
    end else if (start) begin
      oy <= '0; ox <= '0; win_full <= 1'b0;
      ix <= -(CW+1)'(P); fire_ix <= (CW+1)'(K - 1 - P);
    end else begin
      if (load) begin
        ix <= ix + 1'b1;
        if (ix == fire_ix) win_full <= 1'b1;
      end
      if (advance) begin
        win_full <= 1'b0;
        if (ox == oh - 1'b1) begin
          ox      <= '0;
          oy      <= oy + 1'b1;
          ix      <= -(CW+1)'(P);
          fire_ix <= (CW+1)'(K - 1 - P);
        end else begin
          ox      <= ox + 1'b1;
          fire_ix <= fire_ix + (s2 ? (CW+1)'(2) : (CW+1)'(1));
        end
      end
    end
  end

  // ---------------- credit for the output FIFO ----------------
  logic [FDW-1:0] reserved;
  logic           credit, issue, pop;
  assign credit = (reserved < FDW'(FD));
  assign pop    = out_valid && out_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     reserved <= '0;
    else if (start) reserved <= '0;
    else            reserved <= reserved + FDW'(issue) - FDW'(pop);
  end

  // ---------------- parallel multiplier ----------------
  logic [KK-1:0][PW-1:0] prod [N_MAX];
  logic                  prod_valid;
  logic [CW-1:0]         prod_tag;
  logic                  mul_go;      // capture products this cycle
  logic [CW-1:0]         mul_row;     // weight row / output channel

  logic [N_MAX*KK*BW_W-1:0] wrow;
  assign wrow = wmem[DEPTHWISE ? '0 : mul_row];   // one wide weight-scratchpad read
  for (genvar c = 0; c < N_MAX; c++) begin : g_mul
    for (genvar k = 0; k < KK; k++) begin : g_tap
      logic signed [BW_W-1:0] w;
      assign w = wrow[(c*KK + k)*BW_W +: BW_W];
      always_ff @(posedge clk)
        if (mul_go)
          prod[c][k] <= (c < cfg_n) ? PW'($signed({1'b0, win[k/K][k%K][c]}) * w) : '0;
    end
  end
  always_ff @(posedge clk)
    if (mul_go) prod_tag <= mul_row;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) prod_valid <= 1'b0;
    else        prod_valid <= mul_go && !start;
  end

  // ---------------- per-channel kernel adder trees ----------------
  logic signed [ACC_W-1:0] ksum [N_MAX];
  logic                    ksum_valid;
  logic [CW-1:0]           ksum_tag;
  for (genvar c = 0; c < N_MAX; c++) begin : g_ktree
    logic          v;
    logic [CW-1:0] t;
    adder_tree #(.N(KK), .IN_W(PW), .OUT_W(ACC_W), .TAG_W(CW)) u_tree (
      .clk, .rst_n, .in_valid(prod_valid), .in_data(prod[c]), .in_tag(prod_tag),
      .out_valid(v), .out_sum(ksum[c]), .out_tag(t));
    if (c == 0) begin : g_first
      assign ksum_valid = v;
      assign ksum_tag   = t;
    end
  end

  // ---------------- mode-specific part and approximator input mux ----------------
  logic                    aq_valid;
  logic signed [ACC_W-1:0] aq_acc;
  qparam_t                 aq_qp;
  logic [CW-1:0]           m_cnt;

  if (DEPTHWISE) begin : g_dw
    // Scratchpad + serializer.
    logic signed [ACC_W-1:0] sp [N_MAX];
    logic                    sp_full, dw_busy;
    logic [CW-1:0]           ser_c;
    assign mul_go  = win_full && !dw_busy && !start;
    assign mul_row = '0;
    assign advance = mul_go;
    assign issue   = sp_full && credit;
    assign m_cnt   = '0;
    always_ff @(posedge clk) if (ksum_valid) sp <= ksum;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        sp_full <= 1'b0; dw_busy <= 1'b0; ser_c <= '0;
      end else if (start) begin
        sp_full <= 1'b0; dw_busy <= 1'b0; ser_c <= '0;
      end else begin
        if (mul_go) dw_busy <= 1'b1;
        if (ksum_valid) begin
          sp_full <= 1'b1;
          ser_c   <= '0;
        end
        if (issue) begin
          if (ser_c == cfg_n - 1'b1) begin
            sp_full <= 1'b0;
            dw_busy <= 1'b0;
          end
          ser_c <= ser_c + 1'b1;
        end
      end
    end
    always_ff @(posedge clk) begin
      aq_acc <= sp[ser_c];
      aq_qp  <= qmem[ser_c];
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) aq_valid <= 1'b0;
      else        aq_valid <= issue && !start;
    end
  end else begin : g_nc
    // Window held while the output channels are issued; channel adder tree.
    logic [N_MAX-1:0][ACC_W-1:0] csum_in;
    logic                        cv;
    logic signed [ACC_W-1:0]     csum;
    logic [CW-1:0]               ctag;
    assign mul_go  = win_full && credit && !start;
    assign issue   = mul_go;
    assign mul_row = m_cnt;
    assign advance = mul_go && (m_cnt == cfg_m - 1'b1);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)      m_cnt <= '0;
      else if (start)  m_cnt <= '0;
      else if (mul_go) m_cnt <= (m_cnt == cfg_m - 1'b1) ? '0 : m_cnt + 1'b1;
    end
    always_comb for (int c = 0; c < N_MAX; c++) csum_in[c] = ksum[c];
    adder_tree #(.N(N_MAX), .IN_W(ACC_W), .OUT_W(ACC_W), .TAG_W(CW)) u_ctree (
      .clk, .rst_n, .in_valid(ksum_valid), .in_data(csum_in), .in_tag(ksum_tag),
      .out_valid(cv), .out_sum(csum), .out_tag(ctag));
    always_ff @(posedge clk) begin
      aq_acc <= csum;
      aq_qp  <= qmem[ctag];
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) aq_valid <= 1'b0;
      else        aq_valid <= cv && !start;
    end
  end

  logic              q_valid;
  logic [BW_OUT-1:0] q;
  logic              f_in_ready;
  logic              unused_tag;
  approx_clip #(.ACC_W(ACC_W), .BW_OUT(BW_OUT), .TAG_W(1)) u_aq (
    .clk, .rst_n, .round_en(cfg_round), .in_valid(aq_valid), .in_acc(aq_acc), .in_qp(aq_qp),
    .in_tag(1'b0), .out_valid(q_valid), .out_q(q), .out_tag(unused_tag));

  stream_fifo #(.DEPTH(FD), .W(BW_OUT)) u_ofifo (
    .clk, .rst_n, .clear(start), .in_valid(q_valid), .in_ready(f_in_ready), .in_data(q),
    .out_valid, .out_ready, .out_data, .count());

  a_fifo_room: assert property (@(posedge clk) disable iff (!rst_n) q_valid |-> f_in_ready);
endmodule
