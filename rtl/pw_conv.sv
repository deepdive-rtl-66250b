// pw_conv: pointwise (1x1) convolution operator; also the classifier datapath.
//
// Input and output are channel-wise element streams (channel fastest). The
// input scratchpad gathers the cfg_n channels of one pixel; it has two banks
// so the next pixel is gathered while the current one is computed. For each
// of the cfg_m output channels, one per cycle, the single-cycle parallel
// multiplier forms the N_MAX products of the pixel with one weight-scratchpad
// row (N_MAX parallel read ports), a pipelined adder tree sums them and the
// approximator requantizes the sum with that channel's record. Channels at or
// above cfg_n contribute zero.
//
// Interface and timing: start (one cycle) clears the state for a new tensor;
// cfg_* must stay stable until the last output. Weights are written through
// wt_* (row = output channel, column = input channel), quantization records
// through qp_*. Steady-state rate: one output element per cycle, i.e. cfg_m
// cycles per pixel, once cfg_n input elements have arrived. Latency from the
// issue of a channel to the FIFO: 1 + clog2(N_MAX) + 2 cycles. Outputs wait
// in a FIFO of FD words; issue needs a free FIFO slot counting words in flight.
//
// Parallelism across the input channels, the input scratchpad with parallel
// ports and the single-cycle multiplier follow the paper; double buffering of
// the input scratchpad and the credit scheme are this design's choices.
module pw_conv
  import dd_pkg::*;
#(
  parameter int unsigned N_MAX  = 720,
  parameter int unsigned M_MAX  = 240,
  parameter int unsigned BW_IN  = 4,
  parameter int unsigned BW_W   = 4,
  parameter int unsigned BW_OUT = 4,
  parameter int unsigned ACC_W  = 32,
  parameter int unsigned FD     = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [15:0]          cfg_n,
  input  logic [15:0]          cfg_m,
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
  localparam int unsigned PW  = BW_IN + BW_W + 1;
  localparam int unsigned CW  = 16;
  localparam int unsigned FDW = $clog2(FD) + 1;

  logic [N_MAX*BW_W-1:0] wmem [M_MAX];
  qparam_t               qmem [M_MAX];
  logic [N_MAX*BW_IN-1:0] ibuf [2];

  always_ff @(posedge clk) begin
    if (wt_we) wmem[wt_row][wt_col*BW_W +: BW_W] <= wt_data;
    if (qp_we) qmem[qp_idx] <= qp_data;
  end

  // ---------------- input scratchpad (two banks) ----------------
  logic [1:0]    full;
  logic          wr_bank, rd_bank;
  logic [CW-1:0] in_c, m_cnt;
  logic          in_fire, issue, last_m, pop;
  logic [FDW-1:0] reserved;

  assign in_ready = !full[wr_bank];
  assign in_fire  = in_valid && in_ready;
  assign issue    = full[rd_bank] && (reserved < FDW'(FD)) && !start;
  assign last_m   = (m_cnt == cfg_m - 1'b1);
  assign pop      = out_valid && out_ready;

  always_ff @(posedge clk) if (in_fire) ibuf[wr_bank][in_c*BW_IN +: BW_IN] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wr_bank <= 1'b0; rd_bank <= 1'b0; in_c <= '0; m_cnt <= '0; reserved <= '0;
    end else if (start) begin
      full <= '0; wr_bank <= 1'b0; rd_bank <= 1'b0; in_c <= '0; m_cnt <= '0; reserved <= '0;
    end else begin
      reserved <= reserved + FDW'(issue) - FDW'(pop);
      if (in_fire) begin
        if (in_c == cfg_n - 1'b1) begin
          in_c          <= '0;
          full[wr_bank] <= 1'b1;
          wr_bank       <= !wr_bank;
        end else in_c <= in_c + 1'b1;
      end
      if (issue) begin
        if (last_m) begin
          m_cnt         <= '0;
          full[rd_bank] <= 1'b0;
          rd_bank       <= !rd_bank;
        end else m_cnt <= m_cnt + 1'b1;
      end
    end
  end

  // ---------------- single-cycle parallel multiplier ----------------
  logic [N_MAX-1:0][PW-1:0] prod;
  logic                     prod_valid;
  logic [CW-1:0]            prod_tag;
  logic [N_MAX*BW_W-1:0]  wrow;
  logic [N_MAX*BW_IN-1:0] xrow;
  assign wrow = wmem[m_cnt];      // one wide read of the weight scratchpad
  assign xrow = ibuf[rd_bank];    // one wide read of the input scratchpad
  always_ff @(posedge clk) begin
    if (issue) begin
      for (int c = 0; c < N_MAX; c++) begin
        logic signed [BW_W-1:0] w;
        w = wrow[c*BW_W +: BW_W];
        prod[c] <= (c < cfg_n) ? PW'($signed({1'b0, xrow[c*BW_IN +: BW_IN]}) * w) : '0;
      end
      prod_tag <= m_cnt;
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) prod_valid <= 1'b0;
    else        prod_valid <= issue;
  end

  // ---------------- adder tree, approximator, output FIFO ----------------
  logic                    sv;
  logic signed [ACC_W-1:0] sum;
  logic [CW-1:0]           stag;
  adder_tree #(.N(N_MAX), .IN_W(PW), .OUT_W(ACC_W), .TAG_W(CW)) u_tree (
    .clk, .rst_n, .in_valid(prod_valid), .in_data(prod), .in_tag(prod_tag),
    .out_valid(sv), .out_sum(sum), .out_tag(stag));

  logic                    aq_valid;
  logic signed [ACC_W-1:0] aq_acc;
  qparam_t                 aq_qp;
  always_ff @(posedge clk) begin
    aq_acc <= sum;
    aq_qp  <= qmem[stag];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) aq_valid <= 1'b0;
    else        aq_valid <= sv && !start;
  end

  logic              q_valid, f_in_ready, unused_tag;
  logic [BW_OUT-1:0] q;
  approx_clip #(.ACC_W(ACC_W), .BW_OUT(BW_OUT), .TAG_W(1)) u_aq (
    .clk, .rst_n, .round_en(cfg_round), .in_valid(aq_valid), .in_acc(aq_acc), .in_qp(aq_qp),
    .in_tag(1'b0), .out_valid(q_valid), .out_q(q), .out_tag(unused_tag));
  stream_fifo #(.DEPTH(FD), .W(BW_OUT)) u_ofifo (
    .clk, .rst_n, .clear(start), .in_valid(q_valid), .in_ready(f_in_ready), .in_data(q),
    .out_valid, .out_ready, .out_data, .count());

  a_fifo_room: assert property (@(posedge clk) disable iff (!rst_n) q_valid |-> f_in_ready);
endmodule
