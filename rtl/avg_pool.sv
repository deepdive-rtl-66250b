// avg_pool: reshape buffer and global average pool of the Tail CU.
//
// The input is a channel-wise stream of cfg_hw pixels with cfg_c channels
// each. Because the stream arrives channel-fastest, the pool keeps one
// accumulator per channel (the reshape buffer, C_MAX entries) and adds each
// element to the accumulator of its channel as it arrives, so no reordering
// of the feature map in memory is needed. After the last element the buffer
// streams out one value per channel, channel 0 first: the sum is scaled with
// the record cfg_qp (mult/shift chosen by the host as scale/(h*w)) and
// clipped like every other operator output. The input is held off while the
// results drain.
//
// Timing: one input element per cycle; after the last one, cfg_c output
// elements at one per cycle. start (one cycle) clears the state.
// The paper gives the reshape step and the on-the-fly averaging; folding the
// reshape into per-channel accumulators and the scale record are this
// design's choices.
module avg_pool
  import dd_pkg::*;
#(
  parameter int unsigned C_MAX  = 1280,
  parameter int unsigned BW_IN  = 4,
  parameter int unsigned BW_OUT = 4,
  parameter int unsigned ACC_W  = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [15:0]        cfg_c,
  input  logic [15:0]        cfg_hw,
  input  qparam_t            cfg_qp,
  input  logic               cfg_round,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [BW_IN-1:0]   in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [BW_OUT-1:0]  out_data
);
  logic [ACC_W-1:0] acc [C_MAX];
  logic [15:0]      c, pix, oc;
  logic             draining;
  logic             in_fire, out_fire;
  logic [15:0]      q;

  assign in_ready  = !draining && !start;
  assign in_fire   = in_valid && in_ready;
  assign out_valid = draining;
  assign out_fire  = out_valid && out_ready;
  assign q         = requant(32'(acc[oc]), cfg_qp, cfg_round, BW_OUT);
  assign out_data  = BW_OUT'(q);

  always_ff @(posedge clk)
    if (in_fire) acc[c] <= ((pix == '0) ? '0 : acc[c]) + ACC_W'(in_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; pix <= '0; oc <= '0; draining <= 1'b0;
    end else if (start) begin
      c <= '0; pix <= '0; oc <= '0; draining <= 1'b0;
    end else begin
      if (in_fire) begin
        if (c == cfg_c - 1'b1) begin
          c <= '0;
          if (pix == cfg_hw - 1'b1) begin
            pix      <= '0;
            draining <= 1'b1;
          end else pix <= pix + 1'b1;
        end else c <= c + 1'b1;
      end
      if (out_fire) begin
        if (oc == cfg_c - 1'b1) begin
          oc       <= '0;
          draining <= 1'b0;
        end else oc <= oc + 1'b1;
      end
    end
  end
endmodule
