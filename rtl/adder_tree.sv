// adder_tree: pipelined binary adder tree.
//
// Sums N signed inputs. The inputs are sign-extended to OUT_W and padded with
// zeros to the next power of two; each tree level adds pairs and is followed
// by a register, so the sum appears LAT = max(1, clog2(N)) cycles after the
// inputs with a new set accepted every cycle (no stall; callers reserve room
// downstream before they issue). A TAG_W-bit side band travels with the data.
// The paper draws a "Pipeline Adder tree" after the parallel multiplier of each
// operator; the one-register-per-level structure is this design's choice.
module adder_tree #(
  parameter int unsigned N     = 9,
  parameter int unsigned IN_W  = 16,
  parameter int unsigned OUT_W = 32,
  parameter int unsigned TAG_W = 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic [N-1:0][IN_W-1:0]         in_data,   // signed values
  input  logic [TAG_W-1:0]               in_tag,
  output logic                           out_valid,
  output logic signed [OUT_W-1:0]        out_sum,
  output logic [TAG_W-1:0]               out_tag
);
  localparam int unsigned LV = (N <= 1) ? 1 : $clog2(N);
  localparam int unsigned NP = 1 << LV;

  logic signed [OUT_W-1:0] lvl0 [NP];
  logic signed [OUT_W-1:0] st   [1:LV][NP/2];
  logic [LV:1]             vld;
  logic [TAG_W-1:0]        tag  [1:LV];

  always_comb begin
    for (int i = 0; i < NP; i++)
      lvl0[i] = (i < N) ? OUT_W'($signed(in_data[i])) : '0;
  end

  always_ff @(posedge clk) begin
    for (int l = 1; l <= LV; l++) begin
      for (int i = 0; i < (NP >> l); i++) begin
        if (l == 1) st[l][i] <= lvl0[2*i] + lvl0[2*i+1];
        else        st[l][i] <= st[l-1][2*i] + st[l-1][2*i+1];
      end
      tag[l] <= (l == 1) ? in_tag : tag[l-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else begin
      for (int l = 1; l <= LV; l++) vld[l] <= (l == 1) ? in_valid : vld[l-1];
    end
  end

  assign out_valid = vld[LV];
  assign out_sum   = st[LV][0];
  assign out_tag   = tag[LV];
endmodule
