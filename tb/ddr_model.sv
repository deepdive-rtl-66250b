// ddr_model: behavioural model of the shared DDR memory behind the memory port.
//
// WORDS words of 64 bits. A request is granted in the cycle it is seen,
// except that with STALL set the grant is withheld on random cycles. Reads
// return in order LAT cycles after the grant as one-cycle rvalid pulses.
// Testbenches preload and inspect the array mem directly. Not synthesizable
// by intent: it models an external memory chip and controller.
module ddr_model #(
  parameter int unsigned WORDS = 65536,
  parameter int unsigned LAT   = 4,
  parameter bit          STALL = 1'b1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req,
  input  logic         we,
  input  logic [31:0]  addr,
  input  logic [63:0]  wdata,
  output logic         gnt,
  output logic         rvalid,
  output logic [63:0]  rdata
);
  logic [63:0] mem [WORDS];
  longint      cyc;
  longint      due_q[$];
  logic [63:0] dat_q[$];
  logic        gnt_r;
  int unsigned reads, writes;

  assign gnt = gnt_r;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc <= 0; gnt_r <= 1'b0; rvalid <= 1'b0; reads <= 0; writes <= 0;
    end else begin
      cyc    <= cyc + 1;
      gnt_r  <= STALL ? ($urandom_range(3, 0) != 0) : 1'b1;
      rvalid <= 1'b0;
      if (req && gnt_r) begin
        if (we) begin
          mem[addr % WORDS] <= wdata;
          writes <= writes + 1;
        end else begin
          due_q.push_back(cyc + LAT);
          dat_q.push_back(mem[addr % WORDS]);
          reads <= reads + 1;
        end
      end
      if (due_q.size() > 0 && due_q[0] <= cyc) begin
        rvalid <= 1'b1;
        rdata  <= dat_q.pop_front();
        void'(due_q.pop_front());
      end
    end
  end
endmodule
