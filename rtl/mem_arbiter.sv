// mem_arbiter: shares one memory port among NP requesters.
//
// Memory port protocol (used throughout the accelerator in place of the
// AXI HP channels): a requester holds req with we/addr/wdata until gnt is
// high in the same cycle. Reads return later, in request order, as one-cycle
// rvalid pulses with rdata; a requester must always accept them. Writes have
// no response.
// Arbitration is round-robin starting after the last granted port. The port
// index of every granted read is pushed into a tag FIFO of TAGD entries, and
// each returning read word is steered to the port at the head of that FIFO.
// Reads are not granted while the tag FIFO is full. Arbiters can be chained:
// each CU has one for its DMA channels and the top has one for the CUs.
// The paper shows one DMA per CU behind a shared interconnect; this protocol
// and round-robin policy are this design's choices.
module mem_arbiter #(
  parameter int unsigned NP     = 4,
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned DW     = 64,
  parameter int unsigned TAGD   = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NP-1:0]          up_req,
  input  logic [NP-1:0]          up_we,
  input  logic [NP-1:0][ADDR_W-1:0] up_addr,
  input  logic [NP-1:0][DW-1:0]  up_wdata,
  output logic [NP-1:0]          up_gnt,
  output logic [NP-1:0]          up_rvalid,
  output logic [DW-1:0]          up_rdata,
  output logic                   dn_req,
  output logic                   dn_we,
  output logic [ADDR_W-1:0]      dn_addr,
  output logic [DW-1:0]          dn_wdata,
  input  logic                   dn_gnt,
  input  logic                   dn_rvalid,
  input  logic [DW-1:0]          dn_rdata
);
  localparam int unsigned IW  = (NP <= 1) ? 1 : $clog2(NP);
  localparam int unsigned TAW = $clog2(TAGD);

  logic [IW-1:0]  last, sel;
  logic           found;
  logic [IW-1:0]  tags [TAGD];
  logic [TAW:0]   twp, trp;
  logic           tfull, accept;

  assign tfull = ((twp - trp) == (TAW+1)'(TAGD));

  always_comb begin
    found = 1'b0;
    sel   = '0;
    for (int k = 1; k <= NP; k++) begin
      int unsigned i;
      i = (int'(last) + k) % NP;
      if (!found && up_req[i] && (up_we[i] || !tfull)) begin
        found = 1'b1;
        sel   = IW'(i);
      end
    end
  end

  assign dn_req   = found;
  assign dn_we    = up_we[sel];
  assign dn_addr  = up_addr[sel];
  assign dn_wdata = up_wdata[sel];
  assign accept   = found && dn_gnt;

  always_comb begin
    up_gnt = '0;
    if (accept) up_gnt[sel] = 1'b1;
    up_rvalid = '0;
    if (dn_rvalid) up_rvalid[tags[trp[TAW-1:0]]] = 1'b1;
  end
  assign up_rdata = dn_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last <= IW'(NP - 1);
      twp  <= '0;
      trp  <= '0;
    end else begin
      if (accept) last <= sel;
      if (accept && !up_we[sel]) twp <= twp + 1'b1;
      if (dn_rvalid) trp <= trp + 1'b1;
    end
  end
  always_ff @(posedge clk) if (accept && !up_we[sel]) tags[twp[TAW-1:0]] <= sel;

  a_no_stray_read: assert property (@(posedge clk) disable iff (!rst_n) dn_rvalid |-> (twp != trp));
endmodule
