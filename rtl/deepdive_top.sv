// deepdive_top: the DeepDive accelerator (programmable-logic side).
//
// Four heterogeneous compute units - Head, Body, Tail and Classifier - each
// with its own registers, DMA and scratchpads, share one memory port to the
// DDR holding image, feature tensors, weights and quantization records.
// The host runs a network by configuring one CU after another over the
// register bus and waiting for its interrupt: Head once, Body once per
// inverted residual block, then Tail and Classifier. Feature maps pass from
// CU to CU through memory; inside a CU the operators are fused by streams.
//
// Register bus: reg_addr[5:4] selects the CU (0 Head, 1 Body, 2 Tail,
// 3 Classifier), reg_addr[3:0] the register (map in dd_pkg); writes take one
// cycle, reads are combinational. irq[i] is CU i's completion interrupt.
// Memory port: the request/grant, in-order-read protocol of mem_arbiter; a
// round-robin arbiter merges the four CU DMAs. These two buses stand in for
// the AXI-Lite control bus and the AXI HP data port of the paper's SoC, and
// the DDR, its controller, the SMMU and the host CPU sit outside this module.
module deepdive_top
  import dd_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                reg_we,
  input  logic [5:0]          reg_addr,
  input  logic [31:0]         reg_wdata,
  output logic [31:0]         reg_rdata,
  output logic [3:0]          irq,
  output logic                mem_req,
  output logic                mem_we,
  output logic [ADDR_W-1:0]   mem_addr,
  output logic [MEM_DW-1:0]   mem_wdata,
  input  logic                mem_gnt,
  input  logic                mem_rvalid,
  input  logic [MEM_DW-1:0]   mem_rdata
);
  logic [3:0]               c_req, c_we, c_gnt, c_rvalid, c_sel;
  logic [3:0][ADDR_W-1:0]   c_addr;
  logic [3:0][MEM_DW-1:0]   c_wdata;
  logic [MEM_DW-1:0]        c_rdata;
  logic [3:0][31:0]         c_rd;

  always_comb begin
    c_sel = '0;
    c_sel[reg_addr[5:4]] = 1'b1;
  end
  assign reg_rdata = c_rd[reg_addr[5:4]];

  head_cu u_head (
    .clk, .rst_n, .reg_we(reg_we && c_sel[0]), .reg_addr(reg_addr[3:0]), .reg_wdata, .reg_rdata(c_rd[0]),
    .irq(irq[0]), .mem_req(c_req[0]), .mem_we(c_we[0]), .mem_addr(c_addr[0]), .mem_wdata(c_wdata[0]),
    .mem_gnt(c_gnt[0]), .mem_rvalid(c_rvalid[0]), .mem_rdata(c_rdata));
  body_cu u_body (
    .clk, .rst_n, .reg_we(reg_we && c_sel[1]), .reg_addr(reg_addr[3:0]), .reg_wdata, .reg_rdata(c_rd[1]),
    .irq(irq[1]), .mem_req(c_req[1]), .mem_we(c_we[1]), .mem_addr(c_addr[1]), .mem_wdata(c_wdata[1]),
    .mem_gnt(c_gnt[1]), .mem_rvalid(c_rvalid[1]), .mem_rdata(c_rdata));
  tail_cu u_tail (
    .clk, .rst_n, .reg_we(reg_we && c_sel[2]), .reg_addr(reg_addr[3:0]), .reg_wdata, .reg_rdata(c_rd[2]),
    .irq(irq[2]), .mem_req(c_req[2]), .mem_we(c_we[2]), .mem_addr(c_addr[2]), .mem_wdata(c_wdata[2]),
    .mem_gnt(c_gnt[2]), .mem_rvalid(c_rvalid[2]), .mem_rdata(c_rdata));
  classifier_cu u_cls (
    .clk, .rst_n, .reg_we(reg_we && c_sel[3]), .reg_addr(reg_addr[3:0]), .reg_wdata, .reg_rdata(c_rd[3]),
    .irq(irq[3]), .mem_req(c_req[3]), .mem_we(c_we[3]), .mem_addr(c_addr[3]), .mem_wdata(c_wdata[3]),
    .mem_gnt(c_gnt[3]), .mem_rvalid(c_rvalid[3]), .mem_rdata(c_rdata));

  mem_arbiter #(.NP(4), .ADDR_W(ADDR_W), .DW(MEM_DW), .TAGD(32)) u_hp_arb (
    .clk, .rst_n, .up_req(c_req), .up_we(c_we), .up_addr(c_addr), .up_wdata(c_wdata),
    .up_gnt(c_gnt), .up_rvalid(c_rvalid), .up_rdata(c_rdata),
    .dn_req(mem_req), .dn_we(mem_we), .dn_addr(mem_addr), .dn_wdata(mem_wdata),
    .dn_gnt(mem_gnt), .dn_rvalid(mem_rvalid), .dn_rdata(mem_rdata));
endmodule
