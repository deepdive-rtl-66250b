// cu_regs: configuration and status registers of one compute unit.
//
// The host configures a CU at run time over a simple register bus that
// stands in for AXI-Lite: reg_we with reg_addr (word index) and reg_wdata
// writes a register in one cycle; reg_rdata returns the addressed register
// combinationally. The map is in dd_pkg: CTRL (write bit0 = start pulse,
// bit1 = clear done, bit2 = interrupt enable), STATUS (bit0 busy, bit1 done),
// tensor pointers and the layer shape (H, N, M, E, stride, rounding, an
// extra quantization record). done is set by done_set from the CU sequencer
// and held until cleared or the next start; irq = done and enable.
// The paper lists pointers, N, M and H as run-time parameters and an
// interrupt to the host on completion; the register layout is this design's.
module cu_regs
  import dd_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        reg_we,
  input  logic [3:0]                  reg_addr,
  input  logic [31:0]                 reg_wdata,
  output logic [31:0]                 reg_rdata,
  output logic [NUM_REGS-1:0][31:0]   cfg,
  output logic                        start,
  input  logic                        busy,
  input  logic                        done_set,
  output logic                        irq
);
  logic [NUM_REGS-1:0][31:0] r;
  logic                      done, irq_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= '0; done <= 1'b0; irq_en <= 1'b0; start <= 1'b0;
    end else begin
      start <= 1'b0;
      if (done_set) done <= 1'b1;
      if (reg_we) begin
        if (reg_addr == 4'(REG_CTRL)) begin
          start  <= reg_wdata[0] && !busy;
          irq_en <= reg_wdata[2];
          if (reg_wdata[1] || reg_wdata[0]) done <= 1'b0;
        end else if (reg_addr != 4'(REG_STATUS)) begin
          r[reg_addr] <= reg_wdata;
        end
      end
    end
  end

  always_comb begin
    cfg = r;
    cfg[REG_CTRL]   = {29'd0, irq_en, 2'b00};
    cfg[REG_STATUS] = {30'd0, done, busy};
    reg_rdata = cfg[reg_addr];
  end
  assign irq = done && irq_en;
endmodule
