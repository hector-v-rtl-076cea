// banked_regfile: the RVSCP register file with one register set per virtual
// core.
//
// The paper swaps register files on a context switch by giving the processor
// four extra register sets; the hardware scheduler selects the set of the
// virtual core that runs (bank_i), so a switch costs no register copying.
// Each bank has 32 registers of 32 bits (RV32), x0 reads as zero. Two
// combinational read ports and one write port, written at the clock edge,
// as in the RI5CY flip-flop register file. All banks are cleared at reset
// (this RTL's choice). A write goes to the bank selected in that cycle.
module banked_regfile #(
  parameter int unsigned NUM_BANKS = 4,
  parameter int unsigned XLEN      = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [$clog2(NUM_BANKS)-1:0] bank_i,
  input  logic [4:0]                   raddr_a_i,
  output logic [XLEN-1:0]              rdata_a_o,
  input  logic [4:0]                   raddr_b_i,
  output logic [XLEN-1:0]              rdata_b_o,
  input  logic                         we_i,
  input  logic [4:0]                   waddr_i,
  input  logic [XLEN-1:0]              wdata_i
);
  logic [XLEN-1:0] regs_q [NUM_BANKS][32];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NUM_BANKS; b++)
        for (int r = 0; r < 32; r++) regs_q[b][r] <= '0;
    end else if (we_i && waddr_i != 5'd0) begin
      regs_q[bank_i][waddr_i] <= wdata_i;
    end
  end

  assign rdata_a_o = (raddr_a_i == 5'd0) ? '0 : regs_q[bank_i][raddr_a_i];
  assign rdata_b_o = (raddr_b_i == 5'd0) ? '0 : regs_q[bank_i][raddr_b_i];
endmodule
