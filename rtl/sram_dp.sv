// sram_dp: dual-port synchronous SRAM holding the register file: 512 words of
// 2 bits (32 registers x 32 bits), one write port and one read port.
//
// Written as an array; on silicon it is a foundry two-port SRAM macro. The
// read port returns mem[raddr] one cycle after re is high; the write port
// stores wdata at waddr when we is high. Both ports share one clock. A read
// of the word being written in the same cycle returns the old contents. The
// 2-bit word width follows the chip (it lets one read port serve both
// source operands of the bit-serial core); the port timing is assumed.
module sram_dp #(
  parameter int unsigned AW = 9,
  parameter int unsigned DW = 2
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata
);
  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end
endmodule
