// sram_sp: single-port synchronous SRAM with byte write enables, the main
// memory (code and data) of the chip: 1024 words of 32 bits (32 kbit).
//
// Written as an array so that it simulates and synthesizes anywhere; on
// silicon it is a foundry SRAM macro. One access per clock: when en is high
// the word at addr is read (rdata is valid the following cycle) or, with we
// high, the bytes selected by be are written. rdata holds its value while en
// is low. The byte enables are this design's choice; the chip's text gives
// only the size and the single port. Contents are not reset.
module sram_sp #(
  parameter int unsigned AW = 10,
  parameter int unsigned DW = 32
) (
  input  logic            clk,
  input  logic            en,
  input  logic            we,
  input  logic [DW/8-1:0] be,
  input  logic [AW-1:0]   addr,
  input  logic [DW-1:0]   wdata,
  output logic [DW-1:0]   rdata
);
  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int b = 0; b < DW / 8; b++)
          if (be[b]) mem[addr][b*8 +: 8] <= wdata[b*8 +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
