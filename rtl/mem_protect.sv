// mem_protect: address scrambling and data encryption between a masked core
// and an SRAM that stores a single share.
//
// Storing both shares would double the SRAM. Instead, values leave the masked
// domain only here, and only after a session key has been XORed in:
//   address:  addr_out  = (addr_s1 ^ addr_key) ^ addr_s2
//   write:    wdata_enc = (wdata_s1 ^ data_key) ^ wdata_s2
//   read:     rdata_s1  = (rdata_enc ^ rnd) ^ data_key,  rdata_s2 = rnd
// The key is always applied to share 1 before share 2 is removed, and on the
// way back the stored word is remasked with a fresh random number before the
// key is taken off, so no intermediate node carries a plain value. The keys
// stay constant for a session (one program run) and come from the test
// logic. The SRAM therefore holds data XORed with data_key at addresses
// XORed with addr_key; a program image must be stored in that form.
//
// N_ADDR address channels share one key (the register file has a read and a
// write address). The CW control bits (enables, write enables, byte
// enables) are unmasked by a plain XOR of their shares, since they carry no
// data. Purely combinational. The XOR order and the key/random-number
// structure follow the chip; the control unmasking and the port grouping are
// this design's own.
module mem_protect #(
  parameter int unsigned AW     = 10,
  parameter int unsigned DW     = 32,
  parameter int unsigned N_ADDR = 1,
  parameter int unsigned CW     = 6
) (
  input  logic [AW-1:0]             addr_key,
  input  logic [DW-1:0]             data_key,
  input  logic [N_ADDR-1:0][AW-1:0] addr_s1,
  input  logic [N_ADDR-1:0][AW-1:0] addr_s2,
  output logic [N_ADDR-1:0][AW-1:0] addr_out,
  input  logic [DW-1:0]             wdata_s1,
  input  logic [DW-1:0]             wdata_s2,
  output logic [DW-1:0]             wdata_enc,
  input  logic [DW-1:0]             rdata_enc,
  input  logic [DW-1:0]             rnd,
  output logic [DW-1:0]             rdata_s1,
  output logic [DW-1:0]             rdata_s2,
  input  logic [CW-1:0]             ctrl_s1,
  input  logic [CW-1:0]             ctrl_s2,
  output logic [CW-1:0]             ctrl
);
  logic [N_ADDR-1:0][AW-1:0] addr_k;
  logic [DW-1:0]             wdata_k, rdata_r;

  for (genvar a = 0; a < int'(N_ADDR); a++) begin : g_addr
    assign addr_k[a]   = addr_s1[a] ^ addr_key;
    assign addr_out[a] = addr_k[a] ^ addr_s2[a];
  end
  assign wdata_k   = wdata_s1 ^ data_key;
  assign wdata_enc = wdata_k ^ wdata_s2;
  assign rdata_r   = rdata_enc ^ rnd;
  assign rdata_s1  = rdata_r ^ data_key;
  assign rdata_s2  = rnd;
  assign ctrl      = ctrl_s1 ^ ctrl_s2;
endmodule
