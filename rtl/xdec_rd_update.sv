// xdec_rd_update -- WB-stage destination update of the xDecimate unit.
//
// The memory answers with the 32-bit word that holds the requested byte. This block
// picks the byte out by the two low address bits (addr_lsb_i) and writes it into
// byte lane lane_i = csr[2:1] of the old rd value, leaving the other three bytes:
//   rd_new = rd_old;  rd_new[lane*8 +: 8] = rdata[addr_lsb*8 +: 8]
// Four xDecimates to the same register (eight in an interleaved pair) thus pack
// four activations into one SIMD operand. Purely combinational.
//
// The lane selection by csr[2:1] follows the published design; returning a whole
// word and selecting the byte with the address LSBs is this design's choice of
// memory interface (a RI5CY-style 32-bit data port).
module xdec_rd_update (
  input  logic [31:0] rd_old_i,
  input  logic [1:0]  lane_i,
  input  logic [1:0]  addr_lsb_i,
  input  logic [31:0] rdata_i,
  output logic [31:0] rd_new_o
);

  logic [7:0] byte_val;

  assign byte_val = rdata_i[{addr_lsb_i, 3'b000} +: 8];

  always_comb begin
    rd_new_o = rd_old_i;
    rd_new_o[{lane_i, 3'b000} +: 8] = byte_val;
  end

endmodule
