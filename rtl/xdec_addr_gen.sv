// xdec_addr_gen -- EX-stage address generator of the xDecimate unit.
//
// Computes the byte address of the activation to load:
//   1:8, 1:16 : o = rs2[csr[2:0]*4 +: 4]      (eight 4-bit offsets per word)
//   1:4       : o = rs2[csr[3:0]*2 +: 2]      (sixteen 2-bit offsets per word)
//   addr      = rs1 + M*csr[CSR_W-1:1] + o    (M = 4, 8, 16: shift by 2, 3, 4)
// Because the block index is csr >> 1, two consecutive xDecimates address the same
// M-sized block (the two im2col buffers of the convolution kernel, or the two output
// channels of the FC kernel), while every call takes a new field of rs2.
// Purely combinational: two bit-select muxes, a shift mux and a three-input adder.
//
// These equations and the structure follow the published design. The published
// block diagram labels the shifted block offset csr_offs as 7 bits wide, whereas the
// published equation uses all of csr[15:1]; this module follows the equation (a
// 19-bit block offset at CSR_W = 16), which the layer sizes of the evaluation need.
module xdec_addr_gen
  import xdec_pkg::*;
#(
  parameter int unsigned CSR_W = xdec_pkg::CSR_WIDTH
) (
  input  kind_e            kind_i,
  input  logic [CSR_W-1:0] csr_i,
  input  logic [31:0]      base_addr_i,   // rs1
  input  logic [31:0]      offsets_i,     // rs2
  output logic [31:0]      addr_o
);

  logic [31:0]      offset_idx;  // unpacked NZ offset o
  logic [31:0]      csr_offs;    // M * csr[CSR_W-1:1]

  logic [1:0]       o2;
  logic [3:0]       o4;
  logic [CSR_W-2:0] blk;

  assign o2  = offsets_i[{csr_i[3:0], 1'b0} +: 2];
  assign o4  = offsets_i[{csr_i[2:0], 2'b00} +: 4];
  assign blk = csr_i[CSR_W-1:1];

  always_comb begin
    unique case (kind_i)
      KIND_1_4: begin
        offset_idx = 32'(o2);
        csr_offs   = 32'(blk) << 2;
      end
      KIND_1_8: begin
        offset_idx = 32'(o4);
        csr_offs   = 32'(blk) << 3;
      end
      default: begin
        offset_idx = 32'(o4);
        csr_offs   = 32'(blk) << 4;
      end
    endcase
  end

  assign addr_o = base_addr_i + csr_offs + offset_idx;

endmodule
