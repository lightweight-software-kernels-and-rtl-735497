// xdec_decoder -- ID-stage decoder of the xDecimate extension unit.
//
// Recognises the two instructions of the extension in a 32-bit R-type word and
// tells which sparsity flavour (1:4, 1:8 or 1:16) an xDecimate uses; it also splits
// out the rd, rs1 and rs2 register addresses, which the core uses to read its
// three-port register file in the same cycle. Purely combinational.
//
// That a small decoder identifies the flavour in ID follows the published design.
// The bit encoding (opcode 7'h77, funct7 0, funct3 = flavour, 3'b111 = clear) is
// this design's own choice and lives in xdec_pkg. Any other word gives
// is_xdec = is_clear = 0 and is left to the core.
module xdec_decoder
  import xdec_pkg::*;
(
  input  logic [31:0] insn_i,
  output dec_t        dec_o
);

  logic [6:0] opc, f7;
  logic [2:0] f3;
  logic       ours;

  assign opc  = insn_i[6:0];
  assign f3   = insn_i[14:12];
  assign f7   = insn_i[31:25];
  assign ours = (opc == OPC_XDEC) && (f7 == F7_XDEC);

  always_comb begin
    dec_o          = '0;
    dec_o.rd       = insn_i[11:7];
    dec_o.rs1      = insn_i[19:15];
    dec_o.rs2      = insn_i[24:20];
    dec_o.kind     = KIND_1_8;
    if (ours) begin
      unique case (f3)
        F3_XDEC_1_4:  begin dec_o.is_xdec = 1'b1; dec_o.kind = KIND_1_4;  end
        F3_XDEC_1_8:  begin dec_o.is_xdec = 1'b1; dec_o.kind = KIND_1_8;  end
        F3_XDEC_1_16: begin dec_o.is_xdec = 1'b1; dec_o.kind = KIND_1_16; end
        F3_XDEC_CLR:  dec_o.is_clear = 1'b1;
        default:      ;
      endcase
    end
  end

endmodule
