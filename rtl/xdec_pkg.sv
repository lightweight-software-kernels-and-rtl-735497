// xdec_pkg -- types and constants shared by the xDecimate extension unit.
//
// xDecimate is an R-type RISC-V instruction, "xdecimate rd, rs1, rs2", that loads
// one activation byte from an im2col buffer (base address in rs1) at the position of
// a packed N:M non-zero offset (packed in rs2), and writes it into one byte of rd.
// A 16-bit counter (the "csr") selects the offset field, the M-sized block and the
// destination byte, and advances by one per xDecimate; xDecimate.clear zeroes it.
//
// The instruction's name, its R-type format, the three sparsity flavours and the
// 16-bit counter follow the published design. The opcode and funct3 values below
// are this design's own choice: the published description gives no encoding.
// OPC_XDEC uses 7'h77, a major opcode the base ISA and the PULP extensions leave
// unused.
package xdec_pkg;

  // Width of the auto-incremented counter (csr[15:0]).
  localparam int unsigned CSR_WIDTH = 16;

  localparam logic [6:0] OPC_XDEC     = 7'h77;
  localparam logic [2:0] F3_XDEC_1_4  = 3'b000;
  localparam logic [2:0] F3_XDEC_1_8  = 3'b001;
  localparam logic [2:0] F3_XDEC_1_16 = 3'b010;
  localparam logic [2:0] F3_XDEC_CLR  = 3'b111;
  localparam logic [6:0] F7_XDEC      = 7'b0000000;

  // Sparsity flavour ("kind" in the datapath).
  typedef enum logic [1:0] {
    KIND_1_4  = 2'd0,
    KIND_1_8  = 2'd1,
    KIND_1_16 = 2'd2
  } kind_e;

  // Decoded instruction, as held in the ID/EX pipe stage.
  typedef struct packed {
    logic       is_xdec;   // xdecimate rd, rs1, rs2
    logic       is_clear;  // xdecimate.clear
    kind_e      kind;
    logic [4:0] rd;
    logic [4:0] rs1;
    logic [4:0] rs2;
  } dec_t;

  // Build an instruction word (used by software models and testbenches).
  function automatic logic [31:0] enc_xdec(kind_e k, logic [4:0] rd,
                                            logic [4:0] rs1, logic [4:0] rs2);
    logic [2:0] f3;
    unique case (k)
      KIND_1_4: f3 = F3_XDEC_1_4;
      KIND_1_8: f3 = F3_XDEC_1_8;
      default:  f3 = F3_XDEC_1_16;
    endcase
    return {F7_XDEC, rs2, rs1, f3, rd, OPC_XDEC};
  endfunction

  function automatic logic [31:0] enc_clear();
    return {F7_XDEC, 5'd0, 5'd0, F3_XDEC_CLR, 5'd0, OPC_XDEC};
  endfunction

endpackage
