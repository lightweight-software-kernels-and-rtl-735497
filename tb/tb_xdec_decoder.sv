// tb_xdec_decoder -- self-checking test of the xDecimate instruction decoder.
//
// Encodes every flavour and the clear instruction with random register fields,
// plus random words of other opcodes/funct fields, and compares the decoded
// fields with values taken directly from the instruction word layout.
module tb_xdec_decoder;
  import xdec_pkg::*;

  logic [31:0] insn;
  dec_t        dec;
  int          checks = 0, failures = 0;

  xdec_decoder dut (.insn_i(insn), .dec_o(dec));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s insn=%h dec=%p", what, insn, dec);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [4:0] rd, rs1, rs2;
    logic [2:0] f3;
    for (int n = 0; n < 300; n++) begin
      rd = 5'($urandom); rs1 = 5'($urandom); rs2 = 5'($urandom);
      // xdecimate, flavour chosen by funct3 0/1/2
      f3 = 3'($urandom_range(0, 2));
      insn = {7'b0000000, rs2, rs1, f3, rd, 7'b1110111};
      #1;
      check(dec.is_xdec && !dec.is_clear, "xdec recognised");
      check(dec.kind == kind_e'(f3), "flavour");
      check(dec.rd == rd && dec.rs1 == rs1 && dec.rs2 == rs2, "register fields");
      check(insn == enc_xdec(kind_e'(f3), rd, rs1, rs2), "package encoder agrees");
      // clear
      insn = {7'b0000000, 5'd0, 5'd0, 3'b111, 5'd0, 7'b1110111};
      #1;
      check(dec.is_clear && !dec.is_xdec, "clear recognised");
      // other opcode
      insn = $urandom;
      if (insn[6:0] == 7'b1110111) insn[6:0] = 7'b0110011;
      #1;
      check(!dec.is_xdec && !dec.is_clear, "foreign opcode ignored");
      // right opcode, reserved funct3 or wrong funct7
      insn = {7'b0000000, rs2, rs1, 3'($urandom_range(3, 6)), rd, 7'b1110111};
      #1;
      check(!dec.is_xdec && !dec.is_clear, "reserved funct3 ignored");
      insn = {7'b0100000, rs2, rs1, f3, rd, 7'b1110111};
      #1;
      check(!dec.is_xdec && !dec.is_clear, "wrong funct7 ignored");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
