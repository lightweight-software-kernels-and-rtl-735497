// tb_xdec_addr_gen -- self-checking test of the xDecimate EX-stage address path.
//
// Random base addresses, packed offset words and counter values for all three
// flavours. The expected address is worked out with division and modulo on the
// offset list (field k of rs2 is (rs2 / W**k) mod W, block index is csr / 2),
// not with the shifts and part-selects of the design.
module tb_xdec_addr_gen;
  import xdec_pkg::*;

  kind_e       kind;
  logic [15:0] csr;
  logic [31:0] base, offs, addr;
  int          checks = 0, failures = 0;

  xdec_addr_gen dut (.kind_i(kind), .csr_i(csr), .base_addr_i(base), .offsets_i(offs),
                     .addr_o(addr));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint expected(kind_e k, int unsigned c, longint unsigned b,
                                      longint unsigned w);
    longint unsigned m, fw, nf, o;
    case (k)
      KIND_1_4: begin m = 4;  fw = 4;  nf = 16; end
      KIND_1_8: begin m = 8;  fw = 16; nf = 8;  end
      default:  begin m = 16; fw = 16; nf = 8;  end
    endcase
    o = w;
    for (longint unsigned i = 0; i < c % nf; i++) o = o / fw;
    o = o % fw;
    return (b + m * (c / 2) + o) % 64'h1_0000_0000;
  endfunction

  initial begin
    for (int n = 0; n < 20000; n++) begin
      kind = kind_e'($urandom_range(0, 2));
      csr  = (n % 4 == 0) ? 16'($urandom_range(0, 40)) : 16'($urandom);
      base = (n % 8 == 0) ? 32'hFFFF_FF00 + $urandom_range(0, 255) : $urandom;
      offs = $urandom;
      #1;
      checks++;
      if (addr != 32'(expected(kind, csr, base, offs))) begin
        failures++;
        if (failures < 10)
          $display("FAIL: kind=%s csr=%0d base=%h offs=%h addr=%h exp=%h", kind.name(), csr,
                   base, offs, addr, 32'(expected(kind, csr, base, offs)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
