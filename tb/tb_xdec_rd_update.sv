// tb_xdec_rd_update -- self-checking test of the xDecimate WB byte insertion.
//
// Random old rd values, lanes, address LSBs and memory words; the expected result
// is built by shifting and masking with arithmetic on 32-bit integers.
module tb_xdec_rd_update;
  logic [31:0] rd_old, rdata, rd_new;
  logic [1:0]  lane, lsb;
  int          checks = 0, failures = 0;

  xdec_rd_update dut (.rd_old_i(rd_old), .lane_i(lane), .addr_lsb_i(lsb), .rdata_i(rdata),
                      .rd_new_o(rd_new));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned b, mask, exp_v;
    for (int n = 0; n < 5000; n++) begin
      rd_old = $urandom; rdata = $urandom;
      lane = 2'($urandom); lsb = 2'($urandom);
      #1;
      b     = (rdata / (1 << (8 * lsb))) % 256;
      mask  = 255 * (1 << (8 * lane));
      exp_v = (rd_old & ~mask) | (b * (1 << (8 * lane)));
      checks++;
      if (rd_new != exp_v) begin
        failures++;
        if (failures < 10)
          $display("FAIL: old=%h lane=%0d lsb=%0d rdata=%h new=%h exp=%h", rd_old, lane, lsb,
                   rdata, rd_new, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
