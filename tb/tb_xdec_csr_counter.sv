// tb_xdec_csr_counter -- self-checking test of the xDecimate csr counter.
//
// Drives random increment / clear requests (and a run past the 16-bit wrap) and
// compares the counter with a software count after every clock edge.
module tb_xdec_csr_counter;
  logic        clk = 0, rst_n = 0, clear = 0, incr = 0;
  logic [15:0] csr;
  int          model = 0;
  int          checks = 0, failures = 0;

  xdec_csr_counter dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .incr_i(incr),
                        .csr_o(csr));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(bit c, bit i);
    @(negedge clk);
    clear = c; incr = i;
    @(posedge clk);
    if (c) model = 0;
    else if (i) model = (model + 1) % 65536;
    #1;
    checks++;
    if (csr != 16'(model)) begin
      failures++;
      $display("FAIL: csr=%0d expected %0d", csr, model);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    checks++;
    if (csr != 0) begin failures++; $display("FAIL: not zero after reset"); end
    for (int n = 0; n < 2000; n++) step($urandom_range(0, 19) == 0, $urandom_range(0, 2) != 0);
    step(1, 0);
    for (int n = 0; n < 65540; n++) step(0, 1);   // wraps once
    step(1, 1);                                   // clear wins
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
