// tb_xdec_controller -- self-checking test of the xDecimate pipeline controller.
//
// The testbench plays the pipe registers (it latches rd and the clear flag on the
// controller's enables) and a data memory with programmable grant and response
// latency. Directed phases check the exact cycle behaviour: one instruction per
// cycle and write-back two cycles after EX with an ideal memory, a held request
// and a stalled ID stage while the grant is withheld, a clear that takes one EX
// cycle and no memory access, and both forwarding paths. A random phase then
// checks that every accepted xDecimate is written back exactly once, in order.
module tb_xdec_controller;
  logic       clk = 0, rst_n = 0;
  logic       id_valid = 0, id_clear = 0;
  logic [4:0] id_rd = 0;
  logic       id_ready, ex_valid, wb_valid, idex_en, exwb_en, data_req;
  logic       gnt = 1, rvalid, csr_incr, csr_clear, rf_we, fwd_id, fwd_ex, busy;
  // pipe registers played by the testbench
  logic       ex_clr_q = 0;
  logic [4:0] ex_rd_q = 0, wb_rd_q = 0;
  // memory
  logic       pend = 0;
  int         lat = 0, lat_cfg = 0, lat_rand = 0;

  int checks = 0, failures = 0, cycle = 0;

  xdec_controller dut (
    .clk_i(clk), .rst_ni(rst_n), .id_valid_i(id_valid), .id_rd_i(id_rd),
    .id_ready_o(id_ready), .ex_is_clear_i(ex_clr_q), .ex_rd_i(ex_rd_q), .wb_rd_i(wb_rd_q),
    .ex_valid_o(ex_valid), .wb_valid_o(wb_valid), .idex_en_o(idex_en), .exwb_en_o(exwb_en),
    .data_req_o(data_req), .data_gnt_i(gnt), .data_rvalid_i(rvalid),
    .csr_incr_o(csr_incr), .csr_clear_o(csr_clear), .rf_we_o(rf_we),
    .fwd_id_o(fwd_id), .fwd_ex_o(fwd_ex), .busy_o(busy));

  always #5 clk = ~clk;

  assign rvalid = pend && (lat == 0);

  always_ff @(posedge clk) begin
    cycle <= cycle + 1;
    if (idex_en) begin ex_rd_q <= id_rd; ex_clr_q <= id_clear; end
    if (exwb_en) wb_rd_q <= ex_rd_q;
    if (data_req && gnt) begin
      pend <= 1'b1;
      lat  <= lat_rand ? $urandom_range(0, 2) : lat_cfg;
    end else if (rvalid) pend <= 1'b0;
    else if (pend && lat > 0) lat <= lat - 1;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cycle, what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Offer one instruction and wait until it is accepted; returns cycles waited.
  task automatic issue(logic [4:0] rd, bit clr, output int waited);
    waited = 0;
    @(negedge clk);
    id_valid = 1; id_rd = rd; id_clear = clr;
    #1;
    while (!idex_en) begin
      @(negedge clk); #1; waited++;
    end
    @(posedge clk);
    @(negedge clk);
    id_valid = 0;
  endtask

  task automatic drain();
    @(negedge clk); id_valid = 0;
    while (busy) @(negedge clk);
  endtask

  int w, first, last, n_we, n_req_held, n_fwd_id, n_fwd_ex, n_clr;
  always_ff @(posedge clk) begin
    if (rf_we) n_we <= n_we + 1;
    if (fwd_id) n_fwd_id <= n_fwd_id + 1;
    if (fwd_ex) n_fwd_ex <= n_fwd_ex + 1;
    if (csr_clear) n_clr <= n_clr + 1;
  end

  // scoreboard for the random phase
  logic [4:0] q[$];
  logic [4:0] exp_rd;
  bit         sb_on = 0;
  always_ff @(posedge clk) begin
    if (sb_on && idex_en && !id_clear) q.push_back(id_rd);
    if (sb_on && rf_we) begin
      exp_rd = q.pop_front();
      checks++;
      if (exp_rd != wb_rd_q) begin
        failures++;
        $display("FAIL: write-back order, got r%0d expected r%0d", wb_rd_q, exp_rd);
      end
    end
  end

  initial begin
    n_we = 0; n_fwd_id = 0; n_fwd_ex = 0; n_clr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- A: ideal memory, six back-to-back instructions to r1..r6 ----
    gnt = 1; lat_cfg = 0;
    @(negedge clk);
    first = cycle;
    for (int i = 0; i < 6; i++) begin
      id_valid = 1; id_rd = 5'(i + 1); id_clear = 0;
      #1;
      check(id_ready && idex_en, "A: accepted every cycle");
      @(negedge clk);
    end
    id_valid = 0;
    last = first;
    while (busy) begin #1; if (rf_we) last = cycle; @(negedge clk); end
    check(last - first == 7, $sformatf("A: last write-back %0d cycles after first issue (7)",
                                      last - first));
    check(n_we == 6, "A: six write-backs");

    // ---- B: grant withheld for three cycles ----
    gnt = 0;
    issue(5'd7, 0, w);
    @(negedge clk);
    id_valid = 1; id_rd = 5'd8; id_clear = 0;
    for (int i = 0; i < 3; i++) begin
      #1;
      check(data_req && !exwb_en, "B: request held without grant");
      check(!id_ready && !idex_en, "B: ID stalled behind EX");
      check(!csr_incr, "B: csr does not advance without grant");
      @(negedge clk);
    end
    gnt = 1;
    #1;
    check(exwb_en && csr_incr && idex_en, "B: grant moves EX on and frees ID");
    @(negedge clk); id_valid = 0;
    drain();
    check(n_we == 8, "B: all written back");

    // ---- C: clear ----
    issue(5'd0, 1, w);
    #1;
    check(csr_clear && !data_req && ex_valid, "C: clear sits one cycle in EX, no access");
    @(negedge clk); #1;
    check(!ex_valid && !busy, "C: clear leaves without going to WB");
    check(n_clr == 1 && n_we == 8, "C: one clear, no write-back");

    // ---- D: forwarding ----
    // same rd twice in a row: EX waits with r9 while WB writes r9
    @(negedge clk);
    id_valid = 1; id_rd = 5'd9; id_clear = 0; @(negedge clk);
    id_rd = 5'd9; @(negedge clk);
    id_valid = 0;
    drain();
    check(n_fwd_ex == 1, $sformatf("D: EX forwarding once (%0d)", n_fwd_ex));
    // pattern r10, r11, r10: third one is in ID while the first writes back
    @(negedge clk);
    id_valid = 1; id_rd = 5'd10; @(negedge clk);
    id_rd = 5'd11; @(negedge clk);
    id_rd = 5'd10; #1;
    check(fwd_id && rf_we && idex_en, "D: ID forwarding when WB writes the same rd");
    @(negedge clk); id_valid = 0;
    drain();
    // rd = x0 is never forwarded
    @(negedge clk);
    id_valid = 1; id_rd = 5'd0; @(negedge clk);
    id_rd = 5'd0; @(negedge clk);
    id_valid = 0;
    drain();
    check(n_fwd_ex == 1, "D: no forwarding for x0");

    // ---- E: random traffic, write-back order and count ----
    sb_on = 1; lat_rand = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      gnt = ($urandom_range(0, 3) != 0);
      if (!id_valid || idex_en) begin
        id_valid = ($urandom_range(0, 3) != 0);
        id_rd    = 5'($urandom_range(1, 4));
        id_clear = ($urandom_range(0, 15) == 0);
      end
    end
    @(negedge clk); id_valid = 0; gnt = 1;
    while (busy) @(negedge clk);
    @(negedge clk);
    check(q.size() == 0, "E: every accepted xDecimate written back");
    check(n_fwd_id > 0, "E: ID forwarding seen");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
