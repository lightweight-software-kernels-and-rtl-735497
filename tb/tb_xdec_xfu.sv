// tb_xdec_xfu -- end-to-end test of the xDecimate unit running sparse kernels.
//
// A small core model (program of xDecimate / load-immediate / dot-product / check
// steps, a 32-entry register file with three read ports and a write port) and a
// byte-addressed data memory with random grant stalls and response latency drive
// the unit at its default parameters. The programs are the inner loops of the
// ISA-extended kernels:
//   * convolution: two im2col buffers B1, B2; for each output channel and each
//     group of four non-zero weights, rs2 holds the duplicated offsets and eight
//     xDecimates alternate (vB1, B1) and (vB2, B2); each output channel ends with
//     xDecimate.clear;
//   * fully-connected: one buffer, offsets of channels k and k+1 interleaved, eight
//     xDecimates alternate vB1 and vB2.
// for 1:4, 1:8 and 1:16. After every group the activations packed in vB1/vB2 are
// compared with the ones picked from the im2col buffers by the sparse weight
// positions, and the dot products accumulated from them are compared at the end
// of every channel with the dense product of the (mostly zero) weight row and the
// buffer. A timed run checks one xDecimate per cycle with an ideal memory.
// Mechanism counters (grant stall, late response, ID and EX forwarding, clear,
// each flavour) must all be non-zero.
module tb_xdec_xfu;
  import xdec_pkg::*;

  localparam int MEM_BYTES = 4096;
  localparam int CONV_LEN  = 128;   // C*FX*FY of the convolution test layer
  localparam int FC_LEN    = 256;   // C of the fully-connected test layer
  localparam int CONV_K    = 2;     // output channels per flavour
  localparam logic [31:0] B1 = 32'h0000_0103, B2 = 32'h0000_0281, BFC = 32'h0000_0402;
  // register numbers used by the programs
  localparam logic [4:0] R_B1 = 5'd10, R_B2 = 5'd11, R_O = 5'd12, R_VB1 = 5'd13, R_VB2 = 5'd14;

  typedef enum int { OP_LI, OP_XDEC, OP_CHECK, OP_DOTP, OP_CHKSUM, OP_MEMMODE, OP_MARK,
                     OP_MARKCHK, OP_END } op_e;
  typedef struct { op_e op; int a; logic [31:0] b; logic [31:0] c; } step_t;

  logic        clk = 0, rst_n = 0;
  logic [7:0]  mem [MEM_BYTES];
  logic [31:0] rf [32];
  step_t       prog[$];
  int          pc = 0;

  // DUT ports
  logic        insn_valid, xdec_insn, id_ready, busy;
  logic [31:0] insn, rs1_val, rs2_val, rd_val;
  logic [4:0]  rs1_a, rs2_a, rd_a;
  logic        data_req, data_gnt, data_rvalid, rf_we;
  logic [31:0] data_addr, data_rdata, rf_wdata;
  logic [3:0]  data_be;
  logic [4:0]  rf_waddr;
  logic [15:0] csr;

  xdec_xfu dut (
    .clk_i(clk), .rst_ni(rst_n),
    .insn_valid_i(insn_valid), .insn_i(insn), .rs1_val_i(rs1_val), .rs2_val_i(rs2_val),
    .rd_val_i(rd_val), .xdec_insn_o(xdec_insn), .id_ready_o(id_ready),
    .rs1_addr_o(rs1_a), .rs2_addr_o(rs2_a), .rd_addr_o(rd_a),
    .data_req_o(data_req), .data_addr_o(data_addr), .data_be_o(data_be),
    .data_gnt_i(data_gnt), .data_rvalid_i(data_rvalid), .data_rdata_i(data_rdata),
    .rf_we_o(rf_we), .rf_waddr_o(rf_waddr), .rf_wdata_o(rf_wdata),
    .busy_o(busy), .csr_o(csr));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired at pc=%0d", pc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- data memory model ----------------
  bit          mem_ideal = 1;
  logic        pend = 0;
  int          lat = 0;
  logic [31:0] paddr = 0;
  logic        gnt_rand = 1;

  assign data_gnt    = mem_ideal ? 1'b1 : gnt_rand;
  assign data_rvalid = pend && (lat == 0);
  assign data_rdata  = {mem[{paddr[11:2], 2'd3}], mem[{paddr[11:2], 2'd2}],
                        mem[{paddr[11:2], 2'd1}], mem[{paddr[11:2], 2'd0}]};

  always_ff @(posedge clk) begin
    gnt_rand <= ($urandom_range(0, 9) < 6);
    if (data_req && data_gnt) begin
      pend  <= 1'b1;
      paddr <= data_addr;
      lat   <= mem_ideal ? 0 : $urandom_range(0, 2);
    end else if (data_rvalid) pend <= 1'b0;
    else if (pend && lat > 0) lat <= lat - 1;
  end

  // ---------------- core model ----------------
  step_t cur;
  assign cur        = prog[pc];
  assign insn_valid = rst_n && !done && (cur.op == OP_XDEC);
  assign insn       = (cur.op == OP_XDEC) ? cur.b : 32'h0000_0013;
  assign rs1_val    = rf[rs1_a];
  assign rs2_val    = rf[rs2_a];
  assign rd_val     = rf[rd_a];

  int acc [2];
  int mark_cycle = 0;
  bit done = 0;

  function automatic int dotp4(logic [31:0] a, logic [31:0] b);
    int s = 0;
    for (int l = 0; l < 4; l++) s += int'($signed(a[8*l +: 8])) * int'($signed(b[8*l +: 8]));
    return s;
  endfunction

  always_ff @(posedge clk) begin
    cycle <= cycle + 1;
    if (rf_we && rf_waddr != 0) rf[rf_waddr] <= rf_wdata;
    if (rst_n && !done) begin
      unique case (cur.op)
        OP_LI:      begin rf[cur.a] <= cur.b; pc <= pc + 1; end
        OP_XDEC:    if (xdec_insn && id_ready) pc <= pc + 1;
        OP_CHECK:   if (!busy) begin
                      check(rf[cur.a] == cur.b, $sformatf("r%0d = %h, expected %h (step %0d)",
                                                         cur.a, rf[cur.a], cur.b, pc));
                      pc <= pc + 1;
                    end
        OP_DOTP:    if (!busy) begin
                      acc[cur.c] <= acc[cur.c] + dotp4(cur.b, rf[cur.a]);
                      pc <= pc + 1;
                    end
        OP_CHKSUM:  if (!busy) begin
                      check(acc[cur.a] == int'(cur.b),
                            $sformatf("accumulator %0d = %0d, expected %0d", cur.a,
                                      acc[cur.a], int'(cur.b)));
                      acc[cur.a] <= 0;
                      pc <= pc + 1;
                    end
        OP_MEMMODE: begin mem_ideal <= cur.a[0]; pc <= pc + 1; end
        OP_MARK:    begin mark_cycle <= cycle; pc <= pc + 1; end
        OP_MARKCHK: if (!busy) begin
                      check(cycle - mark_cycle == cur.a,
                            $sformatf("timed run took %0d cycles, expected %0d",
                                      cycle - mark_cycle, cur.a));
                      pc <= pc + 1;
                    end
        default:    done <= 1'b1;
      endcase
    end
  end

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_late = 0, n_fwd_id = 0, n_fwd_ex = 0, n_clear = 0, n_b2b = 0;
  int n_kind [3] = '{0, 0, 0};
  logic we_d = 0;
  always_ff @(posedge clk) begin
    we_d <= rf_we;
    if (data_req && !data_gnt) n_stall <= n_stall + 1;
    if (dut.wb_valid && !data_rvalid) n_late <= n_late + 1;
    if (dut.fwd_id) n_fwd_id <= n_fwd_id + 1;
    if (dut.fwd_ex) n_fwd_ex <= n_fwd_ex + 1;
    if (dut.csr_clear) n_clear <= n_clear + 1;
    if (rf_we && we_d) n_b2b <= n_b2b + 1;
    if (dut.exwb_en) n_kind[dut.ex_dec_q.kind] <= n_kind[dut.ex_dec_q.kind] + 1;
  end

  // ---------------- program generation ----------------
  function automatic int m_of(kind_e k);
    return (k == KIND_1_4) ? 4 : (k == KIND_1_8) ? 8 : 16;
  endfunction

  function automatic logic [7:0] act(logic [31:0] base, int idx);
    return mem[base + 32'(idx)];
  endfunction

  // Packs the offset fields of xDecimate number c, c+1, ... into the rs2 word that
  // the flavour reads for c (fields of 4 bits, or of 2 bits for 1:4).
  function automatic logic [31:0] pack_word(kind_e k, int c0, int offs_of_c[]);
    logic [31:0] w = '0;
    int nf = (k == KIND_1_4) ? 16 : 8;
    int fb = (k == KIND_1_4) ? 2 : 4;
    int first = (c0 / nf) * nf;
    for (int f = 0; f < nf; f++)
      if (first + f < offs_of_c.size()) w |= 32'(offs_of_c[first + f]) << (f * fb);
    return w;
  endfunction

  function automatic step_t st(op_e op, int a = 0, logic [31:0] b = 0, logic [31:0] c = 0);
    step_t s; s.op = op; s.a = a; s.b = b; s.c = c; return s;
  endfunction

  task automatic gen_conv(kind_e k);
    int m = m_of(k);
    int nnz = CONV_LEN / m;
    int offs [];
    logic signed [7:0] wgt [];
    int cseq [];
    for (int ch = 0; ch < CONV_K; ch++) begin
      int dense1 = 0, dense2 = 0;
      offs = new[nnz]; wgt = new[nnz]; cseq = new[2 * nnz];
      for (int j = 0; j < nnz; j++) begin
        offs[j] = $urandom_range(0, m - 1);
        wgt[j]  = 8'($urandom);
      end
      // dense reference: full weight row (zeros except one per block) times buffer
      for (int p = 0; p < CONV_LEN; p++) begin
        int wd = ((p % m) == offs[p / m]) ? int'(wgt[p / m]) : 0;
        dense1 += wd * int'($signed(act(B1, p)));
        dense2 += wd * int'($signed(act(B2, p)));
      end
      // offsets duplicated: xDecimate number c uses NZ c/2
      for (int c = 0; c < 2 * nnz; c++) cseq[c] = offs[c / 2];
      for (int i = 0; i < nnz / 4; i++) begin
        logic [31:0] e1 = '0, e2 = '0, wa = '0;
        prog.push_back(st(OP_LI, R_O, pack_word(k, 8 * i, cseq)));
        for (int n = 0; n < 8; n++)
          prog.push_back(st(OP_XDEC, 0, n % 2 ? enc_xdec(k, R_VB2, R_B2, R_O)
                                              : enc_xdec(k, R_VB1, R_B1, R_O)));
        for (int l = 0; l < 4; l++) begin
          int j = 4 * i + l;
          e1[8*l +: 8] = act(B1, j * m + offs[j]);
          e2[8*l +: 8] = act(B2, j * m + offs[j]);
          wa[8*l +: 8] = wgt[j];
        end
        prog.push_back(st(OP_CHECK, R_VB1, e1));
        prog.push_back(st(OP_CHECK, R_VB2, e2));
        prog.push_back(st(OP_DOTP, R_VB1, wa, 0));
        prog.push_back(st(OP_DOTP, R_VB2, wa, 1));
      end
      prog.push_back(st(OP_CHKSUM, 0, 32'(dense1)));
      prog.push_back(st(OP_CHKSUM, 1, 32'(dense2)));
      prog.push_back(st(OP_XDEC, 0, enc_clear()));
    end
  endtask

  task automatic gen_fc(kind_e k);
    int m = m_of(k);
    int nnz = FC_LEN / m;
    int offs0 [], offs1 [], cseq [];
    logic signed [7:0] w0 [], w1 [];
    int dense0 = 0, dense1 = 0;
    offs0 = new[nnz]; offs1 = new[nnz]; w0 = new[nnz]; w1 = new[nnz]; cseq = new[2 * nnz];
    for (int j = 0; j < nnz; j++) begin
      offs0[j] = $urandom_range(0, m - 1); offs1[j] = $urandom_range(0, m - 1);
      w0[j] = 8'($urandom); w1[j] = 8'($urandom);
    end
    for (int p = 0; p < FC_LEN; p++) begin
      dense0 += (((p % m) == offs0[p / m]) ? int'(w0[p / m]) : 0) * int'($signed(act(BFC, p)));
      dense1 += (((p % m) == offs1[p / m]) ? int'(w1[p / m]) : 0) * int'($signed(act(BFC, p)));
    end
    // offsets interleaved offline: channel k, channel k+1, channel k, ...
    for (int c = 0; c < 2 * nnz; c++) cseq[c] = (c % 2) ? offs1[c / 2] : offs0[c / 2];
    prog.push_back(st(OP_LI, R_B1, BFC));
    for (int i = 0; i < nnz / 4; i++) begin
      logic [31:0] e1 = '0, e2 = '0, wa1 = '0, wa2 = '0;
      prog.push_back(st(OP_LI, R_O, pack_word(k, 8 * i, cseq)));
      for (int n = 0; n < 8; n++)
        prog.push_back(st(OP_XDEC, 0, n % 2 ? enc_xdec(k, R_VB2, R_B1, R_O)
                                            : enc_xdec(k, R_VB1, R_B1, R_O)));
      for (int l = 0; l < 4; l++) begin
        int j = 4 * i + l;
        e1[8*l +: 8] = act(BFC, j * m + offs0[j]);
        e2[8*l +: 8] = act(BFC, j * m + offs1[j]);
        wa1[8*l +: 8] = w0[j];
        wa2[8*l +: 8] = w1[j];
      end
      prog.push_back(st(OP_CHECK, R_VB1, e1));
      prog.push_back(st(OP_CHECK, R_VB2, e2));
      prog.push_back(st(OP_DOTP, R_VB1, wa1, 0));
      prog.push_back(st(OP_DOTP, R_VB2, wa2, 1));
    end
    prog.push_back(st(OP_CHKSUM, 0, 32'(dense0)));
    prog.push_back(st(OP_CHKSUM, 1, 32'(dense1)));
    prog.push_back(st(OP_XDEC, 0, enc_clear()));
    prog.push_back(st(OP_LI, R_B1, B1));
  endtask

  // Eight xDecimates into the same register: every one depends on the previous.
  task automatic gen_same_rd();
    logic [31:0] ow = $urandom;
    logic [31:0] e = '0;
    prog.push_back(st(OP_LI, R_O, ow));
    for (int n = 0; n < 8; n++) prog.push_back(st(OP_XDEC, 0, enc_xdec(KIND_1_8, R_VB1, R_B1, R_O)));
    // lane l is written by numbers 2l and 2l+1; the later one stays
    for (int l = 0; l < 4; l++) e[8*l +: 8] = act(B1, 8 * l + int'(ow[4*(2*l+1) +: 4]));
    prog.push_back(st(OP_CHECK, R_VB1, e));
    prog.push_back(st(OP_XDEC, 0, enc_clear()));
  endtask

  initial begin
    for (int i = 0; i < MEM_BYTES; i++) mem[i] = 8'($urandom);
    for (int i = 0; i < 32; i++) rf[i] = '0;
    acc[0] = 0; acc[1] = 0;
    prog.push_back(st(OP_LI, R_B1, B1));
    prog.push_back(st(OP_LI, R_B2, B2));
    prog.push_back(st(OP_XDEC, 0, enc_clear()));
    // timed run with an ideal memory: 8 issue cycles + 2 cycles to the last
    // write-back + 1 cycle for the core model to see the unit idle
    prog.push_back(st(OP_MEMMODE, 1));
    prog.push_back(st(OP_MARK));
    prog.push_back(st(OP_LI, R_O, 32'h7654_3210));
    for (int n = 0; n < 8; n++)
      prog.push_back(st(OP_XDEC, 0, n % 2 ? enc_xdec(KIND_1_16, R_VB2, R_B2, R_O)
                                          : enc_xdec(KIND_1_16, R_VB1, R_B1, R_O)));
    prog.push_back(st(OP_MARKCHK, 12));
    prog.push_back(st(OP_XDEC, 0, enc_clear()));
    gen_same_rd();
    for (int k = 0; k < 3; k++) gen_conv(kind_e'(k));
    for (int k = 0; k < 3; k++) gen_fc(kind_e'(k));
    prog.push_back(st(OP_MEMMODE, 0));
    for (int k = 2; k >= 0; k--) gen_conv(kind_e'(k));
    for (int k = 2; k >= 0; k--) gen_fc(kind_e'(k));
    prog.push_back(st(OP_END));
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done);
    @(posedge clk);
    check(pc == prog.size() - 1, "program completed");
    check(csr == 0, "csr cleared after the last channel");
    $display("mechanisms: stalls=%0d late_resp=%0d fwd_id=%0d fwd_ex=%0d clears=%0d back_to_back=%0d kinds=%0d/%0d/%0d",
             n_stall, n_late, n_fwd_id, n_fwd_ex, n_clear, n_b2b, n_kind[0], n_kind[1], n_kind[2]);
    check(n_stall > 0, "grant stall happened");
    check(n_late > 0, "late memory response happened");
    check(n_fwd_id > 0, "ID forwarding happened");
    check(n_fwd_ex > 0, "EX forwarding happened");
    check(n_clear > 0, "clear happened");
    check(n_b2b > 0, "back-to-back write-backs happened");
    check(n_kind[0] > 0 && n_kind[1] > 0 && n_kind[2] > 0, "all three flavours ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
