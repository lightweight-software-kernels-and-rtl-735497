// xdec_xfu -- xDecimate eXtension Functional Unit (XFU), top of the design.
//
// A small functional unit for a RI5CY-class RISC-V core that executes
//   xdecimate rd, rs1, rs2   (flavours 1:4, 1:8, 1:16)
//   xdecimate.clear
// used by N:M-sparse convolution and fully-connected kernels to gather the
// activations that match the non-zero weights ("decimation") straight into SIMD
// operand registers. Each xDecimate loads one byte from
//   addr = rs1 + M*csr[15:1] + o,  o = 4-bit (1:8/1:16) or 2-bit (1:4) field of rs2
//                                      selected by csr[2:0] or csr[3:0]
// and writes it into byte csr[2:1] of rd; then csr = csr + 1. xDecimate.clear sets
// csr to 0.
//
// Structure (three stages of the core pipeline):
//   ID  : xdec_decoder classifies the word; the core supplies rs1, rs2 and the old
//         value of rd from its three read ports. The ID/EX pipe register captures
//         the decoded instruction and the three operands.
//   EX  : xdec_addr_gen forms the address from rs1, rs2 and the csr
//         (xdec_csr_counter); the request goes to the data memory. On grant the
//         EX/WB pipe register captures rd, csr[2:1] and the address LSBs, and the
//         csr advances.
//   WB  : on the memory response, xdec_rd_update inserts the byte into rd and the
//         result is written to the core register file (rf_we_o).
// xdec_controller sequences the stages and forwards rd from WB to a following
// xDecimate with the same rd.
//
// Interface: core side (insn_valid_i/insn_i/rs*_val_i in, xdec_insn_o/id_ready_o
// out; the core holds the instruction in ID while xdec_insn_o & ~id_ready_o), a
// request/grant/rvalid data port with a 32-bit word response, and a register-file
// write port. busy_o is high while an xDecimate is in flight so that the core can
// hold back other instructions that read its rd.
// Timing: one xDecimate per cycle with a memory that grants at once and answers in
// the next cycle; write-back in the cycle after EX, two cycles after ID.
//
// The stage split, the datapath and the forwarding follow the published design;
// the instruction encoding, the memory handshake, the stall rules and the moment
// the csr advances (leaving EX rather than in WB) are this design's choices.
module xdec_xfu
  import xdec_pkg::*;
#(
  parameter int unsigned CSR_W = xdec_pkg::CSR_WIDTH
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // ID stage (from the core)
  input  logic             insn_valid_i,
  input  logic [31:0]      insn_i,
  input  logic [31:0]      rs1_val_i,
  input  logic [31:0]      rs2_val_i,
  input  logic [31:0]      rd_val_i,
  output logic             xdec_insn_o,   // insn_i is an extension instruction
  output logic             id_ready_o,    // the XFU accepts it this cycle
  output logic [4:0]       rs1_addr_o,
  output logic [4:0]       rs2_addr_o,
  output logic [4:0]       rd_addr_o,
  // data memory port
  output logic             data_req_o,
  output logic [31:0]      data_addr_o,
  output logic [3:0]       data_be_o,
  input  logic             data_gnt_i,
  input  logic             data_rvalid_i,
  input  logic [31:0]      data_rdata_i,
  // register-file write port (WB)
  output logic             rf_we_o,
  output logic [4:0]       rf_waddr_o,
  output logic [31:0]      rf_wdata_o,
  // status
  output logic             busy_o,
  output logic [CSR_W-1:0] csr_o
);

  // ---------------- ID ----------------
  dec_t id_dec;
  logic id_valid;

  xdec_decoder u_dec (.insn_i(insn_i), .dec_o(id_dec));

  assign xdec_insn_o = id_dec.is_xdec | id_dec.is_clear;
  assign id_valid    = insn_valid_i & xdec_insn_o;
  assign rs1_addr_o  = id_dec.rs1;
  assign rs2_addr_o  = id_dec.rs2;
  assign rd_addr_o   = id_dec.rd;

  // ---------------- control ----------------
  logic ex_valid, wb_valid, idex_en, exwb_en, csr_incr, csr_clear;
  logic fwd_id, fwd_ex, rf_we;

  // ID/EX pipe stage
  dec_t        ex_dec_q;
  logic [31:0] ex_rs1_q, ex_rs2_q, ex_rd_q;
  // EX/WB pipe stage
  logic [4:0]  wb_rd_addr_q;
  logic [31:0] wb_rd_q;
  logic [1:0]  wb_lane_q, wb_lsb_q;

  logic [31:0] rd_new;

  xdec_controller u_ctrl (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .id_valid_i   (id_valid),
    .id_rd_i      (id_dec.rd),
    .id_ready_o   (id_ready_o),
    .ex_is_clear_i(ex_dec_q.is_clear),
    .ex_rd_i      (ex_dec_q.rd),
    .wb_rd_i      (wb_rd_addr_q),
    .ex_valid_o   (ex_valid),
    .wb_valid_o   (wb_valid),
    .idex_en_o    (idex_en),
    .exwb_en_o    (exwb_en),
    .data_req_o   (data_req_o),
    .data_gnt_i   (data_gnt_i),
    .data_rvalid_i(data_rvalid_i),
    .csr_incr_o   (csr_incr),
    .csr_clear_o  (csr_clear),
    .rf_we_o      (rf_we),
    .fwd_id_o     (fwd_id),
    .fwd_ex_o     (fwd_ex),
    .busy_o       (busy_o)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ex_dec_q <= '0;
      ex_rs1_q <= '0;
      ex_rs2_q <= '0;
      ex_rd_q  <= '0;
    end else if (idex_en) begin
      ex_dec_q <= id_dec;
      ex_rs1_q <= rs1_val_i;
      ex_rs2_q <= rs2_val_i;
      ex_rd_q  <= fwd_id ? rd_new : rd_val_i;
    end else if (fwd_ex) begin
      ex_rd_q  <= rd_new;
    end
  end

  // ---------------- EX ----------------
  logic [CSR_W-1:0] csr;
  logic [31:0]      ex_addr;
  logic [31:0]      ex_rd_eff;

  xdec_csr_counter #(.CSR_W(CSR_W)) u_csr (
    .clk_i  (clk_i),
    .rst_ni (rst_ni),
    .clear_i(csr_clear),
    .incr_i (csr_incr),
    .csr_o  (csr)
  );

  xdec_addr_gen #(.CSR_W(CSR_W)) u_agen (
    .kind_i      (ex_dec_q.kind),
    .csr_i       (csr),
    .base_addr_i (ex_rs1_q),
    .offsets_i   (ex_rs2_q),
    .addr_o      (ex_addr)
  );

  assign data_addr_o = ex_addr;
  assign data_be_o   = 4'b0001 << ex_addr[1:0];
  assign ex_rd_eff   = fwd_ex ? rd_new : ex_rd_q;
  assign csr_o       = csr;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wb_rd_addr_q <= '0;
      wb_rd_q      <= '0;
      wb_lane_q    <= '0;
      wb_lsb_q     <= '0;
    end else if (exwb_en) begin
      wb_rd_addr_q <= ex_dec_q.rd;
      wb_rd_q      <= ex_rd_eff;
      wb_lane_q    <= csr[2:1];
      wb_lsb_q     <= ex_addr[1:0];
    end
  end

  // ---------------- WB ----------------
  xdec_rd_update u_rdu (
    .rd_old_i  (wb_rd_q),
    .lane_i    (wb_lane_q),
    .addr_lsb_i(wb_lsb_q),
    .rdata_i   (data_rdata_i),
    .rd_new_o  (rd_new)
  );

  assign rf_we_o    = rf_we;
  assign rf_waddr_o = wb_rd_addr_q;
  assign rf_wdata_o = rd_new;

  // The memory port must stay stable while a request waits for its grant.
  a_addr_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    data_req_o && !data_gnt_i |=> $stable(data_addr_o));
  a_wb_valid: assert property (@(posedge clk_i) disable iff (!rst_ni)
    rf_we_o |-> wb_valid);
  a_ex_valid: assert property (@(posedge clk_i) disable iff (!rst_ni)
    data_req_o |-> ex_valid);

endmodule
