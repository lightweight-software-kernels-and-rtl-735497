// xdec_controller -- pipeline control of the xDecimate extension unit.
//
// Owns the valid bits of the two pipe stages of the unit and derives from them:
//   * the enables of the ID/EX and EX/WB pipe registers and the ID-stage ready,
//   * the memory request of EX (request/grant handshake, one access in flight),
//   * the csr increment (an xDecimate leaving EX) and clear (xDecimate.clear in EX),
//   * the register-file write of WB (when the memory response arrives),
//   * rd forwarding: when WB writes register r, an xDecimate entering EX (fwd_id_o)
//     or waiting in EX (fwd_ex_o) with the same rd takes the new value instead of
//     the one it read from the register file. Consecutive xDecimates to the same rd
//     (which accumulate four bytes into it) therefore see each other's results.
//
// Timing: with an always-granting memory that answers in the next cycle, one
// xDecimate enters per cycle and each writes back in the cycle after EX, two
// cycles after ID.
// A request is raised only when WB is free or is completing in the same cycle, so
// responses come back in order with at most one access outstanding. A held request
// keeps its address until granted (checked by an assertion). xDecimate.clear spends
// one cycle in EX and never goes to WB.
//
// That a controller enables the pipe stages and forwards rd from WB between
// consecutive xDecimates follows the published design; the handshake, the stall
// rules and the forwarding paths are this design's own choices.
module xdec_controller (
  input  logic       clk_i,
  input  logic       rst_ni,
  // ID: an extension instruction is offered
  input  logic       id_valid_i,
  input  logic [4:0] id_rd_i,
  output logic       id_ready_o,
  // EX / WB stage contents
  input  logic       ex_is_clear_i,
  input  logic [4:0] ex_rd_i,
  input  logic [4:0] wb_rd_i,
  output logic       ex_valid_o,
  output logic       wb_valid_o,
  // pipe register enables
  output logic       idex_en_o,
  output logic       exwb_en_o,
  // memory handshake
  output logic       data_req_o,
  input  logic       data_gnt_i,
  input  logic       data_rvalid_i,
  // csr counter
  output logic       csr_incr_o,
  output logic       csr_clear_o,
  // write-back and forwarding
  output logic       rf_we_o,
  output logic       fwd_id_o,
  output logic       fwd_ex_o,
  output logic       busy_o
);

  logic ex_valid_q, wb_valid_q;
  logic wb_done, wb_free, ex_done, ex_free;

  assign wb_done = wb_valid_q & data_rvalid_i;
  assign wb_free = ~wb_valid_q | wb_done;

  assign data_req_o = ex_valid_q & ~ex_is_clear_i & wb_free;
  assign exwb_en_o  = data_req_o & data_gnt_i;
  assign ex_done    = ex_valid_q & (ex_is_clear_i | exwb_en_o);
  assign ex_free    = ~ex_valid_q | ex_done;

  assign id_ready_o = ex_free;
  assign idex_en_o  = id_valid_i & ex_free;

  assign csr_incr_o  = exwb_en_o;
  assign csr_clear_o = ex_valid_q & ex_is_clear_i;

  assign rf_we_o  = wb_done;
  assign fwd_id_o = wb_done & id_valid_i & (id_rd_i == wb_rd_i) & (wb_rd_i != 5'd0);
  assign fwd_ex_o = wb_done & ex_valid_q & ~ex_is_clear_i & (ex_rd_i == wb_rd_i)
                    & (wb_rd_i != 5'd0);

  assign ex_valid_o = ex_valid_q;
  assign wb_valid_o = wb_valid_q;
  assign busy_o     = ex_valid_q | wb_valid_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ex_valid_q <= 1'b0;
      wb_valid_q <= 1'b0;
    end else begin
      if (idex_en_o)    ex_valid_q <= 1'b1;
      else if (ex_done) ex_valid_q <= 1'b0;

      if (exwb_en_o)    wb_valid_q <= 1'b1;
      else if (wb_done) wb_valid_q <= 1'b0;
    end
  end

  // A response may only come for an access in flight.
  a_rvalid_in_flight: assert property (@(posedge clk_i) disable iff (!rst_ni)
    data_rvalid_i |-> wb_valid_q);
  // A request not yet granted stays up.
  a_req_held: assert property (@(posedge clk_i) disable iff (!rst_ni)
    data_req_o && !data_gnt_i |=> data_req_o);

endmodule
