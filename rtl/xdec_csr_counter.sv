// xdec_csr_counter -- the auto-incremented "csr" of the xDecimate unit.
//
// A CSR_W-bit (16 by default, csr[15:0]) up-counter. It advances by one for every
// xDecimate (incr_i) and returns to zero on xDecimate.clear (clear_i, which wins
// if both are raised). Its value, csr_o, steers the EX-stage offset selection and
// block address and, right-shifted by one, the WB-stage byte lane. It wraps at
// 2**CSR_W. Reset (active-low, asynchronous) sets it to zero.
//
// Width, increment and clear follow the published design. The exact moment of the
// increment is this design's choice: it happens when the instruction leaves EX
// (see xdec_controller) so that a following xDecimate in EX already sees the new
// value; the sequence of values each instruction sees is the published one.
module xdec_csr_counter #(
  parameter int unsigned CSR_W = xdec_pkg::CSR_WIDTH
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             clear_i,
  input  logic             incr_i,
  output logic [CSR_W-1:0] csr_o
);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      csr_o <= '0;
    else if (clear_i) csr_o <= '0;
    else if (incr_i)  csr_o <= csr_o + 1'b1;
  end

endmodule
