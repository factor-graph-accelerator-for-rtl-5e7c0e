// cost_unit: accumulates the cost ||eps_b||^2 of a residual vector.
//
// In cost mode the factor block only produces the new residuals eps_b, and
// this unit sums their squares so that a step can be judged by the cost it
// leads to. clear zeroes the sum; every in_valid adds in_data^2 (one
// multiplier, one clock per entry); in_last marks the final entry, after
// which cost_valid is high and cost holds the sum until the next clear or
// entry. cost is unsigned with FRAC_W fraction bits and saturates at its
// maximum instead of wrapping. The accept/reject decision that uses the
// cost is not part of this unit.
module cost_unit
  import fg_pkg::*;
#(
  parameter int unsigned COST_W = 48
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              in_valid,
  input  fx_t               in_data,
  input  logic              in_last,
  output logic [COST_W-1:0] cost,
  output logic              cost_valid
);
  logic [2*WORD_W-1:0] sq;
  logic [COST_W:0]     sum;
  assign sq  = 64'(fx_abs(in_data)) * 64'(fx_abs(in_data));
  assign sum = {1'b0, cost} + (COST_W+1)'(sq >> FRAC_W);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cost <= '0; cost_valid <= 1'b0;
    end else if (clear) begin
      cost <= '0; cost_valid <= 1'b0;
    end else if (in_valid) begin
      cost       <= sum[COST_W] ? '1 : sum[COST_W-1:0];
      cost_valid <= in_last;
    end
  end
endmodule
