// heppo_coef -- lookahead coefficients for the PEs.
//
// Forms C = gamma * lambda and its powers C^1 .. C^K once for all rows, and
// registers them; gamma and lambda are static during a run, so the product
// chain has many cycles to settle before the first element reaches a PE.
module heppo_coef
  import heppo_pkg::*;
#(
  parameter int unsigned K = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  fx_t  gamma,
  input  fx_t  lambda,
  output fx_t  c_pow [K+1]
);
  fx_t c_next [K+1];
  always_comb begin
    c_next[0] = fx_t'(1 <<< FRAC);
    for (int i = 1; i <= K; i++)
      c_next[i] = (i == 1) ? fx_mul(gamma, lambda) : fx_mul(c_next[i-1], c_next[1]);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i <= K; i++) c_pow[i] <= '0;
    else        for (int i = 0; i <= K; i++) c_pow[i] <= c_next[i];
  end
endmodule
