// predictor_bank -- the 1-bit output sparsity predictor register bank, p(l).
//
// At the end of the U phase the destination registers hold U*V*a for the rows of this
// PE. `load` stores sign(U*V*a) as one bit per row: 1 (compute this output) when the
// value is positive, 0 (skip it) otherwise. Rows at or beyond `n_rows` do not exist in
// this layer and always get 0. With the predictor disabled (`uv_en` = 0) every existing
// row is marked 1, which turns SparseNN into a design that exploits input sparsity only.
// `n_pred` counts the rows predicted nonzero. The bank and what it holds are the paper's;
// treating a zero value as "skip" is this design's reading of sign().
// Timing: `p` changes at the clock edge after `load`.
module predictor_bank
  import sparsenn_pkg::*;
#(
  parameter int unsigned N = ACTS_PER_PE
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic                 uv_en,
  input  logic [$clog2(N):0]   n_rows,
  input  data_t                uv_vals [N],
  output logic [N-1:0]         p,
  output logic [$clog2(N):0]   n_pred
);
  logic [N-1:0] nxt;

  always_comb begin
    for (int i = 0; i < int'(N); i++)
      nxt[i] = (i < int'(n_rows)) && (!uv_en || (uv_vals[i] > 0));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    p <= '0;
    else if (load) p <= nxt;
  end

  always_comb begin
    n_pred = '0;
    for (int i = 0; i < int'(N); i++) n_pred = n_pred + ($clog2(N)+1)'(p[i]);
  end
endmodule
