// vnu -- variable node unit, Eq. (2): L_qmn = L_qn - L_rmn for p lanes in parallel.
//
// Saturating W-bit subtraction to the symmetric range +/-(2^(W-1)-1). When first_iter is set
// the check message is taken as zero (L_rmn^(0,l) = 0 in the first iteration), so the RAM
// contents read in that cycle are ignored. Combinational.
// Eq. (2) is the paper's; the saturation and the reuse of first_iter to pass L_qn through
// unchanged in the decide and erase passes are this design's choices.
module vnu #(
  parameter int P = ldpc_pkg::P_DEF,
  parameter int W = ldpc_pkg::W_DEF
) (
  input  logic [P-1:0][W-1:0] lq,
  input  logic [P-1:0][W-1:0] lr,
  input  logic                first_iter,
  output logic [P-1:0][W-1:0] lqmn
);
  localparam int MX = 2 ** (W - 1) - 1;
  localparam logic signed [W:0] MXS = (W+1)'(MX);

  always_comb begin
    for (int i = 0; i < P; i++) begin
      logic signed [W:0] d;
      d = $signed({lq[i][W-1], lq[i]}) - (first_iter ? '0 : $signed({lr[i][W-1], lr[i]}));
      if (d > MXS)       lqmn[i] = W'(MX);
      else if (d < -MXS) lqmn[i] = W'(-MX);
      else              lqmn[i] = d[W-1:0];
    end
  end
endmodule
