// total_msg_unit -- total message processing unit, Eq. (4): L_qn' = L_qmn + L_rmn(new) for p
// lanes, saturating to the symmetric range +/-(2^(W-1)-1). L_qmn comes from FIFO buffer_2,
// L_rmn from the check node unit in the same cycle. Combinational.
// Eq. (4) is the paper's; the symmetric saturation is this design's choice (the paper only
// gives the word width).
module total_msg_unit #(
  parameter int P = ldpc_pkg::P_DEF,
  parameter int W = ldpc_pkg::W_DEF
) (
  input  logic [P-1:0][W-1:0] lqmn,
  input  logic [P-1:0][W-1:0] lr,
  output logic [P-1:0][W-1:0] lq
);
  localparam int MX = 2 ** (W - 1) - 1;
  localparam logic signed [W:0] MXS = (W+1)'(MX);

  always_comb begin
    for (int i = 0; i < P; i++) begin
      logic signed [W:0] s;
      s = $signed({lqmn[i][W-1], lqmn[i]}) + $signed({lr[i][W-1], lr[i]});
      if (s > MXS)       lq[i] = W'(MX);
      else if (s < -MXS) lq[i] = W'(-MX);
      else              lq[i] = s[W-1:0];
    end
  end
endmodule
