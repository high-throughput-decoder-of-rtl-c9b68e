// decision_unit -- decode decision unit, Eq. (5).
//
// Hard decision u_hat_n = 1 when L_qn < 0 (the sign bit), 0 otherwise. Two uses:
//  * Syndrome check: during a decide pass the decoder streams the schedule through it; per
//    row group each lane XORs the hard decisions of its row (s_hat = u_hat H^T) and at the
//    last circulant compares with s read from Syn_RAM port B. Any difference sets mismatch
//    (sticky until clear); bad_rows counts failing check rows.
//  * Output: in the output phase the words of RAM_L and RAM_R at one address are turned into
//    2p decided bits, u_out bit i = column 2*addr*p + i (RAM_L word first), valid one cycle
//    after out_rd (the RAM latency is outside; this unit registers nothing on that path).
//    A hard decision is only the sign bit, so u_out is wired straight from the sign bits of
//    ram_l and ram_r with no gate in between; a netlist shows it as plain wires.
// The paper gives the function (hard decision, s_hat compared with s from Syn_RAM); computing
// the syndrome row group by row group during a pass over the schedule, the sticky flag and
// the 2p-bit output word are this design's choices.
module decision_unit #(
  parameter int P = ldpc_pkg::P_DEF,
  parameter int W = ldpc_pkg::W_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                in_valid,
  input  logic [P-1:0][W-1:0] in_lq,
  input  logic                in_glast,
  input  logic [P-1:0]        in_syn,
  output logic                mismatch,
  output logic [31:0]         bad_rows,
  input  logic [P-1:0][W-1:0] ram_l,
  input  logic [P-1:0][W-1:0] ram_r,
  output logic [2*P-1:0]      u_out
);
  logic [P-1:0] par, nxt_par, diff;

  always_comb begin
    for (int i = 0; i < P; i++) nxt_par[i] = par[i] ^ in_lq[i][W-1];
    diff = nxt_par ^ in_syn;
    for (int i = 0; i < P; i++) begin
      u_out[i]     = ram_l[i][W-1];
      u_out[P + i] = ram_r[i][W-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      par      <= '0;
      mismatch <= 1'b0;
      bad_rows <= '0;
    end else if (clear) begin
      par      <= '0;
      mismatch <= 1'b0;
      bad_rows <= '0;
    end else if (in_valid) begin
      par <= in_glast ? '0 : nxt_par;
      if (in_glast) begin
        if (|diff) mismatch <= 1'b1;
        bad_rows <= bad_rows + 32'($countones(diff));
      end
    end
  end
endmodule
