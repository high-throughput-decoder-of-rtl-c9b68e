// erase_unit -- residue error-bits erase module.
//
// After the last BP iteration a symbol whose reliability |L_qn| is below the threshold DELTA
// is "suspicious": with limited precision, the wrong hard decisions left over are almost all
// among these symbols. When the decision unit finds s_hat != s, the decoder makes one more
// pass over the schedule in erase mode and this unit corrects suspicious symbols with the
// syndrome, row group by row group, in the same two-half streaming form as the check node
// unit:
//  * Accumulate: over the d messages of a row (lane), count the suspicious symbols (saturating
//    at 2) and XOR the hard decisions; at the last one push {exactly one suspicious,
//    parity XOR s_m} into a small queue.
//  * Emit: a symbol that is suspicious, in a row with exactly one suspicious symbol whose
//    parity check fails, is the one that must flip: its value becomes -sign * DELTA (opposite
//    hard decision, reliability DELTA, so it is no longer suspicious). Other values pass
//    unchanged. The results go back to the variable RAM through the shift-left unit, so later
//    layers of the same pass see the corrections.
// The paper gives the threshold rule, that the module works on the decoding result only, with
// syndrome, shift and XOR operations, and its cost of about 2.4 (rate 0.2) to 3 (rate 0.1)
// iterations, but takes the correction procedure from a cited work without spelling it out.
// The single-suspicious-symbol peeling rule above is this design's own simplest reading of it.
// flips counts the symbols changed since clear.
// The row-group queue's count output is not used (out_valid is its empty flag).
module erase_unit #(
  parameter int P     = ldpc_pkg::P_DEF,
  parameter int W     = ldpc_pkg::W_DEF,
  parameter int DELTA = ldpc_pkg::DELTA_DEF,
  parameter int QD    = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  // accumulate side
  input  logic                in_valid,
  input  logic [P-1:0][W-1:0] in_lq,
  input  logic                in_glast,
  input  logic [P-1:0]        in_syn,
  // emit side
  input  logic [P-1:0][W-1:0] out_lq_in,
  input  logic                out_pop,
  input  logic                out_glast,
  output logic                out_valid,
  output logic [P-1:0][W-1:0] out_lq,
  output logic [31:0]         flips
);

  function automatic logic susp(input logic [W-1:0] v);
    logic [W-1:0] a;
    a = v[W-1] ? (~v + 1'b1) : v;
    return a < W'(DELTA);
  endfunction

  logic [P-1:0][1:0] acc_cnt, nxt_cnt;
  logic [P-1:0]      acc_par, nxt_par;
  logic [2*P-1:0]    q_wdata, q_rdata;
  logic              q_empty, q_full;
  logic [$clog2(QD):0] q_count;
  logic [P-1:0]      flip;

  always_comb begin
    for (int i = 0; i < P; i++) begin
      nxt_cnt[i] = (susp(in_lq[i]) && acc_cnt[i] != 2'd2) ? acc_cnt[i] + 2'd1 : acc_cnt[i];
      nxt_par[i] = acc_par[i] ^ in_lq[i][W-1];
      q_wdata[2*i +: 2] = {nxt_cnt[i] == 2'd1, nxt_par[i] ^ in_syn[i]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_cnt <= '0;
      acc_par <= '0;
    end else if (in_valid) begin
      acc_cnt <= in_glast ? '0 : nxt_cnt;
      acc_par <= in_glast ? '0 : nxt_par;
    end
  end

  sync_fifo #(.WIDTH(2 * P), .DEPTH(QD)) u_q (
    .clk, .rst_n,
    .wr_en(in_valid && in_glast), .wr_data(q_wdata),
    .rd_en(out_pop && out_glast), .rd_data(q_rdata),
    .empty(q_empty), .full(q_full), .count(q_count)
  );

  assign out_valid = !q_empty;

  always_comb begin
    for (int i = 0; i < P; i++) begin
      flip[i]   = q_rdata[2*i+1] && q_rdata[2*i] && susp(out_lq_in[i]);
      out_lq[i] = !flip[i] ? out_lq_in[i]
                : (out_lq_in[i][W-1] ? W'(DELTA) : W'(-DELTA));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 flips <= '0;
    else if (clear)             flips <= '0;
    else if (out_pop)           flips <= flips + 32'($countones(flip));
  end

  a_queue_room: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(in_valid && in_glast && q_full));
endmodule
