// cnu -- check node unit, Eq. (3), for p check rows in parallel (one row per lane).
//
// L_rmn = (1 - 2 s_m) * prod_{n' != n} sgn(L_qn'm) * Phi^-1( sum_{n' != n} Phi(|L_qn'm|) ),
// with Phi(x) = Phi^-1(x) = -ln(tanh(x/2)) held as a table of 2^(W-1) entries computed from
// the formula at elaboration (W-1 bit magnitude codes, F fraction bits, rounded, saturated).
//
// The unit works in two halves so that it streams one circulant per cycle:
//  * Accumulate: while the d messages L_qmn of a row group arrive (in_valid, in_glast on the
//    last), each lane adds Phi(|L_qmn|) to a running sum and XORs the sign. At the last one the
//    total sum and the total sign XOR s_m are pushed into a small result queue.
//  * Emit: for each message of that row group, now leaving FIFO buffer_2 (out_lqmn), the lane
//    removes the message's own share: magnitude Phi(min(S - Phi(|L_qmn|), max)), sign = total
//    sign XOR own sign. out_valid says the head row group is complete; the decoder pops one
//    message per cycle (out_pop) and marks the last one of the group (out_glast).
// Recomputing Phi(|L_qmn|) from the FIFO buffer_2 copy instead of storing it is this design's
// choice. The emit side is combinational from the queue head; accumulate takes one clock.
// The row-group queue's count output is not used (out_valid is its empty flag).
module cnu #(
  parameter int P    = ldpc_pkg::P_DEF,
  parameter int W    = ldpc_pkg::W_DEF,
  parameter int F    = ldpc_pkg::F_DEF,
  parameter int DMAX = ldpc_pkg::D1_DEF,
  parameter int QD   = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  // accumulate side
  input  logic                in_valid,
  input  logic [P-1:0][W-1:0] in_lqmn,
  input  logic                in_glast,
  input  logic [P-1:0]        in_syn,
  // emit side
  input  logic [P-1:0][W-1:0] out_lqmn,
  input  logic                out_pop,
  input  logic                out_glast,
  output logic                out_valid,
  output logic [P-1:0][W-1:0] out_lr
);
  localparam int MW   = W - 1;                       // magnitude width
  localparam int MX   = 2 ** MW - 1;
  localparam int SUMW = MW + $clog2(DMAX + 1);
  localparam int GW   = P * (SUMW + 1);

  typedef logic [MW-1:0] tab_t [2 ** MW];
  function automatic tab_t mk_phi();
    tab_t t;
    for (int i = 0; i < 2 ** MW; i++) t[i] = MW'(ldpc_pkg::phi_code(i, W, F));
    return t;
  endfunction
  localparam tab_t PHI = mk_phi();

  function automatic logic [MW-1:0] mag(input logic [W-1:0] v);
    logic [W-1:0] a;
    a = v[W-1] ? (~v + 1'b1) : v;
    return a[MW-1:0];
  endfunction

  // ---------------------------------------------------------------- accumulate
  logic [P-1:0][SUMW-1:0] acc_sum, nxt_sum;
  logic [P-1:0]           acc_sgn, nxt_sgn;
  logic [GW-1:0]          q_wdata, q_rdata;
  logic                   q_empty, q_full;
  logic [$clog2(QD):0]    q_count;

  always_comb begin
    for (int i = 0; i < P; i++) begin
      nxt_sum[i] = acc_sum[i] + SUMW'(PHI[mag(in_lqmn[i])]);
      nxt_sgn[i] = acc_sgn[i] ^ in_lqmn[i][W-1];
    end
    for (int i = 0; i < P; i++)
      q_wdata[i*(SUMW+1) +: SUMW+1] = {nxt_sgn[i] ^ in_syn[i], nxt_sum[i]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_sum <= '0;
      acc_sgn <= '0;
    end else if (in_valid) begin
      acc_sum <= in_glast ? '0 : nxt_sum;
      acc_sgn <= in_glast ? '0 : nxt_sgn;
    end
  end

  sync_fifo #(.WIDTH(GW), .DEPTH(QD)) u_q (
    .clk, .rst_n,
    .wr_en(in_valid && in_glast), .wr_data(q_wdata),
    .rd_en(out_pop && out_glast), .rd_data(q_rdata),
    .empty(q_empty), .full(q_full), .count(q_count)
  );

  // ---------------------------------------------------------------- emit
  assign out_valid = !q_empty;

  always_comb begin
    for (int i = 0; i < P; i++) begin
      logic [SUMW-1:0] tot, rest;
      logic            sgn;
      logic [MW-1:0]   arg, m;
      {sgn, tot} = q_rdata[i*(SUMW+1) +: SUMW+1];
      rest = tot - SUMW'(PHI[mag(out_lqmn[i])]);
      arg  = (rest > SUMW'(MX)) ? MW'(MX) : rest[MW-1:0];
      m    = PHI[arg];
      sgn  = sgn ^ out_lqmn[i][W-1];
      out_lr[i] = sgn ? (~{1'b0, m} + 1'b1) : {1'b0, m};
    end
  end

  a_queue_room: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(in_valid && in_glast && q_full));
endmodule
