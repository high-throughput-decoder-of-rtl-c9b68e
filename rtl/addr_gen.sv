// addr_gen -- Addr_gen unit: steps the decoder through the layered schedule.
//
// The read addresses of the variable message RAM depend on H and are precomputed into an
// address ROM with one entry per clock cycle of an iteration (E entries): for each layer l,
// for each row group c = 1..k of it (k = Z/p), for each circulant j of the layer, the RAM_L
// and RAM_R word addresses of the two neighbouring words that hold the p columns those p rows
// need, the shift of the window, and flags for the datapath (see ldpc_pkg::sched_t). The ROM
// is filled at elaboration from the base matrix functions of ldpc_pkg. The check message RAM
// is read in the same order, so its address is the ROM pointer itself (a plain counter).
//
// start begins a run of passes in the given mode; every time the pointer wraps Iter_num
// increments, and if stop is high at that moment the unit goes idle. first_iter marks the
// entries of the first decoding pass (L_rmn = 0).
//
// Read/write interlock (this design's addition): the paper avoids read-before-write conflicts
// by choosing a suitable H. To stay correct for any H, the unit counts, per base-matrix column,
// the words read but not yet written back and the layer that read them. An entry is held back
// while its column still has outstanding writes from a different layer; within one layer the
// shift-left unit's input selection already takes care of overlaps. Holds are counted in
// stalls. hold (FIFO almost full) also pauses issuing. Outputs are registered: iss_* are valid
// the cycle after the entry is chosen and drive the RAM read addresses directly.
module addr_gen #(
  parameter int P   = ldpc_pkg::P_DEF,
  parameter int Z   = ldpc_pkg::Z_DEF,
  parameter int NB  = ldpc_pkg::N_DEF / ldpc_pkg::Z_DEF,
  parameter int MB  = ldpc_pkg::MB_DEF,
  parameter int NT1 = ldpc_pkg::NT1_DEF,
  parameter int D1  = ldpc_pkg::D1_DEF,
  parameter int K   = Z / P,
  parameter int E   = ldpc_pkg::n_edges(MB, NT1, D1, K),
  parameter int EAW = $clog2(E)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                stop,
  input  logic                track_writes,   // the pass writes back (decode, erase)
  input  logic                first_pass_zero, // first pass uses L_rmn = 0 (decode)
  input  logic                hold,
  input  logic                wr_done,
  input  logic [7:0]          wr_blk,
  output logic                iss_valid,
  output ldpc_pkg::sched_t    iss_ent,
  output logic [EAW-1:0]      iss_eaddr,
  output logic                iss_first_iter,
  output logic [7:0]          iter_num,
  output logic                busy,
  output logic [31:0]         stalls
);
  import ldpc_pkg::*;

  localparam int SB = $bits(sched_t);
  localparam int BW = (NB > 1) ? $clog2(NB) : 1;   // column index width
  typedef logic [SB-1:0] rom_t [E];

  function automatic rom_t gen_rom();
    rom_t r;
    sched_t s;
    int e, d, col, alpha, aq, ar, w, g0, g1;
    e = 0;
    for (int l = 0; l < MB; l++) begin
      d = row_weight(l, NT1, D1);
      for (int c = 0; c < K; c++) begin
        for (int j = 0; j < d; j++) begin
          col   = base_col(l, j, NB, MB, NT1, D1);
          alpha = base_shift(l, j, NB, MB, NT1, D1, Z);
          aq    = alpha / P;
          ar    = alpha % P;
          w     = (c + aq) % K;
          g0    = col * K + w;
          g1    = col * K + (w + 1) % K;
          s.swap   = w[0];
          s.addr_l = 16'(w[0] ? g1 / 2 : g0 / 2);
          s.addr_r = 16'(w[0] ? g0 / 2 : g1 / 2);
          s.shift  = 8'(ar);
          s.blk    = 8'(col);
          s.pos    = 4'(j);
          s.layer  = 8'(l);
          s.cfirst = (c == 0);
          s.clast  = (c == K - 1);
          s.glast  = (j == d - 1);
          s.group  = 16'(l * K + c);
          r[e]     = SB'(s);
          e++;
        end
      end
    end
    return r;
  endfunction

  localparam rom_t ROM = gen_rom();

  logic           running, track, zero_first;
  logic [EAW-1:0] ptr;
  sched_t         ent;
  logic           hazard, issue, wrap;
  logic [7:0]     pend_cnt   [NB];
  logic [7:0]     pend_layer [NB];
  logic [NB-1:0]  inc, dec;        // per column: a tracked read issues / a write-back lands
  logic [BW-1:0]  eblk;

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      inc[b] = issue && track && (ent.blk == 8'(b));
      dec[b] = wr_done && (wr_blk == 8'(b));
    end
  end

  assign ent    = sched_t'(ROM[ptr]);
  assign eblk   = ent.blk[BW-1:0];
  assign hazard = track && (pend_cnt[eblk] != 8'd0) && (pend_layer[eblk] != ent.layer);
  assign issue  = running && !hazard && !hold;
  assign wrap   = (ptr == EAW'(E - 1));
  assign busy   = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running        <= 1'b0;
      track          <= 1'b0;
      zero_first     <= 1'b0;
      ptr            <= '0;
      iter_num       <= '0;
      iss_valid      <= 1'b0;
      iss_ent        <= '0;
      iss_eaddr      <= '0;
      iss_first_iter <= 1'b0;
      stalls         <= '0;
    end else begin
      iss_valid <= issue;
      if (issue) begin
        iss_ent        <= ent;
        iss_eaddr      <= ptr;
        iss_first_iter <= zero_first && (iter_num == 8'd0);
      end
      if (running && hazard) stalls <= stalls + 1'b1;
      if (start) begin
        running    <= 1'b1;
        track      <= track_writes;
        zero_first <= first_pass_zero;
        ptr        <= '0;
        iter_num   <= '0;
      end else if (issue) begin
        ptr <= wrap ? '0 : ptr + 1'b1;
        if (wrap) begin
          iter_num <= iter_num + 1'b1;
          if (stop) running <= 1'b0;
        end
      end
    end
  end

  // outstanding write-backs per base-matrix column
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NB; b++) begin
        pend_cnt[b]   <= '0;
        pend_layer[b] <= '0;
      end
    end else begin
      for (int b = 0; b < NB; b++) begin
        if (inc[b] && !dec[b])      pend_cnt[b] <= pend_cnt[b] + 1'b1;
        else if (dec[b] && !inc[b]) pend_cnt[b] <= pend_cnt[b] - 1'b1;
        if (inc[b]) pend_layer[b] <= ent.layer;
      end
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                                   wr_done |-> (pend_cnt[wr_blk[BW-1:0]] != 8'd0 || (issue && track && ent.blk == wr_blk)));
endmodule
