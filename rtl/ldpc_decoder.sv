// ldpc_decoder -- one layered-BP decoder for a quasi-cyclic LDPC code with syndrome input,
// limited-precision messages and a residue error-bits erase step.
//
// Datapath (one circulant of p rows per clock, fully pipelined):
//   Addr_gen ROM entry -> RAM_L/RAM_R read (2p messages) + check RAM read (p messages)
//   -> shift-right unit (p-message window, plus the outer parts into FIFO buffer_1)
//   -> VNU, Eq. (2) -> [stage reg] -> CNU accumulate, FIFO buffer_2
//   ... when the row group is complete ...
//   FIFO buffer_2 head -> CNU emit, Eq. (3) -> total message unit, Eq. (4)
//   -> [stage reg] -> check RAM write-back, shift-left unit -> [reg] -> RAM_L/RAM_R write.
// In erase passes the check messages are taken as zero (so FIFO buffer_2 carries L_qn) and
// the erase module replaces CNU and total message unit; in decide passes the stage-2 values
// go only to the decode decision unit and nothing is written back.
// The controller (gcu) sequences receive -> TMAX iterations -> decide -> (erase) -> output.
//
// Interface: one frame of N channel samples (p per beat, natural order) plus its M-bit
// syndrome s enters on in_* with a valid/ready handshake; the decided bits leave 2p per cycle
// on u_valid/u_data in natural order (bit i of beat a = column 2*a*p + i), with frame_done,
// syn_ok (s_hat = s after BP) and erased (the erase pass ran) at the end of the frame.
// Counters for the testbench: stalls (interlock holds), flips (erased symbols).
// The parameters describe the code: p lanes, circulant size Z, NB x MB base matrix with
// NT1 type-1 layers of weight D1 (see ldpc_pkg), W/F fixed point, TMAX iterations, DELTA.
// The block set and the order of the units follow the paper's architecture figure; the
// number of pipeline stages, the elastic CNU split, the FIFO depth of 32 with a hold at 26,
// the read/write interlock and the beat-level interfaces are this design's own choices.
// Left unconnected on purpose, and reported by lint: the decision unit's bad_rows count (a
// debug value), FIFO_2's flags (FIFO_2 moves in lockstep with FIFO_1, which an assertion
// checks) and FIFO_1's full flag (the hold threshold keeps it from filling). rst_n also
// disables the assertions, which lint reports as a reset used both ways.
module ldpc_decoder #(
  parameter int P     = ldpc_pkg::P_DEF,
  parameter int Z     = ldpc_pkg::Z_DEF,
  parameter int NB    = ldpc_pkg::N_DEF / ldpc_pkg::Z_DEF,
  parameter int MB    = ldpc_pkg::MB_DEF,
  parameter int NT1   = ldpc_pkg::NT1_DEF,
  parameter int D1    = ldpc_pkg::D1_DEF,
  parameter int W     = ldpc_pkg::W_DEF,
  parameter int F     = ldpc_pkg::F_DEF,
  parameter int TMAX  = ldpc_pkg::TMAX_DEF,
  parameter int DELTA = ldpc_pkg::DELTA_DEF,
  parameter int EPASS = 1,
  parameter int RW    = 12,
  parameter int RF    = 8,
  parameter int SCW   = 12,
  parameter int SCF   = 8,
  parameter int FD    = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [P-1:0][RW-1:0] in_r,
  input  logic [P-1:0]         in_s,
  input  logic [SCW-1:0]       llr_scale,
  output logic                 u_valid,
  output logic [2*P-1:0]       u_data,
  output logic                 frame_done,
  output logic                 syn_ok,
  output logic                 erased,
  output logic [31:0]          stalls,
  output logic [31:0]          flips
);
  import ldpc_pkg::*;

  localparam int K    = Z / P;
  localparam int N    = NB * Z;
  localparam int NW   = N / P;
  localparam int SG   = MB * K;
  localparam int E    = n_edges(MB, NT1, D1, K);
  localparam int DMAX = (D1 > 4) ? D1 : 4;
  localparam int VAW  = $clog2(NW / 2);
  localparam int SAW  = $clog2(SG);
  localparam int EAW  = $clog2(E);
  localparam int SW   = $clog2(P);

  typedef logic [P-1:0][W-1:0] vec_t;
  typedef struct packed {
    sched_t         ent;
    logic [EAW-1:0] eaddr;
  } meta_t;

  // ---------------------------------------------------------------- control
  logic            rx_en, finish_storing, ag_start, ag_stop, ag_busy, pipe_idle;
  logic            dec_clear, mismatch, out_rd, out_phase;
  logic [VAW-1:0]  out_addr;
  logic [7:0]      iter_num;
  mode_e           mode;
  logic [31:0]     bad_rows;

  gcu #(.TMAX(TMAX), .EPASS(EPASS), .NOUT(NW / 2)) u_gcu (
    .clk, .rst_n,
    .rx_enable(rx_en), .finish_storing,
    .start(ag_start), .stop(ag_stop), .mode, .iter_num, .ag_busy, .pipe_idle,
    .dec_clear, .mismatch,
    .out_rd, .out_addr, .out_phase, .frame_done, .syn_ok, .erased
  );

  // ---------------------------------------------------------------- receiving unit
  logic            rx_wl, rx_wr, rx_swe;
  logic [VAW-1:0]  rx_addr;
  vec_t            rx_data;
  logic [SAW-1:0]  rx_saddr;
  logic [P-1:0]    rx_sdata;

  rx_unit #(.P(P), .W(W), .F(F), .NW(NW), .SG(SG), .RW(RW), .RF(RF), .SCW(SCW), .SCF(SCF))
  u_rx (
    .clk, .rst_n, .enable(rx_en), .in_valid, .in_ready, .in_r, .in_s, .llr_scale,
    .wr_en_l(rx_wl), .wr_en_r(rx_wr), .wr_addr(rx_addr), .wr_data(rx_data),
    .syn_we(rx_swe), .syn_addr(rx_saddr), .syn_data(rx_sdata), .finish_storing
  );

  // ---------------------------------------------------------------- Addr_gen (stage 0)
  logic            iss_valid, iss_first, hold, sl_wr;
  sched_t          iss_ent;
  logic [EAW-1:0]  iss_eaddr;
  logic [7:0]      sl_blk;
  logic [$clog2(FD):0] f1_count;

  assign hold = (int'(f1_count) >= FD - 6);

  addr_gen #(.P(P), .Z(Z), .NB(NB), .MB(MB), .NT1(NT1), .D1(D1)) u_ag (
    .clk, .rst_n, .start(ag_start), .stop(ag_stop),
    .track_writes(mode != MODE_DECIDE), .first_pass_zero(mode == MODE_DECODE),
    .hold, .wr_done(sl_wr), .wr_blk(sl_blk),
    .iss_valid, .iss_ent, .iss_eaddr, .iss_first_iter(iss_first),
    .iter_num, .busy(ag_busy), .stalls
  );

  // ---------------------------------------------------------------- memories
  vec_t            ram_l_q, ram_r_q, chk_q, sl_dl, sl_dr;
  logic [VAW-1:0]  sl_al, sl_ar;
  logic [P-1:0]    syn_a_q, syn_b_q;
  logic            chk_we;
  logic [EAW-1:0]  chk_wa;
  vec_t            chk_wd;

  var_msg_ram #(.P(P), .W(W), .DEPTH(NW / 2)) u_vram (
    .clk,
    .rd_addr_l(out_phase ? out_addr : VAW'(iss_ent.addr_l)),
    .rd_addr_r(out_phase ? out_addr : VAW'(iss_ent.addr_r)),
    .rd_data_l(ram_l_q), .rd_data_r(ram_r_q),
    .wr_en_l(rx_wl || sl_wr), .wr_addr_l(rx_wl ? rx_addr : sl_al), .wr_data_l(rx_wl ? rx_data : sl_dl),
    .wr_en_r(rx_wr || sl_wr), .wr_addr_r(rx_wr ? rx_addr : sl_ar), .wr_data_r(rx_wr ? rx_data : sl_dr)
  );

  chk_msg_ram #(.P(P), .W(W), .DEPTH(E)) u_cram (
    .clk, .rd_addr(iss_eaddr), .rd_data(chk_q),
    .wr_en(chk_we), .wr_addr(chk_wa), .wr_data(chk_wd)
  );

  syn_ram #(.P(P), .DEPTH(SG)) u_sram (
    .clk,
    .a_we(rx_swe), .a_addr(rx_swe ? rx_saddr : SAW'(iss_ent.group)), .a_wdata(rx_sdata), .a_rdata(syn_a_q),
    .b_we(1'b0), .b_addr(SAW'(iss_ent.group)), .b_wdata('0), .b_rdata(syn_b_q)
  );

  // ---------------------------------------------------------------- stage 1: shift-right, VNU
  logic   v1, first1;
  meta_t  m1;
  vec_t   lq1, lql1, lqr1, lqmn1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= iss_valid;
  end
  always_ff @(posedge clk) begin
    m1     <= '{ent: iss_ent, eaddr: iss_eaddr};
    first1 <= iss_first || (mode != MODE_DECODE);
  end

  shift_right_unit #(.P(P), .W(W)) u_shr (
    .ram_l(ram_l_q), .ram_r(ram_r_q), .swap(m1.ent.swap), .shift_num(SW'(m1.ent.shift)),
    .lq(lq1), .lq_l(lql1), .lq_r(lqr1)
  );

  vnu #(.P(P), .W(W)) u_vnu (.lq(lq1), .lr(chk_q), .first_iter(first1), .lqmn(lqmn1));

  // ---------------------------------------------------------------- stage 2: CNU / erase / decide in
  logic          v2;
  meta_t         m2;
  vec_t          lqmn2, lql2, lqr2;
  logic [P-1:0]  syn2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v2 <= 1'b0;
    else        v2 <= v1;
  end
  always_ff @(posedge clk) begin
    m2    <= m1;
    lqmn2 <= lqmn1;
    lql2  <= lql1;
    lqr2  <= lqr1;
    syn2  <= (mode == MODE_DECIDE) ? syn_b_q : syn_a_q;
  end

  logic  push, fire, grp_ok, f1_empty, f1_full, f2_empty, f2_full;
  logic  cnu_ok, er_ok;
  meta_t fm;
  vec_t  f_lql, f_lqr, f_lqmn, lr_new, lq_tot, lq_er, lq_new;
  logic [$clog2(FD):0] f2_count;

  assign push = v2 && (mode != MODE_DECIDE);

  sync_fifo #(.WIDTH(2 * P * W + $bits(meta_t)), .DEPTH(FD)) u_fifo1 (
    .clk, .rst_n, .wr_en(push), .wr_data({lql2, lqr2, m2}),
    .rd_en(fire), .rd_data({f_lql, f_lqr, fm}),
    .empty(f1_empty), .full(f1_full), .count(f1_count)
  );

  sync_fifo #(.WIDTH(P * W), .DEPTH(FD)) u_fifo2 (
    .clk, .rst_n, .wr_en(push), .wr_data(lqmn2),
    .rd_en(fire), .rd_data(f_lqmn),
    .empty(f2_empty), .full(f2_full), .count(f2_count)
  );

  cnu #(.P(P), .W(W), .F(F), .DMAX(DMAX)) u_cnu (
    .clk, .rst_n,
    .in_valid(v2 && mode == MODE_DECODE), .in_lqmn(lqmn2), .in_glast(m2.ent.glast), .in_syn(syn2),
    .out_lqmn(f_lqmn), .out_pop(fire && mode == MODE_DECODE), .out_glast(fm.ent.glast),
    .out_valid(cnu_ok), .out_lr(lr_new)
  );

  erase_unit #(.P(P), .W(W), .DELTA(DELTA)) u_erase (
    .clk, .rst_n, .clear(ag_start),
    .in_valid(v2 && mode == MODE_ERASE), .in_lq(lqmn2), .in_glast(m2.ent.glast), .in_syn(syn2),
    .out_lq_in(f_lqmn), .out_pop(fire && mode == MODE_ERASE), .out_glast(fm.ent.glast),
    .out_valid(er_ok), .out_lq(lq_er), .flips
  );

  decision_unit #(.P(P), .W(W)) u_dec (
    .clk, .rst_n, .clear(dec_clear),
    .in_valid(v2 && mode == MODE_DECIDE), .in_lq(lqmn2), .in_glast(m2.ent.glast), .in_syn(syn2),
    .mismatch, .bad_rows,
    .ram_l(ram_l_q), .ram_r(ram_r_q), .u_out(u_data)
  );

  total_msg_unit #(.P(P), .W(W)) u_tot (.lqmn(f_lqmn), .lr(lr_new), .lq(lq_tot));

  assign grp_ok = (mode == MODE_DECODE) ? cnu_ok : er_ok;
  assign fire   = !f1_empty && grp_ok;
  assign lq_new = (mode == MODE_ERASE) ? lq_er : lq_tot;

  // ---------------------------------------------------------------- stage A: write-back
  logic  vA;
  meta_t mA;
  vec_t  lqA, lrA, lqlA, lqrA;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vA <= 1'b0;
    else        vA <= fire;
  end
  always_ff @(posedge clk) begin
    if (fire) begin
      mA   <= fm;
      lqA  <= lq_new;
      lrA  <= lr_new;
      lqlA <= f_lql;
      lqrA <= f_lqr;
    end
  end

  assign chk_we = vA && (mode == MODE_DECODE);
  assign chk_wa = mA.eaddr;
  assign chk_wd = lrA;

  shift_left_unit #(.P(P), .W(W), .DMAX(DMAX), .AW(VAW)) u_shl (
    .clk, .rst_n, .in_valid(vA), .lq_new(lqA), .lq_l(lqlA), .lq_r(lqrA),
    .shift_num(SW'(mA.ent.shift)), .swap(mA.ent.swap), .cfirst(mA.ent.cfirst),
    .clast(mA.ent.clast), .pos(mA.ent.pos),
    .addr_l(VAW'(mA.ent.addr_l)), .addr_r(VAW'(mA.ent.addr_r)), .blk_in(mA.ent.blk),
    .wr_valid(sl_wr), .wr_addr_l(sl_al), .wr_addr_r(sl_ar), .wr_data_l(sl_dl), .wr_data_r(sl_dr),
    .wr_blk(sl_blk)
  );

  assign pipe_idle = !iss_valid && !v1 && !v2 && f1_empty && !vA && !sl_wr;

  // ---------------------------------------------------------------- output
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) u_valid <= 1'b0;
    else        u_valid <= out_rd;
  end

  a_rx_no_collide: assert property (@(posedge clk) disable iff (!rst_n) !((rx_wl || rx_wr) && sl_wr));
  a_fifos_aligned: assert property (@(posedge clk) disable iff (!rst_n) f1_count == f2_count);
endmodule
