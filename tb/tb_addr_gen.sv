// tb_addr_gen -- checks the address generation unit on a small code (p = 4, Z = 16 so k = 4,
// 12 base columns, 7 layers). For every issued schedule entry the test recomputes, from the
// circulant's column and shift alone, where the p values of the row group start inside the
// column block, which memory word (RAM_L for even, RAM_R for odd word index) holds the lower and
// upper half of the 2p window, the offset inside the lower word, and the row-group flags; the
// order must be layer, row group, circulant. Three runs:
//   1. no write tracking, no hold: two whole iterations back to back, E cycles each, with the
//      stop request ending the run and L_rmn = 0 flagged in the first iteration only;
//   2. random hold: same sequence, nothing lost or repeated;
//   3. write tracking with a write-back that returns after a fixed latency: no entry may issue
//      while a write of an earlier layer to the same column is outstanding, and the read/write
//      interlock must stall at least once.
// The ROM of read addresses follows the paper; the schedule order and the interlock are this
// design's choices.
`timescale 1ns/1ps
module tb_addr_gen;
  import ldpc_pkg::*;
  localparam int P = 4, Z = 16, NB = 12, MB = 7, NT1 = 1, D1 = 6, K = Z / P;
  localparam int E = n_edges(MB, NT1, D1, K), EAW = $clog2(E), LAT = 9;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic           start = 0, stop, track_writes = 0, first_pass_zero = 0, hold = 0;
  logic           wr_done = 0, iss_valid, iss_first_iter, busy;
  logic [7:0]     wr_blk = '0, iter_num;
  sched_t         iss_ent;
  logic [EAW-1:0] iss_eaddr;
  logic [31:0]    stalls;

  addr_gen #(.P(P), .Z(Z), .NB(NB), .MB(MB), .NT1(NT1), .D1(D1)) dut (.*);

  assign stop = (iter_num == 8'd1);

  // expected entries in issue order
  sched_t exp_q [E];
  int     exp_layer [E];

  function automatic void build();
    int e, d, col, alpha, st, w, g0, g1;
    e = 0;
    for (int l = 0; l < MB; l++) begin
      d = (l < NT1) ? D1 : 4;
      for (int c = 0; c < K; c++)
        for (int j = 0; j < d; j++) begin
          sched_t s;
          col   = base_col(l, j, NB, MB, NT1, D1);
          alpha = base_shift(l, j, NB, MB, NT1, D1, Z);
          st    = (c * P + alpha) % Z;        // first column of the row group's window
          w     = st / P;
          g0    = col * K + w;                // global word index of the lower half
          g1    = col * K + (w + 1) % K;
          s = '0;
          s.swap   = g0 % 2;
          s.addr_l = 16'((g0 % 2 == 0) ? g0 / 2 : g1 / 2);
          s.addr_r = 16'((g0 % 2 == 1) ? g0 / 2 : g1 / 2);
          s.shift  = 8'(st % P);
          s.blk    = 8'(col);
          s.pos    = 4'(j);
          s.layer  = 8'(l);
          s.cfirst = (c == 0);
          s.clast  = (c == K - 1);
          s.glast  = (j == d - 1);
          s.group  = 16'(l * K + c);
          exp_q[e] = s;
          e++;
        end
    end
  endfunction

  // outstanding write-backs of run 3
  int pend_t [$];
  int pend_b [$];
  int pend_l [$];
  int n_iss, run, cyc, r;

  always @(posedge clk) begin
    // write-back model: an issued entry of a tracking pass returns LAT cycles later
    wr_done <= 0;
    if (pend_t.size() > 0 && pend_t[0] <= cyc) begin
      wr_done <= 1;
      wr_blk  <= 8'(pend_b[0]);
      void'(pend_t.pop_front());
      void'(pend_b.pop_front());
      void'(pend_l.pop_front());
    end
    cyc++;
  end

  always @(negedge clk) begin
    if (rst_n && iss_valid) begin
      int e;
      e = n_iss % E;
      checks++;
      if (iss_ent !== exp_q[e] || iss_eaddr != EAW'(e)) begin
        failures++;
        $display("FAIL run %0d entry %0d: got %h addr %0d, expected %h", run, n_iss, iss_ent,
                 iss_eaddr, exp_q[e]);
      end
      checks++;
      if (iss_first_iter != (run == 1 && n_iss < E)) begin
        failures++;
        $display("FAIL run %0d entry %0d: first-iteration flag %0b", run, n_iss, iss_first_iter);
      end
      if (run == 3) begin
        for (int k = 0; k < pend_b.size(); k++)
          if (pend_b[k] == int'(iss_ent.blk) && pend_l[k] != int'(iss_ent.layer)) begin
            failures++;
            $display("FAIL entry %0d: column %0d read while a write of layer %0d is pending",
                     n_iss, iss_ent.blk, pend_l[k]);
          end
        checks++;
        pend_t.push_back(cyc + LAT);
        pend_b.push_back(int'(iss_ent.blk));
        pend_l.push_back(int'(iss_ent.layer));
      end
      n_iss++;
    end
  end

  initial begin : watchdog
    repeat (20 * E) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_run(int which, bit trk, bit zero, bit rnd_hold);
    int t0, t1;
    run = which;
    n_iss = 0;
    @(posedge clk);
    start <= 1; track_writes <= trk; first_pass_zero <= zero;
    @(posedge clk);
    start <= 0;
    @(negedge clk);
    t0 = cyc;
    while (busy) begin
      r = int'($urandom % 4);
      hold <= rnd_hold && (r == 0);
      @(negedge clk);
    end
    hold <= 0;
    t1 = cyc;
    repeat (LAT + 4) @(posedge clk);
    checks++;
    if (n_iss != 2 * E) begin
      failures++;
      $display("FAIL run %0d: %0d entries issued, expected %0d", which, n_iss, 2 * E);
    end
    if (which == 1) begin
      checks++;
      if (t1 - t0 != 2 * E) begin
        failures++;
        $display("FAIL run 1: %0d cycles for two iterations, expected %0d", t1 - t0, 2 * E);
      end
    end
    $display("run %0d: %0d entries in %0d cycles, %0d interlock stalls", which, n_iss, t1 - t0,
             stalls);
  endtask

  initial begin
    build();
    repeat (3) @(posedge clk);
    rst_n <= 1;
    do_run(1, 1'b0, 1'b1, 1'b0);
    do_run(2, 1'b0, 1'b0, 1'b1);
    checks++;
    if (stalls != 0) begin
      failures++;
      $display("FAIL: stalls counted without write tracking");
    end
    do_run(3, 1'b1, 1'b0, 1'b0);
    checks++;
    if (stalls == 0) begin
      failures++;
      $display("FAIL: the read/write interlock never stalled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
