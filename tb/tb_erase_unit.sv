// tb_erase_unit -- checks the residue error-bits erase rule on a p = 4 instance (W = 8,
// Delta = 40). Row groups of random weight 2..12 are accumulated and then replayed on the
// emit side with random gaps, up to four groups in flight. For each row and lane the test
// counts the suspicious symbols (|L_q| < Delta) and the parity of the hard decisions against
// the syndrome bit; a symbol is expected to be replaced by -sign * Delta (so its hard decision
// flips) exactly when its row fails and it is the only suspicious symbol of that row. All other
// symbols must come back unchanged, and the flip counter must equal the number of
// replacements. The rule itself is this design's reading of the erase step.
`timescale 1ns/1ps
module tb_erase_unit;
  localparam int P = 4, W = 8, DELTA = 40, DMAX = 12, QD = 4, NG = 400;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                clear = 0, in_valid = 0, in_glast = 0, out_pop = 0, out_glast = 0, out_valid;
  logic [P-1:0][W-1:0] in_lq = '0, out_lq_in = '0, out_lq;
  logic [P-1:0]        in_syn = '0;
  logic [31:0]         flips;
  int                  exp_flips = 0;

  erase_unit #(.P(P), .W(W), .DELTA(DELTA), .QD(QD)) dut (.*);

  int deg [NG];
  int val [NG][DMAX][P];
  bit syn [NG][P];
  int pushed = 0, popped = 0;
  logic [P-1:0][W-1:0] va, ve;   // stimulus words of the two threads
  logic [P-1:0]        sa;
  int ga = 0, ja = 0, ge = 0, je = 0, pushed_q = 0;
  bit pop_now;

  function automatic int absv(int v);
    return v < 0 ? -v : v;
  endfunction

  // Expected value of edge j, lane i after the erase step.
  function automatic int expect_lq(int g, int j, int i);
    int cnt, par, v;
    cnt = 0;
    par = syn[g][i];
    for (int k = 0; k < deg[g]; k++) begin
      if (absv(val[g][k][i]) < DELTA) cnt++;
      par ^= int'(val[g][k][i] < 0);
    end
    v = val[g][j][i];
    if (cnt == 1 && par == 1 && absv(v) < DELTA) return (v < 0) ? DELTA : -DELTA;
    return v;
  endfunction

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int r, m;
  initial begin
    for (int g = 0; g < NG; g++) begin
      deg[g] = 2 + int'($urandom % (DMAX - 1));
      for (int i = 0; i < P; i++) syn[g][i] = $urandom % 2;
      for (int j = 0; j < DMAX; j++)
        for (int i = 0; i < P; i++)
        begin
          r = int'($urandom % 10);
          m = int'($urandom % 88);
          if (r < 2)      val[g][j][i] = (m % 79) - 39;      // suspicious
          else if (r < 6) val[g][j][i] = 40 + m;
          else            val[g][j][i] = -40 - m;
        end
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // One loop drives both sides cycle by cycle: the accumulate side walks (ga, ja), the emit
    // side (ge, je); each side idles on a random cycle and the accumulate side waits while four
    // groups are queued.
    while (ge < NG) begin
      // accumulate side
      if (ga < NG && (pushed - popped) < QD && $urandom % 4 != 0) begin
        for (int i = 0; i < P; i++) begin
          va[i] = W'(val[ga][ja][i]);
          sa[i] = syn[ga][i];
        end
        in_valid <= 1; in_lq <= va; in_syn <= sa; in_glast <= (ja == deg[ga] - 1);
        if (ja == deg[ga] - 1) begin
          ja = 0; ga++; pushed++;
        end else ja++;
      end else in_valid <= 0;
      // emit side
      pop_now = (popped < pushed_q) && $urandom % 3 != 0;
      if (pop_now) begin
        for (int i = 0; i < P; i++) ve[i] = W'(val[ge][je][i]);
        out_lq_in <= ve; out_pop <= 1; out_glast <= (je == deg[ge] - 1);
      end else out_pop <= 0;
      @(negedge clk);
      if (pop_now) begin
        checks++;
        if (!out_valid) begin
          failures++;
          $display("FAIL group %0d: out_valid low while popping", ge);
        end
        for (int i = 0; i < P; i++) begin
          checks++;
          if (expect_lq(ge, je, i) != val[ge][je][i]) exp_flips++;
          if (int'($signed(out_lq[i])) != expect_lq(ge, je, i)) begin
            failures++;
            $display("FAIL group %0d edge %0d lane %0d: L_q %0d, expected %0d",
                     ge, je, i, int'($signed(out_lq[i])), expect_lq(ge, je, i));
          end
        end
        if (je == deg[ge] - 1) begin
          je = 0; ge++; popped++;
        end else je++;
      end
      @(posedge clk);
      pushed_q = pushed;
    end
    in_valid <= 0;
    out_pop  <= 0;
    @(posedge clk);
    checks++;
    if (out_valid) begin
      failures++;
      $display("FAIL: queue not empty at the end");
    end
    checks++;
    if (flips != 32'(exp_flips)) begin
      failures++;
      $display("FAIL: flip counter %0d, expected %0d", flips, exp_flips);
    end
    $display("%0d symbols replaced", exp_flips);
    checks++;
    if (exp_flips == 0) begin
      failures++;
      $display("FAIL: no symbol was replaced");
    end
    clear <= 1;
    @(posedge clk);
    clear <= 0;
    @(negedge clk);
    checks++;
    if (flips != 0) begin
      failures++;
      $display("FAIL: flip counter not cleared");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
