// tb_cnu -- checks the check node unit (Eq. 3 with the syndrome sign) on a p = 4 instance.
// Row groups of random weight 2..12 are pushed into the accumulate side, and the same messages
// are replayed on the emit side, which the test pops with random gaps while the next groups are
// still being accumulated (up to four groups in flight). The expected L_rmn is worked out in
// the test from real-valued Phi(x) = ln((1+e^-x)/(1-e^-x)) quantised to the 8-bit, 3-fraction-
// bit format, with Phi(0) taken at half an LSB as the design does, the sum over the other
// edges of the row clamped to the largest magnitude code, and the sign (1-2s) * prod sgn.
// The equation is the paper's; the Phi quantisation and the split into two halves are this
// design's choices.
`timescale 1ns/1ps
module tb_cnu;
  localparam int P = 4, W = 8, F = 3, DMAX = 12, QD = 4, MX = 127, NG = 300;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                in_valid = 0, in_glast = 0, out_pop = 0, out_glast = 0, out_valid;
  logic [P-1:0][W-1:0] in_lqmn = '0, out_lqmn = '0, out_lr;
  logic [P-1:0]        in_syn = '0;

  cnu #(.P(P), .W(W), .F(F), .DMAX(DMAX), .QD(QD)) dut (.*);

  int deg [NG];
  int val [NG][DMAX][P];
  bit syn [NG][P];
  int pushed = 0, popped = 0;
  logic [P-1:0][W-1:0] va, ve;   // stimulus words of the two threads
  logic [P-1:0]        sa;
  int ga = 0, ja = 0, ge = 0, je = 0, pushed_q = 0;
  bit pop_now;

  function automatic int phi(int code);
    real x, v;
    int q;
    x = (code == 0) ? 0.5 / 8.0 : real'(code) / 8.0;
    v = $ln((1.0 + $exp(-x)) / (1.0 - $exp(-x)));
    q = int'(v * 8.0);
    return (q > MX) ? MX : q;
  endfunction

  function automatic int absv(int v);
    return v < 0 ? -v : v;
  endfunction

  function automatic int expect_lr(int g, int j, int i);
    int sum, sgn, m;
    sum = 0;
    sgn = syn[g][i];
    for (int k = 0; k < deg[g]; k++)
      if (k != j) begin
        sum += phi(absv(val[g][k][i]));
        sgn ^= int'(val[g][k][i] < 0);
      end
    m = phi(sum > MX ? MX : sum);
    return sgn ? -m : m;
  endfunction

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int g = 0; g < NG; g++) begin
      deg[g] = 2 + int'($urandom % (DMAX - 1));
      for (int i = 0; i < P; i++) syn[g][i] = $urandom % 2;
      for (int j = 0; j < DMAX; j++)
        for (int i = 0; i < P; i++)
          case ($urandom % 6)
            0:       val[g][j][i] = ($urandom % 2) ? MX : -MX;
            1:       val[g][j][i] = int'($urandom % 5) - 2;
            default: val[g][j][i] = int'($urandom % 255) - 127;
          endcase
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
        in_valid <= 1; in_lqmn <= va; in_syn <= sa; in_glast <= (ja == deg[ga] - 1);
        if (ja == deg[ga] - 1) begin
          ja = 0; ga++; pushed++;
        end else ja++;
      end else in_valid <= 0;
      // emit side
      pop_now = (popped < pushed_q) && $urandom % 3 != 0;
      if (pop_now) begin
        for (int i = 0; i < P; i++) ve[i] = W'(val[ge][je][i]);
        out_lqmn <= ve; out_pop <= 1; out_glast <= (je == deg[ge] - 1);
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
          if (int'($signed(out_lr[i])) != expect_lr(ge, je, i)) begin
            failures++;
            $display("FAIL group %0d edge %0d lane %0d: L_r %0d, expected %0d",
                     ge, je, i, int'($signed(out_lr[i])), expect_lr(ge, je, i));
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
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
