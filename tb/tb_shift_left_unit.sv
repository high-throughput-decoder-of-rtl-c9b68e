// tb_shift_left_unit -- checks the write-back words of the shift-left unit.
// First the paper's example (p = 2: Val_in {0,4 | 3,2 | 1,0} shifted left by one gives
// RAM_R {4,3} and RAM_L {2,1}), then random sequences of row-group steps c = 1..k on a p = 4
// instance against a model that applies the Appendix-D input selection with its own copies of
// L_qn^1' and L_qn^(c-1)' per circulant position.
`timescale 1ns/1ps
module tb_shift_left_unit;
  localparam int W = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              a_v, a_wv;
  logic [1:0][W-1:0] a_new, a_l, a_r, a_dl, a_dr;
  logic [15:0]       a_al, a_ar;
  logic [7:0]        a_blk;
  shift_left_unit #(.P(2), .W(W), .DMAX(4)) u_a (
    .clk, .rst_n, .in_valid(a_v), .lq_new(a_new), .lq_l(a_l), .lq_r(a_r), .shift_num(1'b1),
    .swap(1'b0), .cfirst(1'b1), .clast(1'b0), .pos(4'd0), .addr_l(16'd3), .addr_r(16'd3),
    .blk_in(8'd7), .wr_valid(a_wv), .wr_addr_l(a_al), .wr_addr_r(a_ar), .wr_data_l(a_dl),
    .wr_data_r(a_dr), .wr_blk(a_blk));

  localparam int P = 4, D = 5;
  logic              b_v, b_wv, b_swap, b_cf, b_cl;
  logic [P-1:0][W-1:0] b_new, b_l, b_r, b_dl, b_dr;
  logic [1:0]        b_sh;
  logic [3:0]        b_pos;
  logic [15:0]       b_al, b_ar, b_wal, b_war;
  logic [7:0]        b_blk, b_wblk;
  shift_left_unit #(.P(P), .W(W), .DMAX(D)) u_b (
    .clk, .rst_n, .in_valid(b_v), .lq_new(b_new), .lq_l(b_l), .lq_r(b_r), .shift_num(b_sh),
    .swap(b_swap), .cfirst(b_cf), .clast(b_cl), .pos(b_pos), .addr_l(b_al), .addr_r(b_ar),
    .blk_in(b_blk), .wr_valid(b_wv), .wr_addr_l(b_wal), .wr_addr_r(b_war), .wr_data_l(b_dl),
    .wr_data_r(b_dr), .wr_blk(b_wblk));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  logic [P-1:0][W-1:0] m_first[D], m_prev[D];

  initial begin
    a_v = 0; b_v = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    a_v = 1; a_l = {8'd0, 8'd4}; a_new = {8'd3, 8'd2}; a_r = {8'd1, 8'd0};
    @(negedge clk);
    a_v = 0;
    chk(a_wv, "example write valid");
    chk(a_dr == {8'd4, 8'd3}, "example RAM_R word");
    chk(a_dl == {8'd2, 8'd1}, "example RAM_L word");
    chk(a_al == 16'd3 && a_blk == 8'd7, "example address and block");
    // random layers: k = 3 steps, d circulants per step
    for (int layer = 0; layer < 40; layer++) begin
      int d, k;
      d = 1 + $urandom % D; k = 3;
      for (int c = 0; c < k; c++) begin
        for (int j = 0; j < d; j++) begin
          logic [P-1:0][W-1:0] top, bot;
          logic [3*P-1:0][W-1:0] v, sh;
          b_v = 1; b_new = {$urandom, $urandom}; b_l = {$urandom, $urandom}; b_r = {$urandom, $urandom};
          b_sh = $urandom % P; b_swap = $urandom % 2; b_cf = (c == 0); b_cl = (c == k - 1);
          b_pos = 4'(j); b_al = 16'($urandom % 100); b_ar = 16'($urandom % 100); b_blk = 8'($urandom);
          top = b_cl ? m_first[j] : b_l;
          bot = b_cf ? b_r : m_prev[j];
          v   = {top, b_new, bot};
          sh  = v << (W * int'(b_sh));
          m_prev[j] = b_new;
          if (b_cf) m_first[j] = b_new;
          @(negedge clk);
          chk(b_wv, "write valid");
          chk(b_dl == (b_swap ? sh[3*P-1:2*P] : sh[2*P-1:P]), "RAM_L word");
          chk(b_dr == (b_swap ? sh[2*P-1:P] : sh[3*P-1:2*P]), "RAM_R word");
          chk(b_wal == b_al && b_war == b_ar && b_wblk == b_blk, "addresses");
        end
      end
    end
    b_v = 0;
    @(negedge clk);
    chk(!b_wv, "no write without input");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
