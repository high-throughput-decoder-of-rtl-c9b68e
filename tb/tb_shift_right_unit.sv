// tb_shift_right_unit -- checks the window selection of the shift-right unit.
// First the paper's own example (p = 2, RAM_L word holds columns 2,1 and RAM_R 4,3, shift 1:
// L_qn_L = {0,4}, L_qn = {3,2}, L_qn_R = {1,0}), then random words, shifts and swap on a
// p = 4 instance against an element-by-element model of {upper, lower, zeros} >> shift.
`timescale 1ns/1ps
module tb_shift_right_unit;
  localparam int W = 8;
  int checks = 0, failures = 0;

  // paper example, p = 2
  logic [1:0][W-1:0] a_l, a_r, a_q, a_ql, a_qr;
  logic              a_swap;
  logic [0:0]        a_sh;
  shift_right_unit #(.P(2), .W(W)) u_a (.ram_l(a_l), .ram_r(a_r), .swap(a_swap), .shift_num(a_sh),
                                        .lq(a_q), .lq_l(a_ql), .lq_r(a_qr));
  // random, p = 4
  logic [3:0][W-1:0] b_l, b_r, b_q, b_ql, b_qr;
  logic              b_swap;
  logic [1:0]        b_sh;
  shift_right_unit #(.P(4), .W(W)) u_b (.ram_l(b_l), .ram_r(b_r), .swap(b_swap), .shift_num(b_sh),
                                        .lq(b_q), .lq_l(b_ql), .lq_r(b_qr));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    int ev[12];
    // element 0 = lowest column: RAM_L word = columns (1,2), RAM_R = (3,4)
    a_l = {8'd2, 8'd1}; a_r = {8'd4, 8'd3}; a_swap = 0; a_sh = 1;
    #1;
    chk(a_q  == {8'd3, 8'd2}, "paper example L_qn");
    chk(a_ql == {8'd0, 8'd4}, "paper example L_qn_L");
    chk(a_qr == {8'd1, 8'd0}, "paper example L_qn_R");
    // wrap case of the same example: window (4,1) reads RAM_R (3,4) as lower word
    a_swap = 1; a_sh = 1;
    #1;
    chk(a_q == {8'd1, 8'd4}, "paper example wrap window (4,1)");
    for (int t = 0; t < 500; t++) begin
      b_l = {$urandom, $urandom}; b_r = {$urandom, $urandom};
      b_swap = $urandom % 2; b_sh = $urandom % 4;
      #1;
      for (int i = 0; i < 4; i++) begin
        ev[i]     = 0;
        ev[4 + i] = b_swap ? b_r[i] : b_l[i];
        ev[8 + i] = b_swap ? b_l[i] : b_r[i];
      end
      for (int i = 0; i < 4; i++) begin
        int j;
        j = i + b_sh;
        chk(b_qr[i] == W'(ev[j]), "L_qn_R lane");
        chk(b_q[i]  == W'(ev[j + 4]), "L_qn lane");
        chk(b_ql[i] == W'((j + 8 < 12) ? ev[j + 8] : 0), "L_qn_L lane");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
