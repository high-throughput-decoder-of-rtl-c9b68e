// tb_decision_unit -- checks the decode-decision unit on a p = 4 instance. Hard decisions
// (Eq. 5: bit = sign of L_q) of random row groups of weight 2..12 are streamed in with random
// gaps; after each row group the test compares the sticky mismatch flag and the count of
// failing rows with its own parity-versus-syndrome count, and after a batch of frames it
// checks that clear restarts both. The output path is checked too: u_out must carry the sign
// bits of the RAM_L word in its low p bits and those of the RAM_R word in its high p bits.
`timescale 1ns/1ps
module tb_decision_unit;
  localparam int P = 4, W = 8, DMAX = 12;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                clear = 0, in_valid = 0, in_glast = 0, mismatch;
  logic [P-1:0][W-1:0] in_lq = '0, ram_l = '0, ram_r = '0;
  logic [P-1:0]        in_syn = '0;
  logic [31:0]         bad_rows;
  logic [2*P-1:0]      u_out;

  decision_unit #(.P(P), .W(W)) dut (.*);

  int exp_bad = 0, r, d, n_mis = 0, n_ok = 0;
  logic [P-1:0][W-1:0] v;
  logic [P-1:0]        par, s;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int fr = 0; fr < 200; fr++) begin
      exp_bad = 0;
      for (int g = 0; g < 1 + fr % 5; g++) begin
        d = 2 + int'($urandom % (DMAX - 1));
        par = '0;
        for (int j = 0; j < d; j++) begin
          for (int i = 0; i < P; i++) begin
            r = int'($urandom % 255) - 127;
            v[i] = W'(r);
            par[i] = par[i] ^ v[i][W-1];
          end
          // even-numbered frames mostly satisfy the syndrome, odd ones rarely
          r = int'($urandom % 8);
          s = (fr % 2 == 0 && r != 0) ? par : P'($urandom);
          r = int'($urandom % 3);
          while (r == 0) begin
            in_valid <= 0;
            @(posedge clk);
            r = int'($urandom % 3);
          end
          in_valid <= 1; in_lq <= v; in_syn <= s; in_glast <= (j == d - 1);
          if (j == d - 1) exp_bad += $countones(s ^ par);
          @(posedge clk);
        end
        in_valid <= 0;
        @(negedge clk);
        checks += 2;
        if (bad_rows != 32'(exp_bad)) begin
          failures++;
          $display("FAIL frame %0d group %0d: bad_rows %0d, expected %0d", fr, g, bad_rows, exp_bad);
        end
        if (mismatch != (exp_bad != 0)) begin
          failures++;
          $display("FAIL frame %0d group %0d: mismatch %0b, expected %0b", fr, g, mismatch,
                   exp_bad != 0);
        end
      end
      if (exp_bad != 0) n_mis++;
      else n_ok++;
      // output path
      for (int i = 0; i < P; i++) begin
        ram_l[i] = W'($urandom);
        ram_r[i] = W'($urandom);
      end
      #1;
      for (int i = 0; i < P; i++) begin
        checks += 2;
        if (u_out[i] != ram_l[i][W-1] || u_out[P + i] != ram_r[i][W-1]) begin
          failures++;
          $display("FAIL: u_out lane %0d", i);
        end
      end
      @(posedge clk);
      clear <= 1;
      @(posedge clk);
      clear <= 0;
      @(negedge clk);
      checks++;
      if (mismatch || bad_rows != 0) begin
        failures++;
        $display("FAIL: clear did not restart the decision");
      end
    end
    $display("%0d frames with a syndrome mismatch, %0d without", n_mis, n_ok);
    checks++;
    if (n_mis == 0 || n_ok == 0) begin
      failures++;
      $display("FAIL: both outcomes must occur");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
