// tb_ldpc_top_full -- the device at its default size: two decoders, rate-0.2 code of length
// 80000 (Z = 800, p = 100, 80 x 100 base matrix), 8-bit messages, 13 iterations, DELTA = 40.
//
// Both decoders receive a frame at the same time (different random words, channel noise
// sigma = 0.6, llr scale 2/sigma^2). Each output is compared bit for bit with the reference
// model; at most 10 residual errors against the transmitted word are accepted (the
// reference itself can leave a few at this precision); the decoding time from the last input beat to
// frame_done is checked against the schedule length (13 iterations of E = 2880 cycles, one
// decide pass, the erase pass if taken, 400 output cycles, interlock stalls and a small
// fixed overhead). The measured cycles per frame are printed with the throughput they give
// at 100 MHz for two decoders.
// The sizes are the paper's; the base matrix is this design's own construction.
`timescale 1ns/1ps
module tb_ldpc_top_full;
  import ldpc_ref_pkg::*;

  localparam int ND = 2;
  localparam int P = ldpc_pkg::P_DEF, Z = ldpc_pkg::Z_DEF, NB = ldpc_pkg::N_DEF / ldpc_pkg::Z_DEF;
  localparam int MB = ldpc_pkg::MB_DEF, NT1 = ldpc_pkg::NT1_DEF, D1 = ldpc_pkg::D1_DEF;
  localparam int W = ldpc_pkg::W_DEF, F = ldpc_pkg::F_DEF, TMAX = ldpc_pkg::TMAX_DEF;
  localparam int DELTA = ldpc_pkg::DELTA_DEF, EPASS = 1;
  localparam int RW = 12, SCW = 12, RF = 8, SCF = 8;
  localparam int N = NB * Z, M = MB * Z, K = Z / P;
  localparam int E = ldpc_pkg::n_edges(MB, NT1, D1, K);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [ND-1:0]                  in_valid, in_ready, u_valid, frame_done, syn_ok, erased;
  logic [ND-1:0][P-1:0][RW-1:0]   in_r;
  logic [ND-1:0][P-1:0]           in_s;
  logic [SCW-1:0]                 llr_scale;
  logic [ND-1:0][2*P-1:0]         u_data;
  logic [ND-1:0][31:0]            stalls, flips;

  ldpc_top dut (.*);

  ldpc_ref #(.P(P), .Z(Z), .NB(NB), .MB(MB), .NT1(NT1), .D1(D1), .W(W), .F(F),
             .TMAX(TMAX), .DELTA(DELTA), .EPASS(EPASS), .RF(RF), .SCF(SCF)) ref_m;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  bit u[ND][], s[ND][], uh[ND][], got[ND][];
  bit ref_ok[ND], ref_er[ND];
  int rs[ND][];
  int t_last, t_done[ND], nout[ND];

  initial begin
    real sigma;
    int  scale, llr[];
    sigma = 0.6;
    scale = int'(256.0 * 2.0 / (sigma * sigma));
    ref_m = new();
    in_valid = '0; in_r = '0; in_s = '0;
    llr_scale = SCW'(scale);
    llr = new[N];
    for (int d = 0; d < ND; d++) begin
      u[d] = new[N]; rs[d] = new[N]; got[d] = new[N]; uh[d] = new[N];
      for (int n = 0; n < N; n++) begin
        real x;
        u[d][n]  = $urandom % 2;
        x        = (u[d][n] ? -1.0 : 1.0) + sigma * gauss();
        rs[d][n] = int'(x * 256.0);
        if (rs[d][n] > 2047) rs[d][n] = 2047;
        if (rs[d][n] < -2047) rs[d][n] = -2047;
        llr[n] = ref_m.quant(rs[d][n], scale);
      end
      ref_m.syndrome(u[d], s[d]);
      ref_m.decode(llr, s[d]);
      for (int n = 0; n < N; n++) uh[d][n] = ref_m.u_hat[n];
      ref_ok[d] = ref_m.syn_ok;
      ref_er[d] = ref_m.erased;
    end
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int b = 0; b < N / P; b++) begin
      logic [ND-1:0][P-1:0][RW-1:0] rv;
      logic [ND-1:0][P-1:0]         sv;
      for (int d = 0; d < ND; d++)
        for (int i = 0; i < P; i++) begin
          rv[d][i] = RW'(rs[d][b * P + i]);
          sv[d][i] = (b * P + i < M) ? s[d][b * P + i] : 1'b0;
        end
      in_valid <= '1;
      in_r     <= rv;
      in_s     <= sv;
      @(posedge clk);
      while (in_ready != '1) @(posedge clk);
    end
    in_valid <= '0;
    t_last = cyc;
    nout = '{default: 0};
    t_done = '{default: 0};
    while (t_done[0] == 0 || t_done[1] == 0) begin
      @(posedge clk);
      for (int d = 0; d < ND; d++) begin
        if (u_valid[d]) begin
          for (int i = 0; i < 2 * P; i++) got[d][nout[d] * 2 * P + i] = u_data[d][i];
          nout[d]++;
        end
        if (frame_done[d]) begin
          t_done[d] = cyc;
          check(syn_ok[d] == ref_ok[d], $sformatf("decoder %0d syn_ok", d));
          check(erased[d] == ref_er[d], $sformatf("decoder %0d erased", d));
        end
      end
    end
    for (int d = 0; d < ND; d++) begin
      int dr, du, lo, hi, cycles;
      dr = 0; du = 0;
      for (int n = 0; n < N; n++) begin
        if (got[d][n] != uh[d][n]) dr++;
        if (got[d][n] != u[d][n]) du++;
      end
      check(nout[d] == N / (2 * P), $sformatf("decoder %0d: %0d output beats", d, nout[d]));
      check(dr == 0, $sformatf("decoder %0d: %0d bits differ from reference", d, dr));
      check(du <= 10, $sformatf("decoder %0d: %0d residual bit errors", d, du));
      cycles = t_done[d] - t_last;
      lo = TMAX * E + N / (2 * P);
      hi = (TMAX + 1 + (erased[d] ? EPASS : 0)) * E + int'(stalls[d]) + N / (2 * P) + 20 * (TMAX + 3);
      check(cycles >= lo && cycles <= hi, $sformatf("decoder %0d: %0d cycles, expected %0d..%0d", d, cycles, lo, hi));
      $display("decoder %0d: %0d cycles after the last input beat (%0d interlock stalls), syn_ok=%0b erased=%0b flips=%0d residual errors=%0d",
               d, cycles, stalls[d], syn_ok[d], erased[d], flips[d], du);
      $display("decoder %0d: %0d cycles per frame including input -> %.1f Mbps for %0d decoders at 100 MHz",
               d, cycles + N / P, 2.0 * 100.0 * real'(N) / real'(cycles + N / P), ND);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
