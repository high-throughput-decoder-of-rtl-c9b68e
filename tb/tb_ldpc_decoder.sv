// tb_ldpc_decoder -- end-to-end test of one decoder on a small code.
//
// Code: p = 4, Z = 8 (k = 2), 12 x 7 base matrix with one type-1 layer of weight 6, so N = 96,
// M = 56 and one iteration takes E = 60 cycles. Frames: random words u, syndrome s = u H^T,
// channel samples R = (1 - 2u) + sigma * noise, quantised to 12 bits with 8 fraction bits and
// scaled by 2/sigma^2. Each frame's decided bits are compared bit for bit with the reference
// model (tb/ldpc_ref_pkg), as are syn_ok, erased and the erase flip count; noiseless frames must
// also give back u exactly. The cycle count from the last input beat to frame_done must be at
// least TMAX*E and at most (TMAX + 1 + EPASS)*E plus the interlock stalls, the N/(2p) output
// cycles and a small fixed overhead. The test counts how often the mechanisms happened
// (interlock stall, failed syndrome, erase flip, clean decode) and fails if one never did.
// The code, the Phi quantisation and the erase rule are this design's choices and the
// reference model shares them.
`timescale 1ns/1ps
module tb_ldpc_decoder;
  import ldpc_ref_pkg::*;

  localparam int P = 4, Z = 8, NB = 12, MB = 7, NT1 = 1, D1 = 6;
  localparam int W = 8, F = 3, TMAX = 4, DELTA = 40, EPASS = 1;
  localparam int RW = 12, RF = 8, SCW = 12, SCF = 8;
  localparam int N = NB * Z, M = MB * Z, K = Z / P;
  localparam int E = ldpc_pkg::n_edges(MB, NT1, D1, K);
  localparam int NFRAMES = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 in_valid, in_ready, u_valid, frame_done, syn_ok, erased;
  logic [P-1:0][RW-1:0] in_r;
  logic [P-1:0]         in_s;
  logic [SCW-1:0]       llr_scale;
  logic [2*P-1:0]       u_data;
  logic [31:0]          stalls, flips;

  ldpc_decoder #(.P(P), .Z(Z), .NB(NB), .MB(MB), .NT1(NT1), .D1(D1), .W(W), .F(F),
                 .TMAX(TMAX), .DELTA(DELTA), .EPASS(EPASS)) dut (.*);

  ldpc_ref #(.P(P), .Z(Z), .NB(NB), .MB(MB), .NT1(NT1), .D1(D1), .W(W), .F(F),
             .TMAX(TMAX), .DELTA(DELTA), .EPASS(EPASS), .RF(RF), .SCF(SCF)) ref_m;

  int checks = 0, failures = 0;
  int n_stall_frames = 0, n_fail_syn = 0, n_flip_frames = 0, n_clean = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
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

  bit  u[], s[], got[];
  int  rs[], llr[];

  initial begin
    real sigma;
    int  scale, t_last, t_done, lo, hi, st0, st1, nout;
    ref_m    = new();
    in_valid = 0;
    in_r     = '0;
    in_s     = '0;
    llr_scale = '0;
    u = new[N]; rs = new[N]; llr = new[N]; got = new[N];
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int fr = 0; fr < NFRAMES; fr++) begin
      sigma = (fr < 3) ? 0.0 : 0.45 + 0.03 * real'(fr % 12);
      scale = (fr < 3) ? 512 : int'(256.0 * 2.0 / (sigma * sigma));
      if (scale > 4095) scale = 4095;
      for (int n = 0; n < N; n++) begin
        real x;
        u[n]  = $urandom % 2;
        x     = (u[n] ? -1.0 : 1.0) + sigma * gauss();
        rs[n] = int'(x * 256.0);
        if (rs[n] > 2047) rs[n] = 2047;
        if (rs[n] < -2047) rs[n] = -2047;
        llr[n] = ref_m.quant(rs[n], scale);
      end
      ref_m.syndrome(u, s);
      ref_m.decode(llr, s);
      st0 = int'(stalls);
      llr_scale <= SCW'(scale);
      // send the frame
      for (int b = 0; b < N / P; b++) begin
        logic [P-1:0][RW-1:0] rv;
        logic [P-1:0]         sv;
        for (int i = 0; i < P; i++) begin
          rv[i] = RW'(rs[b * P + i]);
          sv[i] = (b * P + i < M) ? s[b * P + i] : 1'b0;
        end
        in_valid <= 1;
        in_r     <= rv;
        in_s     <= sv;
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      in_valid <= 0;
      t_last = cyc;
      // collect the output
      nout = 0;
      while (!frame_done) begin
        @(posedge clk);
        if (u_valid) begin
          for (int i = 0; i < 2 * P; i++) got[nout * 2 * P + i] = u_data[i];
          nout++;
        end
      end
      t_done = cyc;
      st1 = int'(stalls);
      check(nout == N / (2 * P), $sformatf("frame %0d: %0d output beats", fr, nout));
      begin
        int diff_ref, diff_u;
        diff_ref = 0; diff_u = 0;
        for (int n = 0; n < N; n++) begin
          if (got[n] != ref_m.u_hat[n]) diff_ref++;
          if (got[n] != u[n]) diff_u++;
        end
        check(diff_ref == 0, $sformatf("frame %0d: %0d bits differ from reference", fr, diff_ref));
        if (fr < 3) check(diff_u == 0, $sformatf("frame %0d: noiseless frame has %0d errors", fr, diff_u));
      end
      check(syn_ok == ref_m.syn_ok, $sformatf("frame %0d: syn_ok %0b ref %0b", fr, syn_ok, ref_m.syn_ok));
      check(erased == ref_m.erased, $sformatf("frame %0d: erased %0b ref %0b", fr, erased, ref_m.erased));
      if (ref_m.erased)
        check(int'(flips) == ref_m.flips, $sformatf("frame %0d: flips %0d ref %0d", fr, flips, ref_m.flips));
      lo = TMAX * E + N / (2 * P);
      hi = (TMAX + 1 + (erased ? EPASS : 0)) * E + (st1 - st0) + N / (2 * P) + 20 * (TMAX + 3);
      check(t_done - t_last >= lo && t_done - t_last <= hi,
            $sformatf("frame %0d: %0d cycles, expected %0d..%0d", fr, t_done - t_last, lo, hi));
      if (st1 > st0) n_stall_frames++;
      if (!syn_ok) n_fail_syn++;
      if (erased && flips > 0) n_flip_frames++;
      if (syn_ok) n_clean++;
      repeat (3) @(posedge clk);
    end
    $display("mechanisms: stall frames %0d, failed syndrome %0d, erase with flips %0d, clean %0d",
             n_stall_frames, n_fail_syn, n_flip_frames, n_clean);
    check(n_stall_frames > 0, "interlock stall never happened");
    check(n_fail_syn > 0, "syndrome failure never happened");
    check(n_flip_frames > 0, "erase flip never happened");
    check(n_clean > 0, "clean decode never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
