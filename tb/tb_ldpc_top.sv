// tb_ldpc_top -- end-to-end test of the two-decoder top on a small code.
//
// Code: p = 4, Z = 8 (k = 2), 12 x 7 base matrix with one type-1 layer of weight 6 (N = 96,
// M = 56, E = 60 cycles per iteration), TMAX = 4. Both decoders run at the same time on
// independent frames: random words u, syndrome s = u H^T, channel samples
// R = (1 - 2u) + sigma * noise with sigma swept over 0.45..0.78, quantised to 12 bits and
// scaled by 2/0.6^2 through the scale input, which both decoders share (a fixed scale keeps it
// valid for whichever decoder is receiving). Decoder 0 offers its next frame as soon as the
// previous one has been sent, so its input is held off (in_ready low) for the whole decode;
// decoder 1 waits a few cycles after each frame_done. Every frame's decided bits, syn_ok,
// erased and erase flip count are compared with the reference model (tb/ldpc_ref_pkg), the
// number of output beats must be N/(2p), and the time from the last accepted input beat to
// frame_done must lie between TMAX*E and (TMAX + 1 + erase passes)*E plus stalls, the output
// cycles and a small overhead. The test counts each mechanism of the design and fails if one
// never happened: read/write interlock stall, input back-pressure, failed syndrome check
// (which switches the decoder into the erase mode), erase with flipped bits, clean decode.
// Both sides of every handshake are sampled at the falling clock edge.
// The two-decoder arrangement follows the paper; the code, the Phi quantisation and the
// erase rule are this design's choices and the reference model shares them.
`timescale 1ns/1ps
module tb_ldpc_top;
  import ldpc_ref_pkg::*;

  localparam int ND = 2;
  localparam int P = 4, Z = 8, NB = 12, MB = 7, NT1 = 1, D1 = 6;
  localparam int W = 8, F = 3, TMAX = 4, DELTA = 40, EPASS = 1;
  localparam int RW = 12, RF = 8, SCW = 12, SCF = 8;
  localparam int N = NB * Z, M = MB * Z, K = Z / P, NBEAT = N / P, NOUT = N / (2 * P);
  localparam int E = ldpc_pkg::n_edges(MB, NT1, D1, K);
  localparam int NFRAMES = 24;   // per decoder

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [ND-1:0]                in_valid = '0, in_ready, u_valid, frame_done, syn_ok, erased;
  logic [ND-1:0][P-1:0][RW-1:0] in_r = '0;
  logic [ND-1:0][P-1:0]         in_s = '0;
  logic [SCW-1:0]               llr_scale = '0;
  logic [ND-1:0][2*P-1:0]       u_data;
  logic [ND-1:0][31:0]          stalls, flips;

  ldpc_top #(.NUM_DEC(ND), .P(P), .Z(Z), .NB(NB), .MB(MB), .NT1(NT1), .D1(D1), .W(W), .F(F),
             .TMAX(TMAX), .DELTA(DELTA), .EPASS(EPASS)) dut (.*);

  ldpc_ref #(.P(P), .Z(Z), .NB(NB), .MB(MB), .NT1(NT1), .D1(D1), .W(W), .F(F),
             .TMAX(TMAX), .DELTA(DELTA), .EPASS(EPASS), .RF(RF), .SCF(SCF)) ref_m;

  int checks = 0, failures = 0;
  int n_stall = 0, n_bp = 0, n_fail_syn = 0, n_flip = 0, n_clean = 0;
  int cyc = 0;

  // per-decoder frame state
  int  rs_q [ND][N];
  bit  s_q  [ND][N];
  bit  u_q  [ND][N];
  bit  uh_q [ND][N];   // expected decision of the frame being decoded
  bit  ph_q [ND][N];   // expected decision of the frame being sent
  bit  got  [ND][N];
  bit  ex_syn [ND], ex_er [ND], pe_syn [ND], pe_er [ND];
  int  ex_fl [ND], pe_fl [ND], started [ND];
  int  beat [ND], nout [ND], frames [ND], t_last [ND], st0 [ND], wait_c [ND];
  bit  sending [ND], rdy_prev [ND];
  localparam int SCALE = 1422;   // 256 * 2 / 0.6^2

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

  // Draws frame number fr for decoder d and runs the reference on it.
  task automatic new_frame(int d, int fr);
    real sigma, x;
    bit  u[], s[];
    int  llr[];
    sigma = 0.45 + 0.03 * real'(fr % 12);
    u = new[N]; llr = new[N];
    for (int n = 0; n < N; n++) begin
      u[n] = $urandom % 2;
      x    = (u[n] ? -1.0 : 1.0) + sigma * gauss();
      rs_q[d][n] = int'(x * 256.0);
      if (rs_q[d][n] > 2047) rs_q[d][n] = 2047;
      if (rs_q[d][n] < -2047) rs_q[d][n] = -2047;
      llr[n] = ref_m.quant(rs_q[d][n], SCALE);
      u_q[d][n] = u[n];
    end
    ref_m.syndrome(u, s);
    ref_m.decode(llr, s);
    for (int n = 0; n < N; n++) begin
      s_q[d][n]  = s[n];
      ph_q[d][n] = ref_m.u_hat[n];
    end
    pe_syn[d] = ref_m.syn_ok;
    pe_er[d]  = ref_m.erased;
    pe_fl[d]  = ref_m.flips;
    beat[d] = 0;
    sending[d] = 1;
    started[d]++;
  endtask

  task automatic finish_frame(int d);
    int dr, lo, hi, st1;
    dr = 0;
    for (int n = 0; n < N; n++) if (got[d][n] != uh_q[d][n]) dr++;
    st1 = int'(stalls[d]);
    check(nout[d] == NOUT, $sformatf("dec %0d frame %0d: %0d output beats", d, frames[d], nout[d]));
    check(dr == 0, $sformatf("dec %0d frame %0d: %0d bits differ from reference", d, frames[d], dr));
    check(syn_ok[d] == ex_syn[d], $sformatf("dec %0d frame %0d: syn_ok %0b, reference %0b", d,
                                            frames[d], syn_ok[d], ex_syn[d]));
    check(erased[d] == ex_er[d], $sformatf("dec %0d frame %0d: erased %0b, reference %0b", d,
                                           frames[d], erased[d], ex_er[d]));
    if (ex_er[d])
      check(int'(flips[d]) == ex_fl[d], $sformatf("dec %0d frame %0d: flips %0d, reference %0d",
                                                  d, frames[d], flips[d], ex_fl[d]));
    lo = TMAX * E + NOUT;
    hi = (TMAX + 1 + (erased[d] ? EPASS : 0)) * E + (st1 - st0[d]) + NOUT + 20 * (TMAX + 3);
    check(cyc - t_last[d] >= lo && cyc - t_last[d] <= hi,
          $sformatf("dec %0d frame %0d: %0d cycles, expected %0d..%0d", d, frames[d],
                    cyc - t_last[d], lo, hi));
    if (st1 > st0[d]) n_stall++;
    if (!syn_ok[d]) n_fail_syn++;
    if (erased[d] && flips[d] > 0) n_flip++;
    if (syn_ok[d]) n_clean++;
    frames[d]++;
  endtask

  initial begin
    ref_m = new();
    for (int d = 0; d < ND; d++) begin
      frames[d] = 0; nout[d] = 0; wait_c[d] = 0; rdy_prev[d] = 0; sending[d] = 0;
      st0[d] = 0; started[d] = 0;
    end
    repeat (5) @(posedge clk);
    rst_n <= 1;
    new_frame(0, 0);
    new_frame(1, 1);
    llr_scale <= SCW'(SCALE);
    while (frames[0] < NFRAMES || frames[1] < NFRAMES) begin
      logic [ND-1:0][P-1:0][RW-1:0] rv;
      logic [ND-1:0][P-1:0]         sv;
      logic [ND-1:0]                vv;
      @(negedge clk);
      cyc++;
      rv = in_r; sv = in_s; vv = '0;
      for (int d = 0; d < ND; d++) begin
        // handshake of the previous rising edge
        if (in_valid[d] && rdy_prev[d]) begin
          beat[d]++;
          if (beat[d] == NBEAT) begin
            sending[d] = 0;
            t_last[d]  = cyc - 1;
            st0[d]     = int'(stalls[d]);
            nout[d]    = 0;
            ex_syn[d]  = pe_syn[d];
            ex_er[d]   = pe_er[d];
            ex_fl[d]   = pe_fl[d];
            for (int n = 0; n < N; n++) uh_q[d][n] = ph_q[d][n];
            if (d == 0 && started[0] < NFRAMES) new_frame(0, 2 * started[0]);
          end
        end
        if (in_valid[d] && !in_ready[d]) n_bp++;
        // output side
        if (u_valid[d]) begin
          for (int i = 0; i < 2 * P; i++) got[d][nout[d] * 2 * P + i] = u_data[d][i];
          nout[d]++;
        end
        if (frame_done[d]) begin
          finish_frame(d);
          wait_c[d] = (d == 0) ? 0 : 3;
        end
        // next frame: decoder 0 right after its input is sent (above), decoder 1 after frame_done
        if (d == 1 && frame_done[d] && started[1] < NFRAMES) new_frame(1, 2 * started[1] + 1);
        if (sending[d] && wait_c[d] > 0) wait_c[d]--;
        else if (sending[d]) begin
          vv[d] = 1'b1;
          for (int i = 0; i < P; i++) begin
            rv[d][i] = RW'(rs_q[d][beat[d] * P + i]);
            sv[d][i] = (beat[d] * P + i < M) ? s_q[d][beat[d] * P + i] : 1'b0;
          end
        end
        rdy_prev[d] = in_ready[d];
      end
      in_valid  <= vv;
      in_r      <= rv;
      in_s      <= sv;
    end
    $display("mechanisms: stall frames %0d, back-pressure cycles %0d, failed syndrome %0d, erase with flips %0d, clean %0d",
             n_stall, n_bp, n_fail_syn, n_flip, n_clean);
    check(n_stall > 0, "interlock stall never happened");
    check(n_bp > 0, "input back-pressure never happened");
    check(n_fail_syn > 0, "syndrome failure (erase mode) never happened");
    check(n_flip > 0, "erase flip never happened");
    check(n_clean > 0, "clean decode never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
