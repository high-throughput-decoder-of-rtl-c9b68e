// ldpc_ref_pkg -- software reference of the decoder for the testbenches.
//
// ldpc_ref is a plain, loop-by-loop model written from the equations, not from the RTL: it
// walks H row by row in layer order, applies Eqs. (2)-(4) with the same W-bit saturating
// fixed point and the same rounded Phi table, then the hard decision and syndrome test of
// Eq. (5) and, if the syndrome fails, EPASS erase passes (a suspicious symbol, |L| < DELTA,
// alone in a failing row flips to reliability DELTA). Rows of one layer touch disjoint
// columns, so any order inside a layer gives the same result, and the pipelined RTL must
// match this model bit for bit. It also builds frames: syndrome s = u H^T and the received
// word quantised the way the receiving unit does (R * scale, rounded, saturated).
package ldpc_ref_pkg;

  class ldpc_ref #(int P = 4, int Z = 8, int NB = 12, int MB = 7, int NT1 = 1, int D1 = 6,
                   int W = 8, int F = 3, int TMAX = 4, int DELTA = 40, int EPASS = 1,
                   int RF = 8, int SCF = 8);
    localparam int N  = NB * Z;
    localparam int M  = MB * Z;
    localparam int MX = 2 ** (W - 1) - 1;

    int  phi_t[];
    int  lq[];          // total messages
    int  lr[][];        // check messages per (row, edge)
    bit  u_hat[];
    bit  syn_ok, erased;
    int  flips;

    function new();
      phi_t = new[2 ** (W - 1)];
      for (int i = 0; i < 2 ** (W - 1); i++) phi_t[i] = ldpc_pkg::phi_code(i, W, F);
      lq = new[N];
      lr = new[M];
      u_hat = new[N];
    endfunction

    static function int sat(int v);
      if (v > MX) return MX;
      if (v < -MX) return -MX;
      return v;
    endfunction

    static function int absv(int v);
      return v < 0 ? -v : v;
    endfunction

    function int row_deg(int l);
      return ldpc_pkg::row_weight(l, NT1, D1);
    endfunction

    // column of edge j of row r (r = l*Z + i)
    function int col_of(int r, int j);
      int l, i, b, a;
      l = r / Z;
      i = r % Z;
      b = ldpc_pkg::base_col(l, j, NB, MB, NT1, D1);
      a = ldpc_pkg::base_shift(l, j, NB, MB, NT1, D1, Z);
      return b * Z + (i + a) % Z;
    endfunction

    function void syndrome(input bit u[], output bit s[]);
      s = new[M];
      for (int r = 0; r < M; r++) begin
        s[r] = 0;
        for (int j = 0; j < row_deg(r / Z); j++) s[r] ^= u[col_of(r, j)];
      end
    endfunction

    static function int quant(int r_sample, int scale);
      longint prod;
      int sh;
      sh   = RF + SCF - F;
      prod = longint'(r_sample) * longint'(scale);
      prod = (prod + (longint'(1) << (sh - 1))) >>> sh;
      if (prod > MX) return MX;
      if (prod < -MX) return -MX;
      return int'(prod);
    endfunction

    function bit check_syn(input bit s[]);
      for (int r = 0; r < M; r++) begin
        bit par;
        par = s[r];
        for (int j = 0; j < row_deg(r / Z); j++) par ^= (lq[col_of(r, j)] < 0);
        if (par) return 0;
      end
      return 1;
    endfunction

    function void decode(input int llr[], input bit s[]);
      for (int n = 0; n < N; n++) lq[n] = llr[n];
      for (int r = 0; r < M; r++) begin
        lr[r] = new[row_deg(r / Z)];
        foreach (lr[r][j]) lr[r][j] = 0;
      end
      for (int t = 0; t < TMAX; t++) begin
        for (int r = 0; r < M; r++) begin
          int d, tot, sg;
          int q[];
          d   = row_deg(r / Z);
          q   = new[d];
          tot = 0;
          sg  = s[r];
          for (int j = 0; j < d; j++) begin
            q[j] = sat(lq[col_of(r, j)] - lr[r][j]);
            tot += phi_t[absv(q[j])];
            sg  ^= (q[j] < 0);
          end
          for (int j = 0; j < d; j++) begin
            int rest, m, nl;
            rest = tot - phi_t[absv(q[j])];
            if (rest > MX) rest = MX;
            m  = phi_t[rest];
            nl = (sg ^ (q[j] < 0)) ? -m : m;
            lr[r][j] = nl;
            lq[col_of(r, j)] = sat(q[j] + nl);
          end
        end
      end
      syn_ok = check_syn(s);
      erased = 0;
      flips  = 0;
      if (!syn_ok) begin
        erased = (EPASS > 0);
        for (int e = 0; e < EPASS; e++) begin
          for (int r = 0; r < M; r++) begin
            int d, cnt;
            bit par;
            d   = row_deg(r / Z);
            cnt = 0;
            par = s[r];
            for (int j = 0; j < d; j++) begin
              if (absv(lq[col_of(r, j)]) < DELTA) cnt++;
              par ^= (lq[col_of(r, j)] < 0);
            end
            if (cnt == 1 && par) begin
              for (int j = 0; j < d; j++) begin
                int n;
                n = col_of(r, j);
                if (absv(lq[n]) < DELTA) begin
                  lq[n] = (lq[n] < 0) ? DELTA : -DELTA;
                  flips++;
                end
              end
            end
          end
        end
      end
      for (int n = 0; n < N; n++) u_hat[n] = (lq[n] < 0);
    endfunction
  endclass

  // Gaussian sample, Box-Muller on $urandom
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    u2 = real'($urandom % 1000000) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

endpackage
