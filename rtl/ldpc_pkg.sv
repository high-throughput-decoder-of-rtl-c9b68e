// ldpc_pkg -- types, fixed-point helpers and the quasi-cyclic code description shared by
// every block of the layered QC-LDPC decoder.
//
// Fixed point: a message is a W-bit two's-complement number, 1 sign bit, I integer bits and
// F fraction bits (W = 1 + I + F). Values saturate symmetrically to +/-(2^(W-1)-1), so with
// W = 8 a message lies in [-127, 127] and with W = 10 in [-511, 511], as in the paper.
//
// Code description: the parity-check matrix H is a base matrix Hb of MB x NB entries, each
// entry either empty or a Z x Z identity matrix cyclically shifted right by alpha (row r of the
// block has its one in column (r + alpha) mod Z). The paper does not publish its matrices,
// only the degree distributions of its multi-edge-type (MET) ensembles. The base matrix used
// here is this design's own deterministic construction with the same edge structure:
//   * NT1 "type-1" layers of weight D1 that touch only the NCORE core columns,
//   * MB-NT1 "type-2" layers of weight 4: three core columns plus one degree-1 column of
//     their own (the degree-1 part of the MET ensemble),
//   * NCORE = NB - (MB - NT1) core columns.
// Type-2 layer i uses core columns (3i), (3i+1), (3i+2) mod NCORE, so two consecutive type-2
// layers never share a column, which keeps the pipelined schedule free of read/write stalls
// there. Shift values are a fixed hash of (layer, column) reduced mod Z.
package ldpc_pkg;

  // ---------------------------------------------------------------- defaults (rate 0.2 code)
  localparam int P_DEF      = 100;    // parallelism p (Table 2)
  localparam int Z_DEF      = 800;    // circulant size; own choice (Z/p = 8, even)
  localparam int N_DEF      = 80000;  // code length (Fig. 3)
  localparam int MB_DEF     = 80;     // layers = N(1-R)/Z for R = 0.2
  localparam int NT1_DEF    = 5;      // type-1 layers (x1^12, x1^11 checks of Table 4)
  localparam int D1_DEF     = 12;     // weight of a type-1 layer
  localparam int W_DEF      = 8;      // fixed-point width (Sec. III-D)
  localparam int F_DEF      = 3;      // fraction bits (Sec. III-D)
  localparam int TMAX_DEF   = 13;     // maximum iterations (Sec. III-D)
  localparam int DELTA_DEF  = 40;     // reliability threshold (Sec. III-D)

  // Decoder operating mode of one pass over the schedule.
  typedef enum logic [1:0] {
    MODE_DECODE = 2'd0,   // layered BP iteration (Eqs. 2-4)
    MODE_DECIDE = 2'd1,   // hard decision and syndrome comparison (Eq. 5), no write-back
    MODE_ERASE  = 2'd2    // residue error-bits erase pass, writes corrected values back
  } mode_e;

  // One entry of the address ROM: everything the datapath needs for one clock cycle of a
  // layer, i.e. p rows of one row group against one circulant of that layer.
  typedef struct packed {
    logic [15:0] addr_l;  // RAM_L word address
    logic [15:0] addr_r;  // RAM_R word address
    logic        swap;    // lower word of the 2p window sits in RAM_R (odd word index)
    logic [7:0]  shift;   // offset of the p-value window inside the lower word (alpha mod p)
    logic [7:0]  blk;     // base-matrix column of the circulant
    logic [3:0]  pos;     // position of the circulant inside its layer
    logic [7:0]  layer;   // base-matrix row
    logic        cfirst;  // first row group of the layer (c = 1)
    logic        clast;   // last row group of the layer (c = k)
    logic        glast;   // last circulant of this row group
    logic [15:0] group;   // row-group index = layer*k + c - 1, also the Syn_RAM address
  } sched_t;

  // ---------------------------------------------------------------- code construction
  function automatic int row_weight(int l, int nt1, int d1);
    return (l < nt1) ? d1 : 4;
  endfunction

  function automatic int n_core(int nb, int mb, int nt1);
    return nb - (mb - nt1);
  endfunction

  // Column of the j-th circulant of layer l.
  function automatic int base_col(int l, int j, int nb, int mb, int nt1, int d1);
    int nc;
    nc = n_core(nb, mb, nt1);
    if (l < nt1)      return (l * d1 + j) % nc;
    else if (j < 3)   return (3 * (l - nt1) + j) % nc;
    else              return nc + (l - nt1);
  endfunction

  // Shift value alpha of the j-th circulant of layer l.
  function automatic int base_shift(int l, int j, int nb, int mb, int nt1, int d1, int z);
    int c;
    c = base_col(l, j, nb, mb, nt1, d1);
    return (l * 37 + c * 53 + l * c * 11 + 5) % z;
  endfunction

  // Number of schedule entries (clock cycles of reading) per iteration.
  function automatic int n_edges(int mb, int nt1, int d1, int k);
    return (nt1 * d1 + (mb - nt1) * 4) * k;
  endfunction

  // ---------------------------------------------------------------- fixed point
  // Phi(x) = -ln(tanh(x/2)) = ln((1+e^-x)/(1-e^-x)) on magnitude codes of W-1 bits with F
  // fraction bits, rounded to nearest and saturated. Phi(0) is infinite; it is evaluated at
  // half an LSB instead, so the largest check message stays well inside the message range.
  // (Saturating it to the largest code lets L_rmn equal a saturated L_qn, and L_qn - L_rmn
  // then loses all information in the next iteration.)
  function automatic int phi_code(int code, int w, int f);
    real x, v;
    int  q, mx;
    mx = 2 ** (w - 1) - 1;
    if (code <= 0) x = 0.5 / real'(2 ** f);
    else           x = real'(code) / real'(2 ** f);
    v = $ln((1.0 + $exp(-x)) / (1.0 - $exp(-x)));
    q = int'(v * real'(2 ** f));
    if (q > mx) q = mx;
    if (q < 0)  q = 0;
    return q;
  endfunction

endpackage
