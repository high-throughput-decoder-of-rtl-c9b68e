// shift_right_unit -- picks the p messages one circulant needs out of the 2p read from
// RAM_L and RAM_R.
//
// The two words read in a cycle are two cyclically neighbouring words of one circulant block:
// a lower word and the word above it. They are concatenated as Val_in = {upper, lower}
// (element 0 = lowest column), p zero elements are appended below, and the 3p-element vector
// is shifted right by shift_num elements. The top p elements are L_qn_L, the middle p are
// L_qn (the window the check rows need this cycle) and the bottom p are L_qn_R; the two outer
// parts travel in FIFO buffer_1 so that the shift-left unit can rebuild both RAM words. This
// is exactly the paper's shift-right figure (p = 2: {4,3,2,1} -> {0,4 | 3,2 | 1,0}).
// The paper's example has the lower word in RAM_L; when the window starts in an odd word the
// lower word is in RAM_R, and the swap input (this design's addition) exchanges the two.
// Purely combinational.
module shift_right_unit #(
  parameter int P  = ldpc_pkg::P_DEF,
  parameter int W  = ldpc_pkg::W_DEF,
  parameter int SW = $clog2(P)
) (
  input  logic [P-1:0][W-1:0] ram_l,
  input  logic [P-1:0][W-1:0] ram_r,
  input  logic                swap,
  input  logic [SW-1:0]       shift_num,
  output logic [P-1:0][W-1:0] lq,
  output logic [P-1:0][W-1:0] lq_l,
  output logic [P-1:0][W-1:0] lq_r
);
  logic [2*P-1:0][W-1:0] val_in;
  logic [3*P-1:0][W-1:0] ext, shifted;

  always_comb begin
    val_in  = swap ? {ram_l, ram_r} : {ram_r, ram_l};
    ext     = {val_in, {(P*W){1'b0}}};
    shifted = ext >> (W * int'(shift_num));
    lq_l    = shifted[3*P-1:2*P];
    lq      = shifted[2*P-1:P];
    lq_r    = shifted[P-1:0];
  end
endmodule
