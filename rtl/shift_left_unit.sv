// shift_left_unit -- writes the updated messages L_qn' of one circulant back into the two RAM
// words they came from, without letting a late write-back cover a newer result.
//
// Inverse of the shift-right unit: Val_in = {top, L_qn', bottom} (3p elements) is shifted left
// by shift_num elements and the upper 2p elements are the {upper, lower} RAM words, sent to
// RAM_R/RAM_L (or RAM_L/RAM_R when swap is set).
// Because the pipeline reads a word again before the previous update of it has been written,
// the outer parts are chosen by the row-group step c of the layer (k = Z/p steps), as the
// paper's Appendix D lists:
//   c = 1      : Val_in = {L_qn_L,  L_qn^1',  L_qn_R}
//   1 < c < k  : Val_in = {L_qn_L,  L_qn^c',  L_qn^(c-1)'}
//   c = k      : Val_in = {L_qn^1', L_qn^k',  L_qn^(c-1)'}
// L_qn^1' and L_qn^(c-1)' are kept per circulant of the layer (pos) in two register files of
// DMAX entries; that storage is this design's choice. One cycle of latency: the inputs arrive
// with in_valid, the RAM writes leave registered on the next cycle.
// Only the top 2p values of the shifted 3p-value word are written back; lint reports the
// lowest p as unused, which is intended.
module shift_left_unit #(
  parameter int P    = ldpc_pkg::P_DEF,
  parameter int W    = ldpc_pkg::W_DEF,
  parameter int DMAX = ldpc_pkg::D1_DEF,
  parameter int AW   = 16,
  parameter int SW   = $clog2(P)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [P-1:0][W-1:0] lq_new,     // L_qn^c' from the total message unit / erase module
  input  logic [P-1:0][W-1:0] lq_l,       // from FIFO buffer_1
  input  logic [P-1:0][W-1:0] lq_r,       // from FIFO buffer_1
  input  logic [SW-1:0]       shift_num,
  input  logic                swap,
  input  logic                cfirst,
  input  logic                clast,
  input  logic [3:0]          pos,
  input  logic [AW-1:0]       addr_l,
  input  logic [AW-1:0]       addr_r,
  input  logic [7:0]          blk_in,
  output logic                wr_valid,
  output logic [AW-1:0]       wr_addr_l,
  output logic [AW-1:0]       wr_addr_r,
  output logic [P-1:0][W-1:0] wr_data_l,
  output logic [P-1:0][W-1:0] wr_data_r,
  output logic [7:0]          wr_blk
);
  logic [P-1:0][W-1:0] hist_first [DMAX];
  logic [P-1:0][W-1:0] hist_prev  [DMAX];

  logic [P-1:0][W-1:0]   top, bottom, lower, upper;
  logic [3*P-1:0][W-1:0] val_in, shifted;

  always_comb begin
    top     = clast  ? hist_first[pos] : lq_l;
    bottom  = cfirst ? lq_r            : hist_prev[pos];
    val_in  = {top, lq_new, bottom};
    shifted = val_in << (W * int'(shift_num));
    upper   = shifted[3*P-1:2*P];
    lower   = shifted[2*P-1:P];
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      hist_prev[pos] <= lq_new;
      if (cfirst) hist_first[pos] <= lq_new;
      wr_addr_l <= addr_l;
      wr_addr_r <= addr_r;
      wr_data_l <= swap ? upper : lower;
      wr_data_r <= swap ? lower : upper;
      wr_blk    <= blk_in;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wr_valid <= 1'b0;
    else        wr_valid <= in_valid;
  end
endmodule
