// rx_unit -- receiving unit: takes one frame from the channel and stores it for decoding.
//
// A frame arrives as N/p beats of p channel samples R_n in natural column order (beat j holds
// columns j*p .. j*p+p-1, lane i = column j*p+i); the first M/p beats also carry p bits of the
// syndrome s (rows in natural order). Each sample becomes the initial message of Eq. (1),
// L_qn^(0,0) = 2 R_n / sigma^2, as R_n times llr_scale (the value 2/sigma^2, SCF fraction
// bits), rounded and saturated to the decoder's W-bit format. Beat j is written to RAM_L
// (j even) or RAM_R (j odd) at address j/2, which is the paper's variable RAM layout, and the
// syndrome word of beat j to Syn_RAM address j. finish_storing pulses after the last beat.
// Handshake: in_ready = enable (set by the controller while it waits for a frame) and not
// yet a whole frame taken; a beat is taken when in_valid && in_ready. After the last beat
// in_ready stays low until the controller has left its receiving state, so a sender that offers
// the next frame at once is held off for the whole decode. RAM writes leave registered, one cycle after the beat.
// The sample format (RW bits, RF fraction bits) and the scale input are this design's choice.
module rx_unit #(
  parameter int P   = ldpc_pkg::P_DEF,
  parameter int W   = ldpc_pkg::W_DEF,
  parameter int F   = ldpc_pkg::F_DEF,
  parameter int NW  = ldpc_pkg::N_DEF / ldpc_pkg::P_DEF,                       // words of R
  parameter int SG  = (ldpc_pkg::MB_DEF * ldpc_pkg::Z_DEF) / ldpc_pkg::P_DEF,  // words of s
  parameter int RW  = 12,
  parameter int RF  = 8,
  parameter int SCW = 12,
  parameter int SCF = 8,
  parameter int AW  = $clog2(NW / 2),
  parameter int SAW = $clog2(SG)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 enable,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [P-1:0][RW-1:0] in_r,
  input  logic [P-1:0]         in_s,
  input  logic [SCW-1:0]       llr_scale,
  output logic                 wr_en_l,
  output logic                 wr_en_r,
  output logic [AW-1:0]        wr_addr,
  output logic [P-1:0][W-1:0]  wr_data,
  output logic                 syn_we,
  output logic [SAW-1:0]       syn_addr,
  output logic [P-1:0]         syn_data,
  output logic                 finish_storing
);
  localparam int SH = RF + SCF - F;         // product fraction bits down to F
  localparam int PW = RW + SCW + 1;
  localparam int MX = 2 ** (W - 1) - 1;

  logic [$clog2(NW)-1:0] beat;
  logic                  take, full;
  logic [P-1:0][W-1:0]   llr;

  assign in_ready = enable && !full;
  assign take     = in_valid && in_ready;

  always_comb begin
    for (int i = 0; i < P; i++) begin
      logic signed [PW-1:0] prod, rnd;
      prod = $signed(in_r[i]) * $signed({1'b0, llr_scale});
      rnd  = (prod + (PW'(1) <<< (SH - 1))) >>> SH;
      if (rnd > PW'(MX))       llr[i] = W'(MX);
      else if (rnd < -PW'(MX)) llr[i] = W'(-MX);
      else                     llr[i] = rnd[W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat           <= '0;
      full           <= 1'b0;
      wr_en_l        <= 1'b0;
      wr_en_r        <= 1'b0;
      syn_we         <= 1'b0;
      finish_storing <= 1'b0;
      wr_addr        <= '0;
      wr_data        <= '0;
      syn_addr       <= '0;
      syn_data       <= '0;
    end else begin
      wr_en_l        <= take && !beat[0];
      wr_en_r        <= take &&  beat[0];
      syn_we         <= take && (int'(beat) < SG);
      finish_storing <= take && (int'(beat) == NW - 1);
      if (take && int'(beat) == NW - 1) full <= 1'b1;
      else if (!enable)                 full <= 1'b0;
      if (take) begin
        wr_addr  <= AW'(beat >> 1);
        wr_data  <= llr;
        syn_addr <= SAW'(beat);
        syn_data <= in_s;
        beat     <= (int'(beat) == NW - 1) ? '0 : beat + 1'b1;
      end
    end
  end
endmodule
