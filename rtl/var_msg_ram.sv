// var_msg_ram -- variable message storage RAM holding the total messages L_qn.
//
// Two banks, RAM_L and RAM_R, each DEPTH = N/(2p) words of p messages. Word j of the code
// (columns j*p .. j*p+p-1, lane i = column j*p+i) lives in RAM_L at address j/2 when j is even
// and in RAM_R at address j/2 when j is odd, so a circulant of Z = k*p columns alternates
// between the banks and any two neighbouring words of it (cyclically) can be read in one cycle,
// one from each bank. This is the arrangement of the paper's memory-layout figure.
// Each bank has one synchronous read port (data one cycle after the address) and one write
// port; the bank addresses are independent. Reading an address in the cycle it is written
// returns the old word. Nothing is initialised: the receiving unit fills every word first.
module var_msg_ram #(
  parameter int P     = ldpc_pkg::P_DEF,
  parameter int W     = ldpc_pkg::W_DEF,
  parameter int DEPTH = ldpc_pkg::N_DEF / (2 * ldpc_pkg::P_DEF),
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic                  clk,
  // read port
  input  logic [AW-1:0]         rd_addr_l,
  input  logic [AW-1:0]         rd_addr_r,
  output logic [P-1:0][W-1:0]   rd_data_l,
  output logic [P-1:0][W-1:0]   rd_data_r,
  // write port
  input  logic                  wr_en_l,
  input  logic [AW-1:0]         wr_addr_l,
  input  logic [P-1:0][W-1:0]   wr_data_l,
  input  logic                  wr_en_r,
  input  logic [AW-1:0]         wr_addr_r,
  input  logic [P-1:0][W-1:0]   wr_data_r
);
  logic [P-1:0][W-1:0] ram_l [DEPTH];
  logic [P-1:0][W-1:0] ram_r [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en_l) ram_l[wr_addr_l] <= wr_data_l;
    if (wr_en_r) ram_r[wr_addr_r] <= wr_data_r;
    rd_data_l <= ram_l[rd_addr_l];
    rd_data_r <= ram_r[rd_addr_r];
  end
endmodule
