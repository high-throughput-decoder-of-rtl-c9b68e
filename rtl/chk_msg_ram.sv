// chk_msg_ram -- check message storage RAM holding the check-to-variable messages L_rmn.
//
// One word of p messages per schedule entry (one circulant of one row group), DEPTH =
// number of schedule entries per iteration. The decoder reads it in schedule order with a
// plain counter and writes each new word back to the address it was read from, so it has the
// same word layout as RAM_L but its own depth. Simple dual port, synchronous read (data one
// cycle after the address), read-before-write on an address collision. Not initialised: the
// first iteration ignores the read data (L_rmn = 0 for t = 1).
module chk_msg_ram #(
  parameter int P     = ldpc_pkg::P_DEF,
  parameter int W     = ldpc_pkg::W_DEF,
  parameter int DEPTH = ldpc_pkg::n_edges(ldpc_pkg::MB_DEF, ldpc_pkg::NT1_DEF, ldpc_pkg::D1_DEF,
                                          ldpc_pkg::Z_DEF / ldpc_pkg::P_DEF),
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic [AW-1:0]       rd_addr,
  output logic [P-1:0][W-1:0] rd_data,
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_addr,
  input  logic [P-1:0][W-1:0] wr_data
);
  logic [P-1:0][W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
