// syn_ram -- Syn_RAM, the store of the syndrome s received with each frame.
//
// One p-bit word per row group (rows g*p .. g*p+p-1, bit i = row g*p+i). True dual port, as in
// the paper: port A is written by the receiving unit and read by the check node unit and the
// erase module, port B is read by the decode decision unit, so both users see s without a
// second copy. Both ports read synchronously (data one cycle after the address). The paper
// gives this RAM the depth of the check message RAM; here it holds one word per row group
// (M/p words), which is all the datapath addresses.
module syn_ram #(
  parameter int P     = ldpc_pkg::P_DEF,
  parameter int DEPTH = (ldpc_pkg::MB_DEF * ldpc_pkg::Z_DEF) / ldpc_pkg::P_DEF,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [P-1:0]  a_wdata,
  output logic [P-1:0]  a_rdata,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [P-1:0]  b_wdata,
  output logic [P-1:0]  b_rdata
);
  logic [P-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_we) mem[a_addr] <= a_wdata;
    a_rdata <= mem[a_addr];
  end
  always_ff @(posedge clk) begin
    if (b_we) mem[b_addr] <= b_wdata;
    b_rdata <= mem[b_addr];
  end
endmodule
