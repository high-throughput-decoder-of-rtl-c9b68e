// ldpc_top -- the complete decoder device: NUM_DEC independent layered QC-LDPC decoders side by
// side, each with its own frame input and decided-bit output.
//
// Each decoder takes one frame at a time, so the device throughput is NUM_DEC times that of
// one decoder; the paper instantiates two decoders on one FPGA because the reduced message
// width leaves enough block RAM for both. How frames are distributed to the decoders is left
// to the system around it (each decoder has its own valid/ready input); the ports are arrays
// indexed by decoder. All parameters pass through to every decoder (see ldpc_decoder).
// Defaults: the rate-0.2 code of length 80000 with p = 100, 8-bit messages, 13 iterations,
// DELTA = 40, two decoders.
module ldpc_top #(
  parameter int NUM_DEC = 2,
  parameter int P       = ldpc_pkg::P_DEF,
  parameter int Z       = ldpc_pkg::Z_DEF,
  parameter int NB      = ldpc_pkg::N_DEF / ldpc_pkg::Z_DEF,
  parameter int MB      = ldpc_pkg::MB_DEF,
  parameter int NT1     = ldpc_pkg::NT1_DEF,
  parameter int D1      = ldpc_pkg::D1_DEF,
  parameter int W       = ldpc_pkg::W_DEF,
  parameter int F       = ldpc_pkg::F_DEF,
  parameter int TMAX    = ldpc_pkg::TMAX_DEF,
  parameter int DELTA   = ldpc_pkg::DELTA_DEF,
  parameter int EPASS   = 1,
  parameter int RW      = 12,
  parameter int SCW     = 12
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic [NUM_DEC-1:0]                  in_valid,
  output logic [NUM_DEC-1:0]                  in_ready,
  input  logic [NUM_DEC-1:0][P-1:0][RW-1:0]   in_r,
  input  logic [NUM_DEC-1:0][P-1:0]           in_s,
  input  logic [SCW-1:0]                      llr_scale,
  output logic [NUM_DEC-1:0]                  u_valid,
  output logic [NUM_DEC-1:0][2*P-1:0]         u_data,
  output logic [NUM_DEC-1:0]                  frame_done,
  output logic [NUM_DEC-1:0]                  syn_ok,
  output logic [NUM_DEC-1:0]                  erased,
  output logic [NUM_DEC-1:0][31:0]            stalls,
  output logic [NUM_DEC-1:0][31:0]            flips
);
  for (genvar d = 0; d < NUM_DEC; d++) begin : g_dec
    ldpc_decoder #(
      .P(P), .Z(Z), .NB(NB), .MB(MB), .NT1(NT1), .D1(D1), .W(W), .F(F),
      .TMAX(TMAX), .DELTA(DELTA), .EPASS(EPASS), .RW(RW), .SCW(SCW)
    ) u_dec (
      .clk, .rst_n,
      .in_valid(in_valid[d]), .in_ready(in_ready[d]), .in_r(in_r[d]), .in_s(in_s[d]),
      .llr_scale,
      .u_valid(u_valid[d]), .u_data(u_data[d]), .frame_done(frame_done[d]),
      .syn_ok(syn_ok[d]), .erased(erased[d]), .stalls(stalls[d]), .flips(flips[d])
    );
  end
endmodule
