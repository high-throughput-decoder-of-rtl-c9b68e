// gcu -- global controller unit: runs the decoding of one frame after another.
//
// Phases, in order:
//   RECV   : the receiving unit is enabled until it reports finish_storing.
//   DECODE : start the Addr_gen unit for TMAX layered-BP iterations; stop is raised while the
//            last iteration runs (Iter_num = TMAX-1) so it halts at the end of that pass.
//   DECIDE : one decide pass: the decode decision unit compares s_hat with s.
//   ERASE  : only if they differ, EPASS erase passes of the residue error-bits erase module.
//   OUTPUT : the decided bits are read out of the variable RAM in natural column order, two
//            RAM words (2p bits) per cycle, N/(2p) cycles.
// Each pass phase waits until the Addr_gen unit is idle and the pipeline has drained
// (pipe_idle) before the next one starts, so no pass sees the writes of the previous one
// late. The paper names start, stop, Iter_num and finish_storing and says the controller
// "deals with the whole procedure"; the phase sequence is its Sec. III text, the exact FSM and
// the draining between phases are this design's. frame_done pulses when the last output word
// has been read; syn_ok and erased report the result of the decide pass.
module gcu #(
  parameter int TMAX  = ldpc_pkg::TMAX_DEF,
  parameter int EPASS = 1,
  parameter int NOUT  = ldpc_pkg::N_DEF / (2 * ldpc_pkg::P_DEF),
  parameter int AW    = $clog2(NOUT)
) (
  input  logic              clk,
  input  logic              rst_n,
  // receiving unit
  output logic              rx_enable,
  input  logic              finish_storing,
  // Addr_gen unit
  output logic              start,
  output logic              stop,
  output ldpc_pkg::mode_e   mode,
  input  logic [7:0]        iter_num,
  input  logic              ag_busy,
  input  logic              pipe_idle,
  // decode decision unit
  output logic              dec_clear,
  input  logic              mismatch,
  // output phase
  output logic              out_rd,
  output logic [AW-1:0]     out_addr,
  output logic              out_phase,
  output logic              frame_done,
  output logic              syn_ok,
  output logic              erased
);
  import ldpc_pkg::*;

  typedef enum logic [2:0] {S_RECV, S_DECODE, S_DECIDE, S_ERASE, S_OUT} state_e;
  state_e     state;
  logic [7:0] target;
  logic       drained;

  assign rx_enable = (state == S_RECV);
  assign stop      = (iter_num == target - 8'd1);
  assign drained   = !ag_busy && pipe_idle && !start;
  assign out_phase = (state == S_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_RECV;
      start      <= 1'b0;
      mode       <= MODE_DECODE;
      target     <= 8'd1;
      dec_clear  <= 1'b0;
      out_rd     <= 1'b0;
      out_addr   <= '0;
      frame_done <= 1'b0;
      syn_ok     <= 1'b0;
      erased     <= 1'b0;
    end else begin
      start      <= 1'b0;
      dec_clear  <= 1'b0;
      out_rd     <= 1'b0;
      frame_done <= 1'b0;
      case (state)
        S_RECV: if (finish_storing) begin
          state  <= S_DECODE;
          mode   <= MODE_DECODE;
          target <= 8'(TMAX);
          start  <= 1'b1;
          erased <= 1'b0;
        end
        S_DECODE: if (drained) begin
          state     <= S_DECIDE;
          mode      <= MODE_DECIDE;
          target    <= 8'd1;
          start     <= 1'b1;
          dec_clear <= 1'b1;
        end
        S_DECIDE: if (drained) begin
          syn_ok <= !mismatch;
          if (mismatch && EPASS > 0) begin
            state  <= S_ERASE;
            mode   <= MODE_ERASE;
            target <= 8'(EPASS);
            start  <= 1'b1;
            erased <= 1'b1;
          end else begin
            state    <= S_OUT;
            out_addr <= '0;
            out_rd   <= 1'b1;
          end
        end
        S_ERASE: if (drained) begin
          state    <= S_OUT;
          out_addr <= '0;
          out_rd   <= 1'b1;
        end
        S_OUT: begin
          if (out_addr == AW'(NOUT - 1)) begin
            state      <= S_RECV;
            frame_done <= 1'b1;
          end else begin
            out_addr <= out_addr + 1'b1;
            out_rd   <= 1'b1;
          end
        end
        default: state <= S_RECV;
      endcase
    end
  end
endmodule
