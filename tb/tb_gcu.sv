// tb_gcu -- checks the global controller's frame sequence with TMAX = 4 and an output of 6
// words. The test stands in for the rest of the decoder: a schedule model that runs
// ITER_CYC cycles per pass and honours the stop request at the end of a pass, and a pipeline
// that stays busy a few cycles after the schedule ends. For each frame it checks that the
// controller waits for finish_storing, runs exactly TMAX decoding passes, then one decision
// pass with the decision unit cleared, then one erase pass only when the syndrome did not
// match, and then reads the output memory once, word 0 to 5 in consecutive cycles, before
// frame_done; syn_ok and erased must report the outcome. Frames alternate between a matching
// and a failing syndrome.
// The start/stop control and Iter_num follow the paper; the phase sequence is this
// design's choice.
`timescale 1ns/1ps
module tb_gcu;
  import ldpc_pkg::*;
  localparam int TMAX = 4, NOUT = 6, ITER_CYC = 7, AW = $clog2(NOUT);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          rx_enable, finish_storing = 0, start, stop, ag_busy = 0, pipe_idle = 1;
  logic          dec_clear, mismatch = 0, out_rd, out_phase, frame_done, syn_ok, erased;
  logic [7:0]    iter_num = '0;
  mode_e         mode;
  logic [AW-1:0] out_addr;

  gcu #(.TMAX(TMAX), .EPASS(1), .NOUT(NOUT)) dut (.*);

  // schedule and pipeline model
  int cyc_in_pass = 0, tail = 0;
  int passes [3];
  int clears = 0, reads = 0, next_addr = 0;
  always @(posedge clk) begin
    if (!rst_n) begin
      ag_busy  <= 0;
      iter_num <= '0;
    end else if (start) begin
      ag_busy     <= 1;
      iter_num    <= '0;
      cyc_in_pass  = 0;
    end else if (ag_busy) begin
      cyc_in_pass++;
      if (cyc_in_pass == ITER_CYC) begin
        cyc_in_pass = 0;
        passes[int'(mode)]++;
        if (stop) begin
          ag_busy <= 0;
          tail     = 3;
        end
        iter_num <= iter_num + 1'b1;
      end
    end
    pipe_idle <= (tail == 0) && !(ag_busy && !(cyc_in_pass == 0 && stop));
    if (tail > 0) tail--;
    if (rst_n && dec_clear) clears++;
    if (rst_n && out_rd) begin
      reads++;
      checks++;
      if (int'(out_addr) != next_addr) begin
        failures++;
        $display("FAIL: output read of word %0d, expected %0d", out_addr, next_addr);
      end
      next_addr++;
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int fr = 0; fr < 6; fr++) begin
      bit bad;
      bad = fr % 2;
      passes = '{0, 0, 0};
      clears = 0; reads = 0; next_addr = 0;
      mismatch <= bad;
      repeat (5) @(posedge clk);
      @(negedge clk);
      checks++;
      if (!rx_enable || start) begin
        failures++;
        $display("FAIL frame %0d: controller did not wait for the input", fr);
      end
      finish_storing <= 1;
      @(posedge clk);
      finish_storing <= 0;
      while (!frame_done) @(posedge clk);
      @(negedge clk);
      checks += 6;
      if (passes[MODE_DECODE] != TMAX) begin
        failures++;
        $display("FAIL frame %0d: %0d decoding passes, expected %0d", fr, passes[MODE_DECODE], TMAX);
      end
      if (passes[MODE_DECIDE] != 1) begin
        failures++;
        $display("FAIL frame %0d: %0d decision passes", fr, passes[MODE_DECIDE]);
      end
      if (passes[MODE_ERASE] != int'(bad)) begin
        failures++;
        $display("FAIL frame %0d: %0d erase passes, expected %0d", fr, passes[MODE_ERASE], bad);
      end
      if (clears != 1 || reads != NOUT) begin
        failures++;
        $display("FAIL frame %0d: %0d clears, %0d output reads", fr, clears, reads);
      end
      if (syn_ok != !bad || erased != bad) begin
        failures++;
        $display("FAIL frame %0d: syn_ok %0b erased %0b", fr, syn_ok, erased);
      end
      if (!rx_enable) begin
        failures++;
        $display("FAIL frame %0d: not back to receiving", fr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
