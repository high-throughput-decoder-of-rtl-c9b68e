// tb_chk_msg_ram -- random writes and synchronous reads of the check message RAM against an
// array model, including reads of the address written in the same cycle (old data).
// The RAM's organisation (one p-message word per address) follows the paper; the
// read-during-write behaviour checked here is this design's choice.
`timescale 1ns/1ps
module tb_chk_msg_ram;
  localparam int P = 4, W = 8, DEPTH = 24, AW = 5;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [AW-1:0] ra, wa;
  logic [P-1:0][W-1:0] rd, wd;
  logic we;
  chk_msg_ram #(.P(P), .W(W), .DEPTH(DEPTH)) dut (.clk, .rd_addr(ra), .rd_data(rd), .wr_en(we),
                                                  .wr_addr(wa), .wr_data(wd));
  logic [P-1:0][W-1:0] m[DEPTH];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; ra = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; wa = AW'(a); wd = {$urandom}; m[a] = wd;
    end
    for (int t = 0; t < 2000; t++) begin
      logic [P-1:0][W-1:0] e;
      @(negedge clk);
      ra = AW'($urandom % DEPTH);
      e  = m[ra];
      we = $urandom % 2;
      wa = (t % 5 == 0) ? ra : AW'($urandom % DEPTH);
      wd = {$urandom};
      @(posedge clk);
      if (we) m[wa] = wd;
      #1;
      checks++;
      if (rd != e) begin failures++; $display("FAIL read %0d", ra); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
