// tb_syn_ram -- true dual-port Syn_RAM: writes through port A (as the receiving unit does)
// and through port B, reads on both ports in the same cycle at random addresses, checked one
// cycle later against an array model.
// The true dual-port organisation follows the paper; the depth used by the design (one word
// per row group) is its own choice.
`timescale 1ns/1ps
module tb_syn_ram;
  localparam int P = 8, DEPTH = 12, AW = 4;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic awe, bwe;
  logic [AW-1:0] aa, ba;
  logic [P-1:0] awd, bwd, ard, brd;
  syn_ram #(.P(P), .DEPTH(DEPTH)) dut (.clk, .a_we(awe), .a_addr(aa), .a_wdata(awd), .a_rdata(ard),
                                       .b_we(bwe), .b_addr(ba), .b_wdata(bwd), .b_rdata(brd));
  logic [P-1:0] m[DEPTH];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    awe = 0; bwe = 0; aa = 0; ba = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      awe = 1; aa = AW'(a); awd = P'($urandom); m[a] = awd;
    end
    for (int t = 0; t < 2000; t++) begin
      logic [P-1:0] ea, eb;
      @(negedge clk);
      aa = AW'($urandom % DEPTH);
      ba = AW'($urandom % DEPTH);
      ea = m[aa]; eb = m[ba];
      awe = ($urandom % 4 == 0);
      bwe = ($urandom % 4 == 0) && (ba != aa);
      awd = P'($urandom); bwd = P'($urandom);
      @(posedge clk);
      if (awe) m[aa] = awd;
      if (bwe) m[ba] = bwd;
      #1;
      checks += 2;
      if (!awe && ard != ea) begin failures++; $display("FAIL port A read"); end
      if (!bwe && brd != eb) begin failures++; $display("FAIL port B read"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
