// tb_var_msg_ram -- writes random words to RAM_L and RAM_R at random addresses (both banks,
// independent addresses, some cycles only one bank) and checks every synchronous read, one
// cycle after its address, against an array model.
// The two-bank layout follows the paper; the one-cycle read latency is this design's choice.
`timescale 1ns/1ps
module tb_var_msg_ram;
  localparam int P = 4, W = 8, DEPTH = 16, AW = 4;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [AW-1:0] ral, rar, wal, war;
  logic [P-1:0][W-1:0] rdl, rdr, wdl, wdr;
  logic wel, wer;
  var_msg_ram #(.P(P), .W(W), .DEPTH(DEPTH)) dut (.clk, .rd_addr_l(ral), .rd_addr_r(rar),
    .rd_data_l(rdl), .rd_data_r(rdr), .wr_en_l(wel), .wr_addr_l(wal), .wr_data_l(wdl),
    .wr_en_r(wer), .wr_addr_r(war), .wr_data_r(wdr));
  logic [P-1:0][W-1:0] ml[DEPTH], mr[DEPTH];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wel = 0; wer = 0; ral = 0; rar = 0;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wel = 1; wer = 1; wal = AW'(a); war = AW'(a);
      wdl = {$urandom}; wdr = {$urandom};
      ml[a] = wdl; mr[a] = wdr;
    end
    @(negedge clk);
    wel = 0; wer = 0;
    for (int t = 0; t < 2000; t++) begin
      logic [P-1:0][W-1:0] el, er;
      @(negedge clk);
      ral = AW'($urandom); rar = AW'($urandom);
      el = ml[ral]; er = mr[rar];
      wel = $urandom % 2; wer = $urandom % 2;
      wal = AW'($urandom); war = AW'($urandom);
      wdl = {$urandom}; wdr = {$urandom};
      @(posedge clk);
      if (wel) ml[wal] = wdl;
      if (wer) mr[war] = wdr;
      #1;
      checks += 2;
      if (rdl != el) begin failures++; $display("FAIL RAM_L read"); end
      if (rdr != er) begin failures++; $display("FAIL RAM_R read"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
