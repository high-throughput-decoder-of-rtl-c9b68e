// tb_rx_unit -- receiving unit: a frame of random samples and syndrome bits with random gaps
// in in_valid, checked beat by beat: bank (RAM_L for even beats, RAM_R for odd), address,
// the initial messages 2R/sigma^2 (R times the scale, rounded, saturated; computed here in
// real arithmetic), the Syn_RAM writes of the first M/p beats and one finish_storing pulse
// after the last beat; in_ready must stay low after a whole frame until enable drops. p = 66
// is used so that a lane vector is wider than 64 bits.
// The bank interleave follows the paper; the sample format and handshake are this design's.
`timescale 1ns/1ps
module tb_rx_unit;
  localparam int P = 66, W = 8, F = 3, NW = 8, SG = 5, RW = 12, RF = 8, SCW = 12, SCF = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en, in_valid, in_ready, wl, wr, swe, fin;
  logic [P-1:0][RW-1:0] in_r;
  logic [P-1:0] in_s, sdata;
  logic [SCW-1:0] scale;
  logic [1:0] waddr;
  logic [P-1:0][W-1:0] wdata;
  logic [2:0] saddr;

  rx_unit #(.P(P), .W(W), .F(F), .NW(NW), .SG(SG), .RW(RW), .RF(RF), .SCW(SCW), .SCF(SCF)) dut (
    .clk, .rst_n, .enable(en), .in_valid, .in_ready, .in_r, .in_s, .llr_scale(scale),
    .wr_en_l(wl), .wr_en_r(wr), .wr_addr(waddr), .wr_data(wdata), .syn_we(swe), .syn_addr(saddr),
    .syn_data(sdata), .finish_storing(fin));

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    int nfin;
    en = 0; in_valid = 0; in_r = '0; in_s = '0; scale = 12'd1422;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!in_ready, "not ready while disabled");
    en = 1;
    nfin = 0;
    for (int frame = 0; frame < 2; frame++) begin
      for (int b = 0; b < NW; b++) begin
        int rv[P];
        logic [P-1:0] sv;
        @(negedge clk);
        while ($urandom % 3 == 0) begin
          in_valid = 0;
          @(negedge clk);
          chk(!wl && !wr && !swe, "no write without a beat");
        end
        in_valid = 1;
        for (int i = 0; i < P; i++) begin
          rv[i] = (i == 0) ? 2047 : (i == 1) ? -2048 : int'($urandom % 4096) - 2048;
          in_r[i] = RW'(rv[i]);
          sv[i] = $urandom % 2;
        end
        in_s = sv;
        scale = (frame == 0) ? 12'd1422 : 12'd300;
        @(negedge clk);
        in_valid = 0;
        chk(wl == (b % 2 == 0) && wr == (b % 2 == 1), $sformatf("bank of beat %0d", b));
        chk(int'(waddr) == b / 2, "address");
        chk(swe == (b < SG), "syndrome write enable");
        if (b < SG) chk(sdata == sv && int'(saddr) == b, "syndrome word");
        chk(fin == (b == NW - 1), "finish_storing");
        if (fin) nfin++;
        for (int i = 0; i < P; i++) begin
          real x;
          int  e;
          x = real'(rv[i]) / 256.0 * real'(scale) / 256.0 * 8.0;
          e = int'($floor(x + 0.5));
          if (e > 127) e = 127;
          if (e < -127) e = -127;
          chk($signed(wdata[i]) == e, $sformatf("beat %0d lane %0d: %0d expected %0d", b, i, $signed(wdata[i]), e));
        end
      end
      // a whole frame is in: no further beat until the controller has dropped enable
      chk(!in_ready, "ready after a whole frame");
      en = 0;
      @(negedge clk);
      en = 1;
      @(negedge clk);
      chk(in_ready, "ready again for the next frame");
    end
    chk(nfin == 2, "one finish_storing per frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
