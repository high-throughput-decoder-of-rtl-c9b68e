// tb_sync_fifo -- random pushes and pops against a queue model: head data, empty, full and
// count every cycle, including simultaneous push and pop and running full and empty.
// The FIFO buffers are named by the paper; their first-word-fall-through behaviour and depth
// are this design's choice.
`timescale 1ns/1ps
module tb_sync_fifo;
  localparam int WD = 16, D = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr, rd, empty, full;
  logic [WD-1:0] wd, rdata;
  logic [$clog2(D):0] count;
  sync_fifo #(.WIDTH(WD), .DEPTH(D)) dut (.clk, .rst_n, .wr_en(wr), .wr_data(wd), .rd_en(rd),
                                          .rd_data(rdata), .empty, .full, .count);
  logic [WD-1:0] q[$];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    wr = 0; rd = 0; wd = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int bias;
      @(negedge clk);
      chk(empty == (q.size() == 0), "empty");
      chk(full == (q.size() == D), "full");
      chk(int'(count) == q.size(), "count");
      if (q.size() > 0) chk(rdata == q[0], "head data");
      bias = (t / 500) % 2 ? 3 : 1;   // phases that fill up and drain
      wr = (q.size() < D) && ($urandom % 4 < bias + 1);
      rd = (q.size() > 0) && ($urandom % 4 < 4 - bias);
      wd = WD'($urandom);
      @(posedge clk);
      #1;
      if (rd) void'(q.pop_front());
      if (wr) q.push_back(wd);
      @(negedge clk);
      wr = 0; rd = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
