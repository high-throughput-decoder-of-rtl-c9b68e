// tb_total_msg_unit -- checks Eq. (4) in the total message unit: saturating L_qmn + L_rmn per
// lane. Random and extreme values, model in plain integers.
// The equation is the paper's; the saturation checked here is this design's choice.
`timescale 1ns/1ps
module tb_total_msg_unit;
  localparam int P = 8, W = 8, MX = 127;
  int checks = 0, failures = 0;
  logic [P-1:0][W-1:0] lq, lr, o;
  total_msg_unit #(.P(P), .W(W)) dut (.lqmn(lq), .lr, .lq(o));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int a[P], b[P];
      for (int i = 0; i < P; i++) begin
        a[i] = (t < 20) ? ((i % 2) ? MX : -MX) : int'($urandom % 255) - 127;
        b[i] = (t < 20) ? ((i % 2) ? MX : -MX) : int'($urandom % 255) - 127;
        lq[i] = W'(a[i]); lr[i] = W'(b[i]);
      end
      #1;
      for (int i = 0; i < P; i++) begin
        int e;
        e = a[i] + b[i];
        if (e > MX) e = MX;
        if (e < -MX) e = -MX;
        checks++;
        if ($signed(o[i]) != e) begin
          failures++;
          $display("FAIL lane %0d: %0d + %0d -> %0d, expected %0d", i, a[i], b[i], $signed(o[i]), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
