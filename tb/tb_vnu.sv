// tb_vnu -- checks Eq. (2) in the variable node unit: saturating L_qn - L_rmn per lane, and
// L_rmn ignored in the first iteration. Random and extreme values, model in plain integers.
// The equation is the paper's; the saturation checked here is this design's choice.
`timescale 1ns/1ps
module tb_vnu;
  localparam int P = 8, W = 8, MX = 127;
  int checks = 0, failures = 0;
  logic [P-1:0][W-1:0] lq, lr, o;
  logic fi;
  vnu #(.P(P), .W(W)) dut (.lq, .lr, .first_iter(fi), .lqmn(o));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int a[P], b[P];
      fi = (t % 7 == 0);
      for (int i = 0; i < P; i++) begin
        a[i] = (t < 20) ? ((i % 2) ? MX : -MX) : int'($urandom % 255) - 127;
        b[i] = (t < 20) ? ((i % 2) ? -MX : MX) : int'($urandom % 255) - 127;
        lq[i] = W'(a[i]); lr[i] = W'(b[i]);
      end
      #1;
      for (int i = 0; i < P; i++) begin
        int e;
        e = fi ? a[i] : a[i] - b[i];
        if (e > MX) e = MX;
        if (e < -MX) e = -MX;
        checks++;
        if ($signed(o[i]) != e) begin
          failures++;
          $display("FAIL lane %0d: %0d - %0d -> %0d, expected %0d", i, a[i], b[i], $signed(o[i]), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
