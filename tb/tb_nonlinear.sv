// tb_nonlinear -- self-checking test of the ReLU / Hardtanh unit.
//
// Random and edge values (0, +-1.0, +-32767) in both modes, compared with
// max(0, x) and clip(x, -1.0, +1.0) computed here.
module tb_nonlinear;
  import bcnn_pkg::*;

  localparam int N = 6;
  logic mode;
  fx16_t [N-1:0] din, dout;
  int checks = 0, failures = 0;

  nonlinear #(.N(N)) dut (.*);

  initial begin
    for (int t = 0; t < 400; t++) begin
      mode = t[0];
      for (int n = 0; n < N; n++) din[n] = fx16_t'($urandom);
      if (t < 2) begin
        din[0] = 0; din[1] = 256; din[2] = -256; din[3] = 257; din[4] = -32768; din[5] = 32767;
      end
      #1;
      for (int n = 0; n < N; n++) begin
        int x, e;
        x = int'(din[n]);
        e = mode ? (x > 256 ? 256 : (x < -256 ? -256 : x)) : (x < 0 ? 0 : x);
        checks++;
        if (int'(dout[n]) != e) begin
          failures++;
          if (failures < 5) $display("mode %0d x %0d: got %0d exp %0d", mode, x, dout[n], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
