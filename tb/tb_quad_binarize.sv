// tb_quad_binarize -- self-checking test of quadrant binarization with the
// channel keep mask.
//
// Random real / imaginary values (including exact zeros, which must give
// +1, i.e. bit 0) and random masks; each output bit is compared with
// keep & (x < 0), real parts in the low half and imaginary parts in the high
// half of the word.
module tb_quad_binarize;
  import bcnn_pkg::*;

  localparam int N = 16;
  fx16_t [N-1:0] re, im;
  logic [2*N-1:0] keep, bits;
  int checks = 0, failures = 0;

  quad_binarize #(.N(N)) dut (.*);

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int n = 0; n < N; n++) begin
        re[n] = ($urandom_range(0, 3) == 0) ? '0 : fx16_t'($urandom);
        im[n] = ($urandom_range(0, 3) == 0) ? '0 : fx16_t'($urandom);
      end
      keep = (t < 100) ? '1 : (2*N)'($urandom);
      #1;
      for (int n = 0; n < N; n++) begin
        checks += 2;
        if (bits[n] != (keep[n] && int'(re[n]) < 0)) failures++;
        if (bits[N+n] != (keep[N+n] && int'(im[n]) < 0)) failures++;
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
