// tb_residual_add -- self-checking test of the binary residual adder.
//
// For random words, every channel's two operands are decoded to +1 / -1,
// added, and the sum binarized with sign(0) = +1; the result must equal the
// unit's output bit.  With en = 0 the output must equal the convolution path.
module tb_residual_add;
  import bcnn_pkg::*;

  logic en;
  bin_word_t conv_path, shortcut, sum_bin;
  int checks = 0, failures = 0;

  residual_add dut (.*);

  initial begin
    for (int t = 0; t < 200; t++) begin
      en = (t % 4 != 3);
      for (int k = 0; k < CH_BITS / 32; k++) begin
        conv_path[k*32 +: 32] = $urandom;
        shortcut[k*32 +: 32]  = $urandom;
      end
      #1;
      for (int c = 0; c < CH_BITS; c++) begin
        int a, b, s;
        bit e;
        a = conv_path[c] ? -1 : 1;
        b = shortcut[c] ? -1 : 1;
        s = en ? a + b : a;
        e = (s < 0);
        checks++;
        if (sum_bin[c] != e) failures++;
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
