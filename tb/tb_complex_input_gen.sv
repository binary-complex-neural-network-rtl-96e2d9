// tb_complex_input_gen -- self-checking test of the complex input generator.
//
// Loads random parameters for the two batch-norm / ReLU / 1x1-conv layers,
// streams one random RGB pixel per clock and compares, two clocks later,
// the real output with the input and the imaginary output with the two-layer
// network computed here.
module tb_complex_input_gen;
  import bcnn_pkg::*;

  localparam int C = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prm_we, in_valid, out_valid;
  logic [4:0] prm_addr;
  fx16_t prm_data;
  fx16_t [C-1:0] in_re, out_re, out_im;

  complex_input_gen #(.C(C)) dut (.*);

  int prm [2][2*C + C*C];
  int checks = 0, failures = 0;
  int exp_re [100][C];
  int exp_im [100][C];
  int nin = 0, nout = 0;

  function automatic int fl(input longint v);
    return int'((v >= 0) ? v / 256 : -((-v + 255) / 256));
  endfunction
  function automatic int sat(input longint v);
    return int'(v > 32767 ? 32767 : (v < -32768 ? -32768 : v));
  endfunction

  always_ff @(posedge clk) begin
    if (rst_n && out_valid) begin
      for (int c = 0; c < C; c++) begin
        checks += 2;
        if (int'(out_re[c]) != exp_re[nout][c] || int'(out_im[c]) != exp_im[nout][c]) begin
          failures++;
          if (failures < 5) $display("px %0d ch %0d: got %0d,%0d exp %0d,%0d", nout, c, out_re[c], out_im[c], exp_re[nout][c], exp_im[nout][c]);
        end
      end
      nout++;
    end
  end

  initial begin
    prm_we = 0; prm_addr = 0; prm_data = 0; in_valid = 0; in_re = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < 2*C + C*C; i++) begin
        prm[s][i] = $urandom_range(0, 767) - 256;
        @(negedge clk) prm_we = 1; prm_addr = 5'(s*16 + i); prm_data = fx16_t'(prm[s][i]);
      end
    @(negedge clk) prm_we = 0;
    for (int t = 0; t < 100; t++) begin
      int x [C];
      int y [C];
      int m [C];
      for (int c = 0; c < C; c++) begin
        x[c] = $urandom_range(0, 255);
        in_re[c] = fx16_t'(x[c]);
      end
      // reference: two layers of BN -> ReLU -> 1x1 conv
      for (int s = 0; s < 2; s++) begin
        int t1 [C];
        for (int c = 0; c < C; c++) begin
          t1[c] = sat(longint'(fl(longint'(x[c]) * prm[s][c])) + prm[s][C + c]);
          if (t1[c] < 0) t1[c] = 0;
        end
        for (int o = 0; o < C; o++) begin
          longint a;
          a = 0;
          for (int c = 0; c < C; c++) a += longint'(t1[c]) * prm[s][2*C + o*C + c];
          m[o] = sat(fl(a));
        end
        if (s == 0) begin
          for (int c = 0; c < C; c++) begin y[c] = x[c]; x[c] = m[c]; end
        end
      end
      exp_re[nin] = y;
      exp_im[nin] = m;
      nin++;
      in_valid = 1;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (nout != nin) begin failures++; $display("%0d of %0d outputs", nout, nin); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
