// tb_fp_complex_conv -- self-checking test of the full-precision complex
// convolution layer.
//
// Loads random Q8.8 weights and biases for a 5-in / 8-out layer with 4
// lanes, sends random pixels with a randomly stalling consumer in both
// non-linearity modes, and compares each output with the complex product
// sum, bias, rescale, saturation and ReLU / Hardtanh computed here.  Also
// checks the clocks per pixel against (COUT/L)*CIN + 2.
module tb_fp_complex_conv;
  import bcnn_pkg::*;

  localparam int CIN = 5, COUT = 8, L = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic nl_mode, w_we, b_we, in_valid, in_ready, out_valid, out_ready;
  logic [2:0] w_oc, b_oc;
  logic [2:0] w_ic;
  logic [31:0] w_data, b_data;
  fx16_t [CIN-1:0] in_re, in_im;
  fx16_t [COUT-1:0] out_re, out_im;

  fp_complex_conv #(.CIN(CIN), .COUT(COUT), .L(L)) dut (.*);

  fx16_t wr [COUT][CIN], wi [COUT][CIN], br [COUT], bi [COUT];
  int checks = 0, failures = 0;

  function automatic longint fl(input longint v);  // floor(v / 256)
    return (v >= 0) ? v / 256 : -((-v + 255) / 256);
  endfunction
  function automatic longint act(input longint v, input bit m);
    v = v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
    if (m) return v > 256 ? 256 : (v < -256 ? -256 : v);
    return v < 0 ? 0 : v;
  endfunction

  initial begin
    int t0, cyc;
    nl_mode = 0; w_we = 0; b_we = 0; in_valid = 0; out_ready = 0;
    w_oc = 0; w_ic = 0; b_oc = 0; w_data = 0; b_data = 0; in_re = '0; in_im = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int o = 0; o < COUT; o++) begin
      for (int c = 0; c < CIN; c++) begin
        wr[o][c] = fx16_t'($urandom_range(0, 1023)) - 16'sd512;
        wi[o][c] = fx16_t'($urandom_range(0, 1023)) - 16'sd512;
        @(negedge clk) w_we = 1; w_oc = 3'(o); w_ic = 3'(c); w_data = {wi[o][c], wr[o][c]};
      end
      br[o] = fx16_t'($urandom_range(0, 511)) - 16'sd256;
      bi[o] = fx16_t'($urandom_range(0, 511)) - 16'sd256;
      @(negedge clk) w_we = 0; b_we = 1; b_oc = 3'(o); b_data = {bi[o], br[o]};
    end
    @(negedge clk) b_we = 0;
    for (int t = 0; t < 40; t++) begin
      nl_mode = t[0];
      for (int c = 0; c < CIN; c++) begin
        in_re[c] = fx16_t'($urandom_range(0, 1023)) - 16'sd512;
        in_im[c] = fx16_t'($urandom_range(0, 1023)) - 16'sd512;
      end
      in_valid = 1;
      @(posedge clk); while (!in_ready) @(posedge clk);
      t0 = $time;
      @(negedge clk) in_valid = 0;
      cyc = 0;
      while (!out_valid) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc > (COUT / L) * CIN + 3) begin failures++; $display("slow: %0d clocks", cyc); end
      repeat ($urandom_range(0, 3)) @(negedge clk);
      for (int o = 0; o < COUT; o++) begin
        longint sr, si;
        sr = 0; si = 0;
        for (int c = 0; c < CIN; c++) begin
          sr += longint'(wr[o][c]) * in_re[c] - longint'(wi[o][c]) * in_im[c];
          si += longint'(wi[o][c]) * in_re[c] + longint'(wr[o][c]) * in_im[c];
        end
        sr = act(fl(sr) + br[o], nl_mode);
        si = act(fl(si) + bi[o], nl_mode);
        checks++;
        if (longint'(out_re[o]) != sr || longint'(out_im[o]) != si) begin
          failures++;
          if (failures < 5) $display("px %0d oc %0d: got %0d,%0d exp %0d,%0d", t, o, out_re[o], out_im[o], sr, si);
        end
      end
      out_ready = 1;
      @(negedge clk) out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
