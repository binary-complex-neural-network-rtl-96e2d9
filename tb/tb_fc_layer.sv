// tb_fc_layer -- self-checking test of the fully connected output layer.
//
// Loads random weights and biases, runs random feature vectors and checks
// every class score, the arg-max class (lowest index on a tie) and the
// latency of NCLS + 1 clocks from start to out_valid.
module tb_fc_layer;
  import bcnn_pkg::*;

  localparam int NF = 12, NCL = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_we, start, out_valid;
  logic [3:0] w_cls, cls;
  logic [3:0] w_idx;
  fx16_t w_data;
  fx16_t [NF-1:0] feat;
  fx16_t [NCL-1:0] scores;

  fc_layer #(.NF(NF), .NCL(NCL)) dut (.*);

  int wgt [NCL][NF + 1];
  int checks = 0, failures = 0;

  initial begin
    w_we = 0; start = 0; w_cls = 0; w_idx = 0; w_data = 0; feat = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NCL; k++)
      for (int n = 0; n <= NF; n++) begin
        wgt[k][n] = $urandom_range(0, 511) - 256;
        @(negedge clk) w_we = 1; w_cls = 4'(k); w_idx = 4'(n); w_data = fx16_t'(wgt[k][n]);
      end
    @(negedge clk) w_we = 0;
    for (int t = 0; t < 50; t++) begin
      int es [NCL];
      int best, bcls, cyc;
      for (int n = 0; n < NF; n++) feat[n] = fx16_t'($urandom_range(0, 511)) - 16'sd256;
      best = 0; bcls = 0;
      for (int k = 0; k < NCL; k++) begin
        longint a;
        a = 0;
        for (int n = 0; n < NF; n++) a += longint'(wgt[k][n]) * feat[n];
        a = ((a >= 0) ? a / 256 : -((-a + 255) / 256)) + wgt[k][NF];
        es[k] = int'(a > 32767 ? 32767 : (a < -32768 ? -32768 : a));
        if (k == 0 || es[k] > best) begin best = es[k]; bcls = k; end
      end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!out_valid) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != NCL + 1) begin failures++; $display("latency %0d", cyc); end
      for (int k = 0; k < NCL; k++) begin
        checks++;
        if (int'(scores[k]) != es[k]) begin failures++; if (failures < 5) $display("score %0d: %0d vs %0d", k, scores[k], es[k]); end
      end
      checks++;
      if (int'(cls) != bcls) begin failures++; $display("class %0d vs %0d", cls, bcls); end
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
