// tb_global_avg_pool -- self-checking test of the global average pool.
//
// Accumulates 2^lg random vectors for several map sizes and compares the
// mean with the floor of the average computed here.
module tb_global_avg_pool;
  import bcnn_pkg::*;

  localparam int N = 5;

  logic clk = 0;
  always #5 clk = ~clk;

  logic clear, in_valid;
  logic [4:0] lg_npix;
  fx16_t [N-1:0] in_data, mean;
  int checks = 0, failures = 0;

  global_avg_pool #(.N(N)) dut (.*);

  initial begin
    clear = 0; in_valid = 0; in_data = '0; lg_npix = 0;
    for (int lg = 0; lg <= 8; lg += 2) begin
      longint sum [N];
      lg_npix = 5'(lg);
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      for (int n = 0; n < N; n++) sum[n] = 0;
      for (int p = 0; p < (1 << lg); p++) begin
        for (int n = 0; n < N; n++) begin
          in_data[n] = fx16_t'($urandom);
          sum[n] += longint'(in_data[n]);
        end
        in_valid = 1;
        @(negedge clk);
        in_valid = 0;
        if ($urandom_range(0, 1)) @(negedge clk);
      end
      for (int n = 0; n < N; n++) begin
        longint e;
        e = (sum[n] >= 0) ? sum[n] / (1 << lg) : -((-sum[n] + (1 << lg) - 1) / (1 << lg));
        checks++;
        if (longint'(mean[n]) != e) begin failures++; $display("lg %0d lane %0d: %0d vs %0d", lg, n, mean[n], e); end
      end
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
