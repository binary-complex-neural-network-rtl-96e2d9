// tb_avg_pool -- self-checking test of the 2x2 average pooling unit.
//
// Streams a random 8x6 image (N lanes) through the pool with random input
// gaps and output stalls, checks every pooled vector against the floor of the
// 2x2 mean computed here, then checks the bypass mode (en = 0) on a second
// image, and that both produce the expected number of vectors.
module tb_avg_pool;
  import bcnn_pkg::*;

  localparam int N = 8;
  localparam int WD = 8, HT = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, en, in_valid, in_ready, out_valid, out_ready;
  logic [5:0] width;
  fx16_t [N-1:0] in_data, out_data;

  avg_pool #(.N(N), .W_MAX(32)) dut (.*);

  fx16_t img [HT][WD][N];
  int checks = 0, failures = 0;
  int nout;
  bit pool_mode;

  always_ff @(posedge clk) begin
    out_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && out_valid && out_ready) begin
      for (int n = 0; n < N; n++) begin
        int e;
        if (pool_mode) begin
          int py, px;
          py = (nout / (WD/2)) * 2; px = (nout % (WD/2)) * 2;
          e = int'(img[py][px][n]) + int'(img[py][px+1][n]) + int'(img[py+1][px][n]) + int'(img[py+1][px+1][n]);
          e = (e >= 0) ? e / 4 : -((-e + 3) / 4);
        end else begin
          e = int'(img[nout / WD][nout % WD][n]);
        end
        checks++;
        if (int'(out_data[n]) != e) begin
          failures++;
          if (failures < 5) $display("vec %0d lane %0d: got %0d exp %0d", nout, n, out_data[n], e);
        end
      end
      nout++;
    end
  end

  task automatic send_image();
    for (int p = 0; p < HT*WD; p++) begin
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      in_valid = 1;
      for (int n = 0; n < N; n++) in_data[n] = img[p / WD][p % WD][n];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
    end
    repeat (10) @(negedge clk);
  endtask

  initial begin
    start = 0; en = 1; in_valid = 0; width = 6'(WD); in_data = '0;
    for (int y = 0; y < HT; y++) for (int x = 0; x < WD; x++) for (int n = 0; n < N; n++)
      img[y][x][n] = fx16_t'($urandom_range(0, 1999)) - 16'sd1000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    pool_mode = 1; nout = 0;
    send_image();
    checks++; if (nout != HT*WD/4) begin failures++; $display("pooled vectors %0d", nout); end
    for (int y = 0; y < HT; y++) for (int x = 0; x < WD; x++) for (int n = 0; n < N; n++)
      img[y][x][n] = fx16_t'($urandom);
    en = 0; pool_mode = 0; nout = 0;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    send_image();
    checks++; if (nout != HT*WD) begin failures++; $display("bypass vectors %0d", nout); end
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
