// tb_bc_conv2d -- self-checking test of the binarized complex convolution.
//
// Fills a small activation buffer and the weight banks with random words,
// runs two layers (one with a randomly stalling consumer, one with an always
// ready consumer), compares every output with offset - 2*$countones(x ^ w)
// and checks that the stall-free layer takes npix*256/P clocks plus a short
// pipeline fill, i.e. one group of P output channels per clock (II = 1).
module tb_bc_conv2d;
  import bcnn_pkg::*;

  localparam int P = 16;
  localparam int G = CH_BITS / P;
  localparam int NP = 24;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, vec_valid, vec_ready, busy, done;
  logic [10:0] npix;
  logic [9:0] offset, act_raddr;
  logic [$clog2(G)-1:0] w_raddr;
  bin_word_t act_rdata;
  bin_word_t [P-1:0] w_rdata;
  fx16_t [CH_BITS-1:0] vec_data;

  bin_word_t act_mem [NP];
  bin_word_t wgt [CH_BITS];

  bc_conv2d #(.P(P)) dut (.*);

  always_ff @(posedge clk) begin
    act_rdata <= act_mem[act_raddr % NP];
    for (int b = 0; b < P; b++) w_rdata[b] <= wgt[int'(w_raddr) * P + b];
  end

  int checks = 0, failures = 0;
  int nvec;
  bit random_stall;

  function automatic bin_word_t rnd_word();
    bin_word_t w;
    for (int k = 0; k < CH_BITS / 32; k++) w[k*32 +: 32] = $urandom;
    return w;
  endfunction

  always_ff @(posedge clk) begin
    vec_ready <= random_stall ? ($urandom_range(0, 3) != 0) : 1'b1;
    if (rst_n && vec_valid && vec_ready) begin
      for (int j = 0; j < CH_BITS; j++) begin
        int exp_y;
        exp_y = int'(offset) - 2 * $countones(act_mem[nvec] ^ wgt[j]);
        checks++;
        if (int'(vec_data[j]) != exp_y) begin
          failures++;
          if (failures < 5) $display("mismatch pix %0d ch %0d: got %0d exp %0d", nvec, j, vec_data[j], exp_y);
        end
      end
      nvec++;
    end
  end

  task automatic run_layer(input bit stall, output int cycles);
    random_stall = stall;
    nvec = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (nvec != int'(npix)) begin failures++; $display("got %0d vectors, want %0d", nvec, npix); end
  endtask

  initial begin
    int cyc;
    start = 0; npix = 11'(NP); offset = 10'd128; vec_ready = 1; random_stall = 0;
    for (int i = 0; i < NP; i++) act_mem[i] = rnd_word();
    for (int j = 0; j < CH_BITS; j++) wgt[j] = rnd_word();
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_layer(1, cyc);
    $display("stalling layer: %0d clocks", cyc);
    offset = 10'd256;
    for (int i = 0; i < NP; i++) act_mem[i] = rnd_word();
    run_layer(0, cyc);
    $display("stall-free layer: %0d clocks for %0d pixels x %0d groups", cyc, NP, G);
    checks++;
    if (cyc > NP * G + 6) begin failures++; $display("throughput below one group per clock"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
