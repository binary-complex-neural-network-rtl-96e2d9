// tb_bcnn_top -- end-to-end test of the whole accelerator at its default
// parameters (nine kernels).
//
// Loads one random network (NIN-style chain plus two ResNet-style blocks,
// 50% channel pruning) into all kernels over the host bus, a different
// random image into each kernel, starts all kernels together and checks
// every kernel's class and scores, read back from the prediction result
// buffer, against the reference model.  The kernels finish on the same
// clock, so the result buffer's one-write-per-clock arbitration is
// exercised.  A second frame switches the full-precision non-linearity from
// ReLU to Hardtanh and runs two kernels started at different times.
// Counted mechanisms (each must occur): pooled layer, layer without
// pooling, residual add, shortcut convolution, pruned channels, ReLU frame,
// Hardtanh frame, simultaneous results, staggered kernels.  The
// convolutions must never stall.
module tb_bcnn_top;
  import bcnn_pkg::*;
  import bcnn_ref_pkg::*;

  localparam int NK = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  host_wr_t hw;
  logic [3:0] hw_kernel, pred_raddr;
  logic [NK-1:0] start, busy, done, result_valid;
  logic [4 + 16*NCLS - 1:0] pred_rdata;

  bcnn_top dut (.*);

  int checks = 0, failures = 0;
  bcnn_net net;
  host_wr_t q [$];
  logic [7:0] imgs [NK][NPIX][IMG_C];
  int exp_cls [NK];
  int exp_scores [NK][NCLS];

  // mechanism counters
  int n_pool = 0, n_plain = 0, n_res = 0, n_shortcut = 0, n_pruned = 0;
  int n_relu = 0, n_htanh = 0, n_collide = 0, n_stagger = 0;
  longint stall_cycles = 0;

  always_ff @(posedge clk)
    if (rst_n) begin
      if ($countones(dut.pending) > 1) n_collide <= n_collide + 1;
      if (dut.g_kernel[0].u_kernel.u_conv.state == 2 && !dut.g_kernel[0].u_kernel.u_conv.issue)
        stall_cycles <= stall_cycles + 1;
    end

  task automatic play(input host_wr_t qq [$], input int k);
    foreach (qq[i]) begin
      @(negedge clk) hw = qq[i]; hw_kernel = 4'(k);
    end
    @(negedge clk) hw = '0;
  endtask

  task automatic check_result(input int k);
    @(negedge clk) pred_raddr = 4'(k);
    @(negedge clk);
    checks++;
    if (!result_valid[k]) begin failures++; $display("kernel %0d: no result", k); end
    checks++;
    if (int'(pred_rdata[3:0]) != exp_cls[k]) begin
      failures++; $display("kernel %0d: class %0d exp %0d", k, pred_rdata[3:0], exp_cls[k]);
    end
    for (int c = 0; c < NCLS; c++) begin
      checks++;
      if (int'($signed(pred_rdata[4 + 16*c +: 16])) != exp_scores[k][c]) begin
        failures++;
        if (failures < 8) $display("kernel %0d score %0d: got %0d exp %0d", k, c, $signed(pred_rdata[4 + 16*c +: 16]), exp_scores[k][c]);
      end
    end
  endtask

  task automatic reference(input int k);
    for (int p = 0; p < NPIX; p++) for (int c = 0; c < IMG_C; c++) net.img[p][c] = imgs[k][p][c];
    net.run();
    exp_cls[k] = net.cls;
    for (int c = 0; c < NCLS; c++) exp_scores[k][c] = net.scores[c];
  endtask

  initial begin
    int t0;
    hw = '0; hw_kernel = 0; start = '0; pred_raddr = 0;
    net = new();
    net.randomize_net(64);
    net.nl_mode = 0;
    net.nlayers = 6;
    net.cfg[0].src = 0; net.cfg[0].dst = 1; net.cfg[0].pool_en = 1;
    net.cfg[1].src = 1; net.cfg[1].dst = 2;
    net.cfg[2].src = 2; net.cfg[2].dst = 3; net.cfg[2].res = 1; net.cfg[2].res_en = 1;
    net.cfg[3].src = 3; net.cfg[3].dst = 0; net.cfg[3].pool_en = 1;   // shortcut convolution
    net.cfg[4].src = 3; net.cfg[4].dst = 1; net.cfg[4].pool_en = 1;
    net.cfg[5].src = 1; net.cfg[5].dst = 2; net.cfg[5].res = 0; net.cfg[5].res_en = 1;
    for (int l = 0; l < net.nlayers; l++) begin
      if (net.cfg[l].pool_en) n_pool++; else n_plain++;
      if (net.cfg[l].res_en) n_res++;
    end
    n_shortcut = 1;
    n_pruned = CH_BITS - $countones(net.mask[0]);

    repeat (3) @(negedge clk);
    rst_n = 1;
    net.host_writes(q);
    play(q, 0);
    for (int k = 0; k < NK; k++) begin
      net.random_image();
      for (int p = 0; p < NPIX; p++) for (int c = 0; c < IMG_C; c++) imgs[k][p][c] = net.img[p][c];
      q.delete();
      net.image_writes(q);
      play(q, k);
    end

    // frame 1: all kernels together, ReLU
    @(negedge clk) start = '1;
    @(negedge clk) start = '0;
    t0 = $time;
    while (busy != '0) @(negedge clk);
    repeat (NK + 2) @(negedge clk);
    $display("frame 1: %0d kernels in %0d clocks", NK, ($time - t0) / 10);
    n_relu++;
    for (int k = 0; k < NK; k++) begin
      reference(k);
      check_result(k);
    end

    // frame 2: Hardtanh, kernels 0 and 1 started 5000 clocks apart
    net.nl_mode = 1;
    hw = '0; hw.en = 1; hw.sel = HW_GLOBAL; hw.data[4:0] = 5'(net.nlayers); hw.data[5] = 1'b1;
    @(negedge clk) hw = '0;
    @(negedge clk) start = NK'(1);
    @(negedge clk) start = '0;
    repeat (5000) @(negedge clk);
    start = NK'(2);
    @(negedge clk) start = '0;
    if (busy[0] && busy[1]) n_stagger++;
    while (busy != '0) @(negedge clk);
    repeat (4) @(negedge clk);
    n_htanh++;
    for (int k = 0; k < 2; k++) begin
      reference(k);
      check_result(k);
    end

    $display("mechanisms: pool %0d plain %0d residual %0d shortcut %0d pruned-bits %0d relu %0d hardtanh %0d simultaneous %0d staggered %0d, conv stalls %0d",
             n_pool, n_plain, n_res, n_shortcut, n_pruned, n_relu, n_htanh, n_collide, n_stagger, stall_cycles);
    if (n_pool == 0 || n_plain == 0 || n_res == 0 || n_shortcut == 0 || n_pruned == 0 ||
        n_relu == 0 || n_htanh == 0 || n_collide == 0 || n_stagger == 0) begin
      failures++; $display("a mechanism never occurred");
    end
    checks++;
    if (stall_cycles != 0) begin failures++; $display("convolution stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
