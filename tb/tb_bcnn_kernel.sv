// tb_bcnn_kernel -- end-to-end test of one inference kernel at its default
// parameters.
//
// Loads a random network over the host write bus: a NIN-style chain and
// two ResNet-style blocks (one with a plain shortcut, one whose shortcut
// holds its own convolution), 50% channel pruning, pooling in three layers.
// Runs one random frame and compares the four activation buffers, the ten
// scores and the class with the reference model, then checks the clocks
// spent in each binarized layer against npix*256/P (the convolution keeps
// II = 1, with no pipeline stall).
module tb_bcnn_kernel;
  import bcnn_pkg::*;
  import bcnn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  host_wr_t hw;
  logic start, busy, done;
  logic [3:0] pred_class;
  fx16_t [NCLS-1:0] pred_scores;

  bcnn_kernel dut (.*);

  int checks = 0, failures = 0;
  bcnn_net net;
  host_wr_t q [$];
  longint stall_cycles = 0, layer_cycles = 0, layer_pixels = 0;

  always_ff @(posedge clk)
    if (rst_n && dut.state == dut.K_LAYER) begin
      layer_cycles <= layer_cycles + 1;
      if (dut.u_conv.state == dut.u_conv.S_RUN && !dut.u_conv.issue) stall_cycles <= stall_cycles + 1;
    end

  initial begin
    int cyc;
    hw = '0; start = 0;
    net = new();
    net.randomize_net(64);
    net.nl_mode = 0;
    net.nlayers = 6;
    // NIN-style chain with pooling
    net.cfg[0].src = 0; net.cfg[0].dst = 1; net.cfg[0].pool_en = 1;            // 32x32 -> 16x16
    // residual block 1: two layers, identity shortcut (buffer 1)
    net.cfg[1].src = 1; net.cfg[1].dst = 2;
    net.cfg[2].src = 2; net.cfg[2].dst = 3; net.cfg[2].res = 1; net.cfg[2].res_en = 1;
    // residual block 2: shortcut conv (3 -> 0) and two-layer path (3 -> 1 -> 2)
    net.cfg[3].src = 3; net.cfg[3].dst = 0; net.cfg[3].pool_en = 1;            // 16x16 -> 8x8
    net.cfg[4].src = 3; net.cfg[4].dst = 1; net.cfg[4].pool_en = 1;
    net.cfg[5].src = 1; net.cfg[5].dst = 2; net.cfg[5].res = 0; net.cfg[5].res_en = 1;
    net.random_image();
    net.host_writes(q);
    net.image_writes(q);
    net.run();
    for (int l = 0; l < net.nlayers; l++) layer_pixels += (l == 0) ? 1024 : (l <= 4 ? 256 : 64);

    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (q[i]) begin
      @(negedge clk) hw = q[i];
    end
    @(negedge clk) hw = '0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    $display("frame: %0d clocks, %0d in binarized layers (%0d conv stall clocks)", cyc, layer_cycles, stall_cycles);

    for (int b = 0; b < 4; b++)
      for (int p = 0; p < NPIX; p++) begin
        bin_word_t got;
        case (b)
          0: got = dut.g_act[0].u_act.mem[p];
          1: got = dut.g_act[1].u_act.mem[p];
          2: got = dut.g_act[2].u_act.mem[p];
          default: got = dut.g_act[3].u_act.mem[p];
        endcase
        // only the part of each buffer written during this frame is known
        if ((b == 0 && p < 64) || (b == 1 && p < 64) || (b == 2 && p < 64) || (b == 3 && p < 256)) begin
          checks++;
          if (got != net.buf_q[b][p]) begin
            failures++;
            if (failures < 5) $display("buffer %0d pixel %0d differs", b, p);
          end
        end
      end
    for (int k = 0; k < NCLS; k++) begin
      checks++;
      if (int'(pred_scores[k]) != net.scores[k]) begin
        failures++;
        $display("score %0d: got %0d exp %0d", k, pred_scores[k], net.scores[k]);
      end
    end
    checks++;
    if (int'(pred_class) != net.cls) begin failures++; $display("class %0d exp %0d", pred_class, net.cls); end
    checks++;
    if (stall_cycles != 0) begin failures++; $display("convolution stalled"); end
    checks++;
    if (layer_cycles > layer_pixels * (CH_BITS / 16) + 40 * net.nlayers) begin
      failures++; $display("binarized layers took %0d clocks for %0d pixels", layer_cycles, layer_pixels);
    end
    for (int b = 0; b < 4; b++) begin
      int ones;
      ones = 0;
      for (int p = 0; p < 64; p++) ones += $countones(net.buf_q[b][p]);
      $display("buffer %0d: %0d of %0d bits at -1 in the first 64 pixels", b, ones, 64 * CH_BITS);
    end
    $display("class %0d, scores %0d %0d %0d ...", pred_class, pred_scores[0], pred_scores[1], pred_scores[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired: layer %0d written %0d of %0d, conv state %0d pix %0d", dut.layer, dut.l_written, dut.l_expect, dut.u_conv.state, dut.u_conv.pix);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
