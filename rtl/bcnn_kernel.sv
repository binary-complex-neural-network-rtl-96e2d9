// bcnn_kernel -- one BCNN inference kernel: a CIFAR-10 frame in, a class out.
//
// Data flow (the paper's "Kernel" of its architecture figure):
//   image buffer (3 x 8 bit per pixel)
//     -> complex input generation (real RGB -> complex RGB)
//     -> full-precision complex convolution, bias, non-linearity (3 -> 128
//        complex channels), quadrant binarization
//     -> activation buffer 0
//     -> binarized complex layers, each: XOR/popcount convolution (bc_conv2d)
//        -> optional 2x2 average pool -> CGBN -> quadrant binarization with
//        channel pruning -> optional residual add -> activation buffer
//     -> full-precision complex convolution (128 -> FP2_COUT complex
//        channels, +-1 inputs), bias, non-linearity, global average pool
//     -> fully connected layer -> class and scores.
// The order of the stages inside each layer follows the paper's figures;
// the layer sequence (which buffer each layer reads, writes and adds as a
// residual, pooling, offset) is a table written by the host, so the same
// kernel runs a NIN-style chain and ResNet-style residual blocks, including
// blocks whose shortcut holds its own convolution layer.
//
// This design's choices (the paper is silent on them): all convolutions are
// 1x1 (the paper's convolution example); four activation buffers of 1024 x
// 256 bits; up to MAX_LAYERS binarized layers; weights, CGBN parameters and
// masks kept in per-kernel memories loaded over the host write bus (see
// bcnn_pkg::hw_sel_e); Q8.8 fixed point for the full-precision parts; the
// final pool is a global average.
//
// Timing: a binarized layer of npix pixels takes about npix*256/P clocks
// (one group of P output channels per clock); the front end about 28 clocks
// per pixel; the back end CIN+2 = 130 clocks per pixel.  start begins a
// frame; done pulses when pred_class / pred_scores are valid.
module bcnn_kernel
  import bcnn_pkg::*;
#(
  parameter int P          = 16,   // output channels of bc_conv2d per clock
  parameter int MAX_LAYERS = 20,   // binarized layers the tables can hold
  parameter int FP1_L      = 16,   // MAC lanes of the first full-precision layer
  parameter int FP2_COUT   = 16,   // complex outputs of the last full-precision layer
  parameter int FP2_L      = 16    // MAC lanes of the last full-precision layer
) (
  input  logic              clk,
  input  logic              rst_n,
  input  host_wr_t          hw,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [3:0]        pred_class,
  output fx16_t [NCLS-1:0]  pred_scores
);

  localparam int NBUF = 4;
  localparam int G    = CH_BITS / P;       // conv groups per pixel
  localparam int GW   = (G > 1) ? $clog2(G) : 1;
  localparam int BNL  = P / 2;             // CGBN lanes (keeps pace with the conv)
  localparam int G2   = CPLX / BNL;        // CGBN groups per pixel
  localparam int WD   = MAX_LAYERS * G;
  localparam int BD   = MAX_LAYERS * G2;
  localparam int WAW  = $clog2(WD);
  localparam int BAW  = $clog2(BD);
  localparam int NF   = 2 * FP2_COUT;      // FC input features
  localparam int FP1_IW = $clog2(IMG_C);
  localparam int FP2_IW = $clog2(CPLX);
  localparam int FC_IW  = $clog2(NF + 1);

  // ---- configuration registers -------------------------------------------------
  layer_cfg_t  cfg_tab  [MAX_LAYERS];
  bin_word_t   mask_tab [MAX_LAYERS + 1];
  logic [4:0]  num_layers;
  logic        nl_mode;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num_layers <= '0;
      nl_mode    <= 1'b0;
    end else if (hw.en && hw.sel == HW_GLOBAL) begin
      num_layers <= hw.data[4:0];
      nl_mode    <= hw.data[5];
    end
  end

  always_ff @(posedge clk) begin
    if (hw.en && hw.sel == HW_CFG && int'(hw.addr) < MAX_LAYERS)
      cfg_tab[hw.addr[4:0]] <= layer_cfg_t'(hw.data[$bits(layer_cfg_t)-1:0]);
    if (hw.en && hw.sel == HW_MASK && int'(hw.addr) <= MAX_LAYERS)
      mask_tab[hw.addr[4:0]] <= hw.data;
  end

  // ---- control state ------------------------------------------------------------
  typedef enum logic [2:0] {K_IDLE, K_FRONT, K_LSTART, K_LCONV, K_LAYER, K_BACK, K_FC} kstate_e;
  kstate_e state;

  logic [4:0]  layer;
  layer_cfg_t  cfg;
  // Maps are square; buf_lg[b] is log2 of the side of the map held in
  // activation buffer b, cur_lg that of the map the current stage reads.
  logic [2:0]  buf_lg [NBUF];
  logic [2:0]  cur_lg;
  logic [10:0] npix_cur;
  logic [1:0]  last_dst;
  assign npix_cur = 11'(1) << {cur_lg, 1'b0};
  assign busy = (state != K_IDLE);

  // ---- image buffer --------------------------------------------------------------
  logic [9:0]  img_raddr;
  logic [23:0] img_q;
  sdp_ram #(.WIDTH(24), .DEPTH(NPIX)) u_img (
    .clk(clk), .we(hw.en && hw.sel == HW_IMG), .waddr(hw.addr[9:0]),
    .wdata(hw.data[23:0]), .raddr(img_raddr), .rdata(img_q));

  // ---- activation buffers ----------------------------------------------------------
  logic [NBUF-1:0]        act_we;
  logic [9:0]             act_waddr;
  bin_word_t              act_wdata;
  logic [9:0]             act_raddr [NBUF];
  bin_word_t              act_q     [NBUF];

  for (genvar b = 0; b < NBUF; b++) begin : g_act
    sdp_ram #(.WIDTH(CH_BITS), .DEPTH(NPIX)) u_act (
      .clk(clk), .we(act_we[b]), .waddr(act_waddr), .wdata(act_wdata),
      .raddr(act_raddr[b]), .rdata(act_q[b]));
  end

  // ---- binary weight banks -------------------------------------------------------------
  logic [GW-1:0]      conv_w_raddr;
  bin_word_t [P-1:0]  w_q;
  logic [WAW-1:0]     w_raddr, w_waddr;
  assign w_raddr = WAW'(int'(layer) * G + int'(conv_w_raddr));
  assign w_waddr = WAW'(int'(hw.addr[15:8]) * G + int'(hw.addr[7:0]) / P);

  for (genvar b = 0; b < P; b++) begin : g_wgt
    sdp_ram #(.WIDTH(CH_BITS), .DEPTH(WD)) u_w (
      .clk(clk), .we(hw.en && hw.sel == HW_BWGT && int'(hw.addr[7:0]) % P == b),
      .waddr(w_waddr), .wdata(hw.data), .raddr(w_raddr), .rdata(w_q[b]));
  end

  // ---- CGBN parameter banks -------------------------------------------------------------
  logic [BAW-1:0]        bn_raddr, bn_waddr;
  bn_param_t [BNL-1:0]   bn_q;
  logic [$clog2(G2)-1:0] ga;       // group being issued by the BN stage
  assign bn_raddr = BAW'(int'(layer) * G2 + int'(ga));
  assign bn_waddr = BAW'(int'(hw.addr[15:7]) * G2 + int'(hw.addr[6:0]) / BNL);

  for (genvar b = 0; b < BNL; b++) begin : g_bn
    sdp_ram #(.WIDTH($bits(bn_param_t)), .DEPTH(BD)) u_bn (
      .clk(clk), .we(hw.en && hw.sel == HW_BN && int'(hw.addr[6:0]) % BNL == b),
      .waddr(bn_waddr), .wdata(hw.data[$bits(bn_param_t)-1:0]),
      .raddr(bn_raddr), .rdata(bn_q[b]));
  end

  // =====================================================================================
  // Front end: complex input generation and first full-precision layer
  // =====================================================================================
  logic [10:0] f_rd, f_wr;
  logic        f_inflight, img_v;
  logic        cig_v;
  fx16_t [IMG_C-1:0] cig_in, cig_re, cig_im;
  logic        h_valid;
  fx16_t [IMG_C-1:0] h_re, h_im;
  logic        fp1_in_ready, fp1_out_valid;
  fx16_t [CPLX-1:0] fp1_re, fp1_im;
  bin_word_t   front_bits;

  always_comb
    for (int c = 0; c < IMG_C; c++) cig_in[c] = fx16_t'({8'd0, img_q[c*8 +: 8]});

  complex_input_gen #(.C(IMG_C)) u_cig (
    .clk(clk), .rst_n(rst_n),
    .prm_we(hw.en && hw.sel == HW_CIG), .prm_addr(hw.addr[4:0]), .prm_data(hw.data[15:0]),
    .in_valid(img_v), .in_re(cig_in),
    .out_valid(cig_v), .out_re(cig_re), .out_im(cig_im));

  fp_complex_conv #(.CIN(IMG_C), .COUT(CPLX), .L(FP1_L)) u_fp1 (
    .clk(clk), .rst_n(rst_n), .nl_mode(nl_mode),
    .w_we(hw.en && hw.sel == HW_FP1_W), .w_oc(hw.addr[FP1_IW +: 7]), .w_ic(hw.addr[FP1_IW-1:0]),
    .w_data(hw.data[31:0]),
    .b_we(hw.en && hw.sel == HW_FP1_B), .b_oc(hw.addr[6:0]), .b_data(hw.data[31:0]),
    .in_valid(h_valid), .in_ready(fp1_in_ready), .in_re(h_re), .in_im(h_im),
    .out_valid(fp1_out_valid), .out_ready(1'b1), .out_re(fp1_re), .out_im(fp1_im));

  quad_binarize #(.N(CPLX)) u_qb_front (
    .re(fp1_re), .im(fp1_im), .keep(mask_tab[0]), .bits(front_bits));

  // =====================================================================================
  // Binarized complex layer: conv -> pool -> CGBN -> binarize -> residual
  // =====================================================================================
  logic        conv_start, conv_busy;
  logic [9:0]  conv_act_raddr;
  logic        cv_valid, cv_ready;
  fx16_t [CH_BITS-1:0] cv_data;

  bc_conv2d #(.P(P)) u_conv (
    .clk(clk), .rst_n(rst_n), .start(conv_start), .npix(npix_cur), .offset(cfg.offset),
    .act_raddr(conv_act_raddr), .act_rdata(act_q[cfg.src]),
    .w_raddr(conv_w_raddr), .w_rdata(w_q),
    .vec_valid(cv_valid), .vec_ready(cv_ready), .vec_data(cv_data),
    .busy(conv_busy), .done());

  logic        pl_valid, pl_ready;
  fx16_t [CH_BITS-1:0] pl_data;

  avg_pool #(.N(CH_BITS), .W_MAX(IMG_W)) u_pool (
    .clk(clk), .rst_n(rst_n), .start(conv_start), .en(cfg.pool_en),
    .width(6'(1) << cur_lg),
    .in_valid(cv_valid), .in_ready(cv_ready), .in_data(cv_data),
    .out_valid(pl_valid), .out_ready(pl_ready), .out_data(pl_data));

  // BN stage A: hold one pooled vector and issue its CGBN groups.
  fx16_t [CH_BITS-1:0] va;
  logic                busy_a;
  logic                last_a;
  assign last_a   = busy_a && (int'(ga) == G2 - 1);
  assign pl_ready = !busy_a || last_a;

  // stage B: parameters arrive from the banks
  logic                 vb;
  logic [$clog2(G2)-1:0] gb, gc;
  fx16_t [BNL-1:0]      xb_r, xb_i;
  logic                 vc;
  fx16_t [BNL-1:0]      yc_r, yc_i;
  logic [2*BNL-1:0]     keep_c, bits_c;
  bin_word_t            word_acc, word_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_a <= 1'b0;
      ga     <= '0;
      vb     <= 1'b0;
    end else begin
      vb <= busy_a;
      if (pl_valid && pl_ready && state == K_LAYER) begin
        busy_a <= 1'b1;
        ga     <= '0;
      end else if (busy_a) begin
        if (last_a) busy_a <= 1'b0;
        else        ga <= ga + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (pl_valid && pl_ready) va <= pl_data;
    gb <= ga;
    for (int b = 0; b < BNL; b++) begin
      xb_r[b] <= va[int'(ga) * BNL + b];
      xb_i[b] <= va[CPLX + int'(ga) * BNL + b];
    end
    gc <= gb;
  end

  cgbn #(.L(BNL)) u_cgbn (
    .clk(clk), .rst_n(rst_n), .in_valid(vb), .x_r(xb_r), .x_i(xb_i), .prm(bn_q),
    .out_valid(vc), .y_r(yc_r), .y_i(yc_i));

  bin_word_t cur_mask;
  assign cur_mask = mask_tab[int'(layer) + 1];
  always_comb begin
    keep_c[BNL-1:0]     = cur_mask[int'(gc) * BNL +: BNL];
    keep_c[2*BNL-1:BNL] = cur_mask[CPLX + int'(gc) * BNL +: BNL];
  end

  quad_binarize #(.N(BNL)) u_qb_layer (.re(yc_r), .im(yc_i), .keep(keep_c), .bits(bits_c));

  // stage C: assemble the binarized word; stage D: read the shortcut;
  // stage E: residual add and write.
  logic        vd, ve;
  bin_word_t   wd, we_word;
  logic [9:0]  l_out;            // output pixel index of the layer
  logic [10:0] l_written;
  logic [10:0] l_expect;
  bin_word_t   res_sum;

  always_comb begin
    word_full = word_acc;
    word_full[int'(gc) * BNL +: BNL]        = bits_c[BNL-1:0];
    word_full[CPLX + int'(gc) * BNL +: BNL] = bits_c[2*BNL-1:BNL];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vd <= 1'b0;
      ve <= 1'b0;
    end else begin
      vd <= vc && (int'(gc) == G2 - 1);
      ve <= vd;
    end
  end

  always_ff @(posedge clk) begin
    if (vc) word_acc <= word_full;
    if (vc && int'(gc) == G2 - 1) wd <= word_full;
    we_word <= wd;
  end

  residual_add u_res (.en(cfg.res_en), .conv_path(we_word), .shortcut(act_q[cfg.res]),
                      .sum_bin(res_sum));

  // =====================================================================================
  // Back end: last full-precision layer, global average pool, FC
  // =====================================================================================
  logic [10:0] b_rd, b_wr;
  logic        b_inflight, b_v;
  logic        hb_valid;
  fx16_t [CPLX-1:0] hb_re, hb_im;
  logic        fp2_in_ready, fp2_out_valid;
  fx16_t [FP2_COUT-1:0] fp2_re, fp2_im;
  fx16_t [NF-1:0] gap_in, gap_mean;
  logic        gap_clear, fc_start, fc_valid;
  logic [3:0]  fc_cls;
  fx16_t [NCLS-1:0] fc_scores;

  fp_complex_conv #(.CIN(CPLX), .COUT(FP2_COUT), .L(FP2_L)) u_fp2 (
    .clk(clk), .rst_n(rst_n), .nl_mode(nl_mode),
    .w_we(hw.en && hw.sel == HW_FP2_W), .w_oc(hw.addr[FP2_IW +: $clog2(FP2_COUT)]),
    .w_ic(hw.addr[FP2_IW-1:0]), .w_data(hw.data[31:0]),
    .b_we(hw.en && hw.sel == HW_FP2_B), .b_oc(hw.addr[$clog2(FP2_COUT)-1:0]), .b_data(hw.data[31:0]),
    .in_valid(hb_valid), .in_ready(fp2_in_ready), .in_re(hb_re), .in_im(hb_im),
    .out_valid(fp2_out_valid), .out_ready(1'b1), .out_re(fp2_re), .out_im(fp2_im));

  assign gap_in = {fp2_im, fp2_re};

  global_avg_pool #(.N(NF)) u_gap (
    .clk(clk), .clear(gap_clear), .lg_npix({1'b0, cur_lg, 1'b0}),
    .in_valid(fp2_out_valid && state == K_BACK), .in_data(gap_in), .mean(gap_mean));

  fc_layer #(.NF(NF), .NCL(NCLS)) u_fc (
    .clk(clk), .rst_n(rst_n),
    .w_we(hw.en && hw.sel == HW_FC), .w_cls(hw.addr[FC_IW +: 4]), .w_idx(hw.addr[FC_IW-1:0]),
    .w_data(hw.data[15:0]),
    .start(fc_start), .feat(gap_mean), .out_valid(fc_valid), .scores(fc_scores), .cls(fc_cls));

  // =====================================================================================
  // Buffer ports
  // =====================================================================================
  always_comb begin
    img_raddr = f_rd[9:0];
    act_we    = '0;
    act_waddr = '0;
    act_wdata = '0;
    for (int b = 0; b < NBUF; b++) begin
      if (state == K_LAYER)
        act_raddr[b] = (2'(b) == cfg.src) ? conv_act_raddr : (ve ? l_out + 10'd1 : l_out);
      else
        act_raddr[b] = b_rd[9:0];
    end
    if (state == K_FRONT && fp1_out_valid) begin
      act_we[0] = 1'b1;
      act_waddr = f_wr[9:0];
      act_wdata = front_bits;
    end else if (state == K_LAYER && ve) begin
      act_we[cfg.dst] = 1'b1;
      act_waddr       = l_out;
      act_wdata       = res_sum;
    end
  end

  // =====================================================================================
  // Kernel sequencer
  // =====================================================================================
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= K_IDLE;
      layer      <= '0;
      cfg        <= '0;
      cur_lg     <= 3'd5;
      for (int b = 0; b < NBUF; b++) buf_lg[b] <= 3'd5;
      last_dst   <= '0;
      f_rd       <= '0;
      f_wr       <= '0;
      f_inflight <= 1'b0;
      img_v      <= 1'b0;
      h_valid    <= 1'b0;
      conv_start <= 1'b0;
      l_out      <= '0;
      l_written  <= '0;
      l_expect   <= '0;
      b_rd       <= '0;
      b_wr       <= '0;
      b_inflight <= 1'b0;
      b_v        <= 1'b0;
      hb_valid   <= 1'b0;
      gap_clear  <= 1'b0;
      fc_start   <= 1'b0;
      done       <= 1'b0;
      pred_class <= '0;
    end else begin
      conv_start <= 1'b0;
      gap_clear  <= 1'b0;
      fc_start   <= 1'b0;
      done       <= 1'b0;
      img_v      <= 1'b0;
      b_v        <= 1'b0;

      case (state)
        K_IDLE: if (start) begin
          state      <= K_FRONT;
          f_rd       <= '0;
          f_wr       <= '0;
          f_inflight <= 1'b0;
          h_valid    <= 1'b0;
          buf_lg[0]  <= 3'd5;     // the front end writes a full-size map
          last_dst   <= '0;
          layer      <= '0;
        end

        K_FRONT: begin
          if (!f_inflight && f_rd < 11'(NPIX)) begin
            f_inflight <= 1'b1;
            img_v      <= 1'b1;     // img_q valid next clock
          end
          if (cig_v) h_valid <= 1'b1;
          if (h_valid && fp1_in_ready) begin
            h_valid    <= 1'b0;
            f_inflight <= 1'b0;
            f_rd       <= f_rd + 11'd1;
          end
          if (fp1_out_valid) begin
            f_wr <= f_wr + 11'd1;
            if (f_wr == 11'(NPIX - 1)) state <= K_LSTART;
          end
        end

        K_LSTART: begin
          if (layer == num_layers) begin
            state      <= K_BACK;
            cur_lg     <= buf_lg[last_dst];
            b_rd       <= '0;
            b_wr       <= '0;
            b_inflight <= 1'b0;
            hb_valid   <= 1'b0;
            gap_clear  <= 1'b1;
          end else begin
            cfg        <= cfg_tab[layer];
            cur_lg     <= buf_lg[cfg_tab[layer].src];
            l_out      <= '0;
            l_written  <= '0;
            l_expect   <= (11'(1) << {buf_lg[cfg_tab[layer].src], 1'b0}) >>
                          (cfg_tab[layer].pool_en ? 2 : 0);
            state      <= K_LCONV;
          end
        end

        K_LCONV: begin            // cfg and cur_lg are settled: start the layer
          conv_start <= 1'b1;
          state      <= K_LAYER;
        end

        K_LAYER: begin
          if (ve) begin
            l_out     <= l_out + 10'd1;
            l_written <= l_written + 11'd1;
          end
          if (l_written == l_expect && !conv_busy) begin
            last_dst       <= cfg.dst;
            buf_lg[cfg.dst] <= cfg.pool_en ? cur_lg - 3'd1 : cur_lg;
            layer <= layer + 5'd1;
            state <= K_LSTART;
          end
        end

        K_BACK: begin
          if (!b_inflight && b_rd < npix_cur) begin
            b_inflight <= 1'b1;
            b_v        <= 1'b1;
          end
          if (b_v) hb_valid <= 1'b1;
          if (hb_valid && fp2_in_ready) begin
            hb_valid   <= 1'b0;
            b_inflight <= 1'b0;
            b_rd       <= b_rd + 11'd1;
          end
          if (fp2_out_valid) begin
            b_wr <= b_wr + 11'd1;
            if (b_wr == npix_cur - 11'd1) begin
              fc_start <= 1'b1;
              state    <= K_FC;
            end
          end
        end

        K_FC: if (fc_valid) begin
          pred_class  <= fc_cls;
          done        <= 1'b1;
          state       <= K_IDLE;
        end

        default: state <= K_IDLE;
      endcase
    end
  end

  // Data registers of the sequencer (no reset needed).
  always_ff @(posedge clk) begin
    if (state == K_FRONT && cig_v) begin
      h_re <= cig_re;
      h_im <= cig_im;
    end
    if (state == K_BACK && b_v)    // binary word -> +-1.0 per part
      for (int c = 0; c < CPLX; c++) begin
        hb_re[c] <= act_q[last_dst][c]        ? -FX_ONE : FX_ONE;
        hb_im[c] <= act_q[last_dst][CPLX + c] ? -FX_ONE : FX_ONE;
      end
    if (state == K_FC && fc_valid) pred_scores <= fc_scores;
  end

  // A layer must not read its convolution input and its shortcut from the
  // same buffer, nor overwrite either of them.
  a_cfg_ok: assert property (@(posedge clk) disable iff (!rst_n)
    state == K_LAYER |-> cfg.dst != cfg.src && (!cfg.res_en || (cfg.res != cfg.src && cfg.res != cfg.dst)));

endmodule
