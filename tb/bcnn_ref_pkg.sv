// bcnn_ref_pkg -- behavioural reference of one BCNN inference, for the
// kernel and top-level testbenches.
//
// It holds a randomly generated network (complex input generator, first
// and last full-precision complex layers, binarized layer table with
// weights, CGBN parameters and keep masks, FC layer), builds the list of host
// bus writes that load it, and computes the expected activation buffers,
// scores and class of a frame with plain integer arithmetic, independently
// of the RTL: Q8.8 products are rescaled by floor division by 256,
// saturated to 16 bits, averages are floored.
package bcnn_ref_pkg;
  import bcnn_pkg::*;

  localparam int MAXL  = 20;
  localparam int F2    = 16;            // complex outputs of the last fp layer
  localparam int NF    = 2 * F2;

  class bcnn_net;
    // network
    int          nlayers;
    bit          nl_mode;
    int          cig [2][15];
    int          w1r [CPLX][IMG_C], w1i [CPLX][IMG_C], b1r [CPLX], b1i [CPLX];
    int          w2r [F2][CPLX], w2i [F2][CPLX], b2r [F2], b2i [F2];
    int          fcw [NCLS][NF + 1];
    bin_word_t   mask [MAXL + 1];
    bin_word_t   bw [MAXL][CH_BITS];
    int          bn [MAXL][CPLX][8];     // mu_r mu_i k_r k_i g_r g_i b_r b_i
    layer_cfg_t  cfg [MAXL];
    // frame
    logic [7:0]  img [NPIX][IMG_C];
    bin_word_t   buf_q [4][NPIX];
    int          scores [NCLS];
    int          cls;
    int          lg [4];                     // log2 side of the map in each buffer
    int          lgh, lgw;
    int          last_dst;
    // event counts of the reference run
    int          n_pool_layers, n_plain_layers, n_res_layers;
    int          y [NPIX][CH_BITS];           // conv results of the current layer

    static function int fl(longint v);            // floor(v / 256)
      return int'((v >= 0) ? v / 256 : -((-v + 255) / 256));
    endfunction
    static function int sat(longint v);
      return int'(v > 32767 ? 32767 : (v < -32768 ? -32768 : v));
    endfunction
    static function int rnd(int lo, int hi);
      return int'($urandom_range(0, hi - lo)) + lo;
    endfunction
    function int act(int v);
      if (nl_mode) return v > 256 ? 256 : (v < -256 ? -256 : v);
      return v < 0 ? 0 : v;
    endfunction

    // Random network.  keep_cplx complex channels survive pruning (the same
    // set in every layer); weight bits of pruned channels are 0.
    function void randomize_net(int keep_cplx);
      bit keep [CPLX];
      for (int c = 0; c < CPLX; c++) keep[c] = (c < keep_cplx);
      for (int c = CPLX - 1; c > 0; c--) begin
        int j; bit t;
        j = $urandom_range(0, c); t = keep[c]; keep[c] = keep[j]; keep[j] = t;
      end
      for (int m = 0; m <= MAXL; m++)
        for (int c = 0; c < CPLX; c++) begin
          mask[m][c] = keep[c];
          mask[m][CPLX + c] = keep[c];
        end
      for (int s = 0; s < 2; s++) begin
        for (int c = 0; c < 3; c++) begin
          cig[s][c] = rnd(128, 384);            // a
          cig[s][3 + c] = rnd(-64, 64);         // b
        end
        for (int i = 6; i < 15; i++) cig[s][i] = rnd(-256, 256);
      end
      for (int o = 0; o < CPLX; o++) begin
        for (int c = 0; c < IMG_C; c++) begin
          w1r[o][c] = rnd(-512, 512); w1i[o][c] = rnd(-512, 512);
        end
        b1r[o] = rnd(-128, 128); b1i[o] = rnd(-128, 128);
      end
      for (int o = 0; o < F2; o++) begin
        for (int c = 0; c < CPLX; c++) begin
          w2r[o][c] = rnd(-64, 64); w2i[o][c] = rnd(-64, 64);
        end
        b2r[o] = rnd(-256, 256); b2i[o] = rnd(-256, 256);
      end
      for (int k = 0; k < NCLS; k++)
        for (int n = 0; n <= NF; n++) fcw[k][n] = rnd(-256, 256);
      for (int l = 0; l < MAXL; l++) begin
        for (int j = 0; j < CH_BITS; j++) begin
          for (int q = 0; q < CH_BITS / 32; q++) bw[l][j][q*32 +: 32] = $urandom;
          bw[l][j] &= mask[l];
        end
        for (int c = 0; c < CPLX; c++) begin
          bn[l][c][0] = rnd(-8, 8);   bn[l][c][1] = rnd(-8, 8);
          bn[l][c][2] = rnd(8, 40);   bn[l][c][3] = rnd(8, 40);
          bn[l][c][4] = rnd(-300, 300); bn[l][c][5] = rnd(-300, 300);
          bn[l][c][6] = rnd(-100, 100); bn[l][c][7] = rnd(-100, 100);
        end
        cfg[l] = '0;
        cfg[l].offset = 10'(2 * keep_cplx);
      end
    endfunction

    // The host writes that load the network.
    function void host_writes(ref host_wr_t q [$]);
      host_wr_t w;
      w = '0; w.en = 1'b1;
      w.sel = HW_GLOBAL; w.addr = '0; w.data = '0; w.data[4:0] = 5'(nlayers); w.data[5] = nl_mode; q.push_back(w);
      for (int s = 0; s < 2; s++)
        for (int i = 0; i < 15; i++) begin
          w.sel = HW_CIG; w.addr = 16'(s * 16 + i); w.data = '0; w.data[15:0] = 16'(cig[s][i]); q.push_back(w);
        end
      for (int o = 0; o < CPLX; o++) begin
        for (int c = 0; c < IMG_C; c++) begin
          w.sel = HW_FP1_W; w.addr = 16'(o * 4 + c); w.data = '0;
          w.data[31:0] = {16'(w1i[o][c]), 16'(w1r[o][c])}; q.push_back(w);
        end
        w.sel = HW_FP1_B; w.addr = 16'(o); w.data = '0; w.data[31:0] = {16'(b1i[o]), 16'(b1r[o])}; q.push_back(w);
      end
      for (int o = 0; o < F2; o++) begin
        for (int c = 0; c < CPLX; c++) begin
          w.sel = HW_FP2_W; w.addr = 16'(o * 128 + c); w.data = '0;
          w.data[31:0] = {16'(w2i[o][c]), 16'(w2r[o][c])}; q.push_back(w);
        end
        w.sel = HW_FP2_B; w.addr = 16'(o); w.data = '0; w.data[31:0] = {16'(b2i[o]), 16'(b2r[o])}; q.push_back(w);
      end
      for (int k = 0; k < NCLS; k++)
        for (int n = 0; n <= NF; n++) begin
          w.sel = HW_FC; w.addr = 16'(k * 64 + n); w.data = '0; w.data[15:0] = 16'(fcw[k][n]); q.push_back(w);
        end
      for (int m = 0; m <= nlayers; m++) begin
        w.sel = HW_MASK; w.addr = 16'(m); w.data = mask[m]; q.push_back(w);
      end
      for (int l = 0; l < nlayers; l++) begin
        w.sel = HW_CFG; w.addr = 16'(l); w.data = '0; w.data[$bits(layer_cfg_t)-1:0] = cfg[l]; q.push_back(w);
        for (int j = 0; j < CH_BITS; j++) begin
          w.sel = HW_BWGT; w.addr = 16'(l * 256 + j); w.data = bw[l][j]; q.push_back(w);
        end
        for (int c = 0; c < CPLX; c++) begin
          w.sel = HW_BN; w.addr = 16'(l * 128 + c); w.data = '0;
          for (int i = 0; i < 8; i++) w.data[(7 - i) * 16 +: 16] = 16'(bn[l][c][i]);
          q.push_back(w);
        end
      end
    endfunction

    function void image_writes(ref host_wr_t q [$]);
      host_wr_t w;
      w = '0; w.en = 1'b1; w.sel = HW_IMG;
      for (int p = 0; p < NPIX; p++) begin
        w.addr = 16'(p); w.data = '0;
        w.data[23:0] = {img[p][2], img[p][1], img[p][0]};
        q.push_back(w);
      end
    endfunction

    function void random_image();
      for (int p = 0; p < NPIX; p++)
        for (int c = 0; c < IMG_C; c++) img[p][c] = 8'($urandom);
    endfunction

    // ---- one inference -------------------------------------------------------------
    function void run();
      int g2sum [NF];
      n_pool_layers = 0; n_plain_layers = 0; n_res_layers = 0;
      // front end
      for (int p = 0; p < NPIX; p++) begin
        int x [3], t [3], m [3], re [3];
        for (int c = 0; c < 3; c++) begin x[c] = img[p][c]; re[c] = x[c]; end
        for (int s = 0; s < 2; s++) begin
          for (int c = 0; c < 3; c++) begin
            t[c] = sat(longint'(fl(longint'(x[c]) * cig[s][c])) + cig[s][3 + c]);
            if (t[c] < 0) t[c] = 0;
          end
          for (int o = 0; o < 3; o++) begin
            longint a; a = 0;
            for (int c = 0; c < 3; c++) a += longint'(t[c]) * cig[s][6 + o*3 + c];
            m[o] = sat(fl(a));
          end
          x = m;
        end
        for (int o = 0; o < CPLX; o++) begin
          longint sr, si;
          int yr, yi;
          sr = 0; si = 0;
          for (int c = 0; c < 3; c++) begin
            sr += longint'(w1r[o][c]) * re[c] - longint'(w1i[o][c]) * m[c];
            si += longint'(w1i[o][c]) * re[c] + longint'(w1r[o][c]) * m[c];
          end
          yr = act(sat(longint'(fl(sr)) + b1r[o]));
          yi = act(sat(longint'(fl(si)) + b1i[o]));
          buf_q[0][p][o]        = mask[0][o] && yr < 0;
          buf_q[0][p][CPLX + o] = mask[0][CPLX + o] && yi < 0;
        end
      end
      for (int b = 0; b < 4; b++) lg[b] = 5;
      last_dst = 0;
      // binarized layers
      for (int l = 0; l < nlayers; l++) begin
        int wdt, npx, nout;
        lgh = lg[cfg[l].src]; lgw = lgh;
        wdt = 1 << lgw; npx = 1 << (lgh + lgw);
        for (int p = 0; p < npx; p++)
          for (int j = 0; j < CH_BITS; j++)
            y[p][j] = int'(cfg[l].offset) - 2 * $countones(buf_q[cfg[l].src][p] ^ bw[l][j]);
        if (cfg[l].pool_en) begin
          n_pool_layers++;
          for (int py = 0; py < (1 << lgh) / 2; py++)
            for (int px = 0; px < wdt / 2; px++)
              for (int j = 0; j < CH_BITS; j++) begin
                int s, a;
                a = (2*py) * wdt + 2*px;
                s = y[a][j] + y[a + 1][j] + y[a + wdt][j] + y[a + wdt + 1][j];
                y[py * (wdt / 2) + px][j] = (s >= 0) ? s / 4 : -((-s + 3) / 4);
              end
          lgh--; lgw--;
        end else n_plain_layers++;
        if (cfg[l].res_en) n_res_layers++;
        nout = 1 << (lgh + lgw);
        for (int p = 0; p < nout; p++) begin
          bin_word_t wbits;
          for (int c = 0; c < CPLX; c++) begin
            longint s;
            int yr, yi;
            s = longint'(y[p][c] - bn[l][c][0]) * bn[l][c][2] - longint'(y[p][CPLX + c] - bn[l][c][1]) * bn[l][c][3];
            yr = sat(longint'(fl(s * bn[l][c][4])) + bn[l][c][6]);
            yi = sat(longint'(fl(s * bn[l][c][5])) + bn[l][c][7]);
            wbits[c]        = mask[l + 1][c] && yr < 0;
            wbits[CPLX + c] = mask[l + 1][CPLX + c] && yi < 0;
          end
          if (cfg[l].res_en)
            for (int b = 0; b < CH_BITS; b++) begin
              int a, r;
              a = wbits[b] ? -1 : 1;
              r = buf_q[cfg[l].res][p][b] ? -1 : 1;
              wbits[b] = (a + r) < 0;
            end
          buf_q[cfg[l].dst][p] = wbits;
        end
        last_dst = cfg[l].dst;
        lg[last_dst] = lgh;
      end
      // back end
      lgh = lg[last_dst]; lgw = lgh;
      for (int n = 0; n < NF; n++) g2sum[n] = 0;
      for (int p = 0; p < (1 << (lgh + lgw)); p++)
        for (int o = 0; o < F2; o++) begin
          longint sr, si;
          sr = 0; si = 0;
          for (int c = 0; c < CPLX; c++) begin
            int xr, xi;
            xr = buf_q[last_dst][p][c] ? -256 : 256;
            xi = buf_q[last_dst][p][CPLX + c] ? -256 : 256;
            sr += longint'(w2r[o][c]) * xr - longint'(w2i[o][c]) * xi;
            si += longint'(w2i[o][c]) * xr + longint'(w2r[o][c]) * xi;
          end
          g2sum[o]      += act(sat(longint'(fl(sr)) + b2r[o]));
          g2sum[F2 + o] += act(sat(longint'(fl(si)) + b2i[o]));
        end
      cls = 0;
      for (int k = 0; k < NCLS; k++) begin
        longint a;
        a = 0;
        for (int n = 0; n < NF; n++) begin
          int mean, npx;
          npx = 1 << (lgh + lgw);
          mean = (g2sum[n] >= 0) ? g2sum[n] / npx : -((-g2sum[n] + npx - 1) / npx);
          a += longint'(fcw[k][n]) * sat(mean);
        end
        scores[k] = sat(longint'(fl(a)) + fcw[k][NF]);
        if (k == 0 || scores[k] > scores[cls]) cls = k;
      end
    endfunction
  endclass

endpackage
