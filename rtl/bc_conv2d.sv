// bc_conv2d -- binarized complex 1x1 convolution engine.
//
// What it computes (the paper's HLS kernel, figure "Binarized complex
// convolutional operation"):
//     for i in pixels:               // Fig_Dim loop
//       for j in 0..255:             // CH_out loop, pipelined with II = 1
//         Y[j][i] = offset - 2 * popcount(X[i] ^ weight[j])
// X[i] is one 256-bit binarized complex activation word (real parts in bits
// 0..127, imaginary parts in bits 128..255) and weight[j] the 256-bit row of
// output channel j.  Rows 0..127 produce the real outputs, rows 128..255 the
// imaginary outputs; the rows hold the complex weight matrix [w_r -w_i; w_i w_r]
// already concatenated, so one XOR/popcount per row does the complex product.
// The paper prints offset = 128 (the kept channels at its 0.5 pruning ratio);
// here it is an input so that other pruning ratios also work.
//
// How: the CH_out loop is unrolled by P (the paper's factor p, whose value it
// does not give): P weight rows are read per clock from P weight banks and P
// XOR/popcount lanes work in parallel, so a pixel takes G = 256/P clocks and a
// layer npix*G clocks.  The next pixel's activation word is fetched during the
// last group of the current one, so the pipeline keeps II = 1 across pixels.
// The P results of each group are collected into a 256-entry vector, handed
// downstream with valid/ready; when downstream stalls, the issue stalls.
//
// Timing: act_raddr / w_raddr are read with one clock of latency.  done pulses
// one clock after the last vector is accepted.
module bc_conv2d
  import bcnn_pkg::*;
#(
  parameter int P = 16,                    // output channels per clock (unroll factor p)
  localparam int G  = CH_BITS / P,         // groups of output channels per pixel
  localparam int GW = (G > 1) ? $clog2(G) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [10:0]              npix,      // pixels in the layer (1..1024)
  input  logic [9:0]               offset,
  // activation buffer read port
  output logic [9:0]               act_raddr,
  input  bin_word_t                act_rdata,
  // weight banks read port: bank b holds output channel g*P + b at address g
  output logic [GW-1:0]            w_raddr,
  input  bin_word_t [P-1:0]        w_rdata,
  // result vector of one pixel, channel j in entry j
  output logic                     vec_valid,
  input  logic                     vec_ready,
  output fx16_t [CH_BITS-1:0]      vec_data,
  output logic                     busy,
  output logic                     done
);

  typedef enum logic [1:0] {S_IDLE, S_FETCH, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [10:0]   pix;          // pixel being issued
  logic [GW-1:0] grp;          // group being issued
  bin_word_t     x_reg;
  logic          x_lat;        // act_rdata holds a word to latch this clock
  logic          s1_valid;     // weight rows of group s1_grp arrive this clock
  logic [GW-1:0] s1_grp;
  fx16_t [CH_BITS-1:0] coll;   // vector being collected
  logic          coll_full;
  logic          xfer;         // collector -> output register
  logic          issue;

  assign xfer  = coll_full && (!vec_valid || vec_ready);
  // Stall when the collector is full and cannot move on, or when it is about
  // to fill while the output register is still held by downstream.
  assign issue = (state == S_RUN) && !(coll_full && !xfer) &&
                 !(s1_valid && s1_grp == GW'(G - 1) && vec_valid && !vec_ready);
  assign busy  = (state != S_IDLE);

  // Read addresses.  The activation word of the next pixel is requested
  // together with the last weight group of the current one.
  always_comb begin
    w_raddr   = grp;
    act_raddr = pix[9:0];
    if (state == S_RUN && grp == GW'(G - 1)) act_raddr = 10'(pix + 11'd1);
  end

  // XOR / popcount lanes.
  fx16_t [P-1:0] lane_y;
  always_comb begin
    for (int b = 0; b < P; b++)
      lane_y[b] = fx16_t'($signed({6'd0, offset})) -
                  fx16_t'($signed({popcnt256(x_reg ^ w_rdata[b]), 1'b0}));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      pix       <= '0;
      grp       <= '0;
      x_lat     <= 1'b0;
      s1_valid  <= 1'b0;
      s1_grp    <= '0;
      coll_full <= 1'b0;
      vec_valid <= 1'b0;
      done      <= 1'b0;
    end else begin
      done     <= 1'b0;
      x_lat    <= 1'b0;
      s1_valid <= issue;
      s1_grp   <= grp;

      case (state)
        S_IDLE: if (start) begin
          pix   <= '0;
          grp   <= '0;
          state <= S_FETCH;
        end
        S_FETCH: begin           // act_raddr = pixel 0 this clock
          x_lat <= 1'b1;
          state <= S_RUN;
        end
        S_RUN: if (issue) begin
          if (grp == GW'(G - 1)) begin
            grp <= '0;
            if (pix == npix - 11'd1) state <= S_DRAIN;
            else begin
              pix   <= pix + 11'd1;
              x_lat <= 1'b1;
            end
          end else begin
            grp <= grp + GW'(1);
          end
        end
        S_DRAIN: if (!s1_valid && !coll_full && (!vec_valid || vec_ready) && !issue) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase

      // collector
      if (s1_valid && s1_grp == GW'(G - 1)) coll_full <= 1'b1;
      else if (xfer)                         coll_full <= 1'b0;

      // output register
      if (xfer)                        vec_valid <= 1'b1;
      else if (vec_valid && vec_ready) vec_valid <= 1'b0;
    end
  end

  // Data path registers (no reset needed).
  always_ff @(posedge clk) begin
    if (x_lat) x_reg <= act_rdata;
    if (s1_valid)
      for (int b = 0; b < P; b++) coll[int'(s1_grp) * P + b] <= lane_y[b];
    if (xfer) vec_data <= coll;
  end

  // The collector must be emptied before a new group overwrites it.
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
    s1_valid && s1_grp == '0 |-> !coll_full || xfer);

endmodule
