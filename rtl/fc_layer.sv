// fc_layer -- fully connected output layer and class decision.
//
// The last layer of both networks is a full-precision fully connected layer
// that produces the prediction.  The paper only names it; this design
// computes score[k] = sum_n W[k][n]*f[n] (Q8.8, rescaled) + bias[k] for the
// NCLS classes, one class per clock with NF multipliers in parallel, and
// reports the index of the highest score (lowest index wins a tie).
//
// Interface: weights through a write port (w_idx == NF writes the bias of
// class w_cls).  start latches the feature vector; out_valid pulses when
// all scores and the class are ready, NCLS + 1 clocks later.
module fc_layer
  import bcnn_pkg::*;
#(
  parameter int NF  = 32,
  parameter int NCL = NCLS,
  localparam int IW = $clog2(NF + 1),
  localparam int CW = (NCL > 1) ? $clog2(NCL) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              w_we,
  input  logic [CW-1:0]     w_cls,
  input  logic [IW-1:0]     w_idx,
  input  fx16_t             w_data,
  input  logic              start,
  input  fx16_t [NF-1:0]    feat,
  output logic              out_valid,
  output fx16_t [NCL-1:0]   scores,
  output logic [CW-1:0]     cls
);

  fx16_t wgt  [NCL][NF];
  fx16_t bias [NCL];

  always_ff @(posedge clk) begin
    if (w_we) begin
      if (int'(w_idx) == NF) bias[w_cls] <= w_data;
      else                   wgt[w_cls][w_idx[$clog2(NF)-1:0]] <= w_data;
    end
  end

  fx16_t [NF-1:0] f;
  logic [CW-1:0]  k;
  logic           run;
  fx16_t          best;
  fx16_t          score_k;

  always_comb begin
    logic signed [47:0] acc;
    acc = '0;
    for (int n = 0; n < NF; n++) acc += 48'(wgt[k][n]) * 48'(f[n]);
    score_k = sat16((acc >>> FRAC) + 48'(bias[k]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run       <= 1'b0;
      out_valid <= 1'b0;
      k         <= '0;
      cls       <= '0;
      best      <= '0;
    end else begin
      out_valid <= 1'b0;
      if (start && !run) begin
        run <= 1'b1;
        k   <= '0;
      end else if (run) begin
        if (k == '0 || score_k > best) begin
          best <= score_k;
          cls  <= k;
        end
        if (int'(k) == NCL - 1) begin
          run       <= 1'b0;
          out_valid <= 1'b1;
        end else begin
          k <= k + CW'(1);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (start && !run) f <= feat;
    if (run) scores[k] <= score_k;
  end

endmodule
