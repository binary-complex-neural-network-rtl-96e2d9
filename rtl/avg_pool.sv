// avg_pool -- 2x2 average pooling on a stream of pixel vectors.
//
// The paper picks average pooling for the hardware (it beat spectral and max
// pooling in accuracy at a cost of O(MN)) and places the optional pool right
// after the binarized convolution, before batch normalization.  The window
// size is not given; 2x2 with stride 2 is this design's choice.
//
// How: pixel vectors (N lanes of 16-bit conv results) arrive in raster order.
// On even rows, pairs of horizontal neighbours are summed into a line buffer
// of width/2 partial sums; on odd rows the two pixels below are added and,
// at each odd column, the 4-pixel sum shifted right by 2 (floor of the
// average) is emitted.  Output vectors therefore come out in raster order of
// the half-size image.  With en = 0 the vectors pass unchanged (layers
// without pooling).  start clears the row/column position.
//
// Interface: valid/ready on both sides, one vector per clock; the output is
// registered (one clock of latency).  width is the input image width (even).
module avg_pool
  import bcnn_pkg::*;
#(
  parameter int N     = 256,
  parameter int W_MAX = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              en,
  input  logic [5:0]        width,
  input  logic              in_valid,
  output logic              in_ready,
  input  fx16_t [N-1:0]     in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output fx16_t [N-1:0]     out_data
);

  typedef logic signed [17:0] sum18_t;

  sum18_t [N-1:0] line [W_MAX/2];
  logic [5:0] col;
  logic       row_odd;
  logic       take;

  assign in_ready = !out_valid || out_ready;
  assign take     = in_valid && in_ready;

  localparam int LW = $clog2(W_MAX / 2);
  logic [LW-1:0] lx;
  assign lx = LW'(col >> 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col       <= '0;
      row_odd   <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (start) begin
        col     <= '0;
        row_odd <= 1'b0;
      end else if (take) begin
        if (!en) begin
          out_valid <= 1'b1;
        end else begin
          if (row_odd && col[0]) out_valid <= 1'b1;
          if (col == width - 6'd1) begin
            col     <= '0;
            row_odd <= !row_odd;
          end else begin
            col <= col + 6'd1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (take) begin
      if (!en) begin
        out_data <= in_data;
      end else begin
        for (int n = 0; n < N; n++) begin
          sum18_t s;
          s = line[lx][n] + sum18_t'(in_data[n]);
          if (!row_odd && !col[0]) line[lx][n] <= sum18_t'(in_data[n]);
          else                     line[lx][n] <= s;
          if (row_odd && col[0])   out_data[n] <= fx16_t'(s >>> 2);
        end
      end
    end
  end

endmodule
