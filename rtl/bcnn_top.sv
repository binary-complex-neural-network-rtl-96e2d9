// bcnn_top -- BCNN accelerator: NUM_KERNELS inference kernels side by side.
//
// The paper replicates its inference kernel as many times as the FPGA's LUTs
// allow and runs the copies concurrently, one frame each: nine kernels for
// the NIN network and eight for ResNet-18 on an Alveo U280 (5882 and 4938
// frames/s).  NUM_KERNELS defaults to nine, the NIN configuration.
//
// The host (over PCIe and the board DRAM, which are not part of this RTL)
// writes through one host write bus (bcnn_pkg::host_wr_t).  Images go to the
// kernel selected by hw_kernel; weights, CGBN parameters, masks and layer
// tables are written to all kernels at once, so every kernel holds the same
// network.  The paper draws a single weight store beside the kernels; giving
// each kernel its own copy is this design's choice, so that the kernels never
// contend for weight bandwidth.
//
// Each kernel's result (class and 10 scores) is written, when the kernel
// finishes, into the prediction result buffer at the kernel's index; if
// several kernels finish together they are written one per clock, lowest
// index first.  The buffer is read through pred_raddr / pred_rdata with one
// clock of latency.  start[k] starts kernel k on the image it holds; done[k]
// pulses when it has finished; result_valid[k] is set once its result is in
// the buffer and cleared by the next start[k].
//
// Lint may report rst_n as used both asynchronously and synchronously: the
// synchronous use is the disable-iff clause of the handshake assertions in
// bc_conv2d and bcnn_kernel, not a flip-flop, so it stands as is.
module bcnn_top
  import bcnn_pkg::*;
#(
  parameter int NUM_KERNELS = 9,
  parameter int P           = 16,
  parameter int MAX_LAYERS  = 20,
  localparam int KW         = (NUM_KERNELS > 1) ? $clog2(NUM_KERNELS) : 1,
  localparam int RW         = 4 + 16 * NCLS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  host_wr_t                hw,
  input  logic [KW-1:0]           hw_kernel,
  input  logic [NUM_KERNELS-1:0]  start,
  output logic [NUM_KERNELS-1:0]  busy,
  output logic [NUM_KERNELS-1:0]  done,
  output logic [NUM_KERNELS-1:0]  result_valid,
  input  logic [KW-1:0]           pred_raddr,
  output logic [RW-1:0]           pred_rdata
);

  logic [3:0]       k_cls    [NUM_KERNELS];
  fx16_t [NCLS-1:0] k_scores [NUM_KERNELS];

  for (genvar k = 0; k < NUM_KERNELS; k++) begin : g_kernel
    host_wr_t hw_k;
    always_comb begin
      hw_k    = hw;
      hw_k.en = hw.en && (hw.sel != HW_IMG || int'(hw_kernel) == k);
    end

    bcnn_kernel #(.P(P), .MAX_LAYERS(MAX_LAYERS)) u_kernel (
      .clk(clk), .rst_n(rst_n), .hw(hw_k), .start(start[k]),
      .busy(busy[k]), .done(done[k]),
      .pred_class(k_cls[k]), .pred_scores(k_scores[k]));
  end

  // ---- prediction result buffer ------------------------------------------------
  logic [NUM_KERNELS-1:0] pending;
  logic                   pr_we;
  logic [KW-1:0]          pr_waddr;
  logic [RW-1:0]          pr_wdata;

  always_comb begin
    pr_we    = 1'b0;
    pr_waddr = '0;
    pr_wdata = '0;
    for (int k = NUM_KERNELS - 1; k >= 0; k--) begin
      if (pending[k]) begin
        pr_we    = 1'b1;
        pr_waddr = KW'(k);
        pr_wdata = {k_scores[k], k_cls[k]};
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending      <= '0;
      result_valid <= '0;
    end else begin
      for (int k = 0; k < NUM_KERNELS; k++) begin
        if (done[k]) pending[k] <= 1'b1;
        else if (pr_we && int'(pr_waddr) == k) begin
          pending[k]      <= 1'b0;
          result_valid[k] <= 1'b1;
        end
        if (start[k]) result_valid[k] <= 1'b0;
      end
    end
  end

  sdp_ram #(.WIDTH(RW), .DEPTH(NUM_KERNELS)) u_pred (
    .clk(clk), .we(pr_we), .waddr(pr_waddr), .wdata(pr_wdata),
    .raddr(pred_raddr), .rdata(pred_rdata));

endmodule
