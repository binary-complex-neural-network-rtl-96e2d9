// sdp_ram -- simple dual-port on-chip RAM (one write port, one read port).
//
// Models the BRAM/URAM buffers of the accelerator: the image input buffer,
// the binary weight matrix, the CGBN parameter banks, the activation
// ping-pong buffers and the prediction result buffer.  The paper only names
// these memories; the port shape is this design's choice.
//
// Timing: a write lands at the rising edge where we is high.  A read returns
// mem[raddr] one clock after raddr is presented (registered output, as in a
// block RAM); reading the address being written returns the old word.
// The array is not reset.
module sdp_ram #(
  parameter int WIDTH = 256,
  parameter int DEPTH = 1024,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
