// tb_sdp_ram -- self-checking test of the simple dual-port RAM.
//
// Random writes and reads against a shadow array, checking the one-clock
// read latency and that a read of the address being written returns the
// old word.
module tb_sdp_ram;
  localparam int WIDTH = 40, DEPTH = 48;

  logic clk = 0;
  always #5 clk = ~clk;

  logic we;
  logic [5:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  sdp_ram #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk) we = 1; waddr = 6'(a); wdata = {8'(a), $urandom}; shadow[a] = wdata;
    end
    for (int t = 0; t < 500; t++) begin
      logic [WIDTH-1:0] exp_d;
      @(negedge clk);
      raddr = 6'($urandom_range(0, DEPTH - 1));
      we = $urandom_range(0, 1);
      waddr = ($urandom_range(0, 3) == 0) ? raddr : 6'($urandom_range(0, DEPTH - 1));
      wdata = {$urandom, $urandom};
      exp_d = shadow[raddr];
      if (we) shadow[waddr] = wdata;
      @(negedge clk);
      we = 0;
      checks++;
      if (rdata !== exp_d) begin
        failures++;
        if (failures < 5) $display("addr %0d: got %h exp %h", raddr, rdata, exp_d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
