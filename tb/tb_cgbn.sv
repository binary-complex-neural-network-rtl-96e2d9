// tb_cgbn -- self-checking test of the CGBN unit.
//
// Drives random conv sums and random parameters, computes the CGBN equation
// here with integer arithmetic (floor division for the Q8.8 rescale and
// saturation to 16 bits) and compares both output parts one clock later.
module tb_cgbn;
  import bcnn_pkg::*;

  localparam int L = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  fx16_t [L-1:0] x_r, x_i, y_r, y_i;
  bn_param_t [L-1:0] prm;

  cgbn #(.L(L)) dut (.*);

  int checks = 0, failures = 0;

  function automatic longint fdiv256(input longint v);
    return (v >= 0) ? v / 256 : -((-v + 255) / 256);
  endfunction
  function automatic longint sat(input longint v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  function automatic fx16_t r16(input int lo, input int hi);
    return fx16_t'($urandom_range(0, hi - lo) + lo);
  endfunction

  initial begin
    in_valid = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      longint er[L], ei[L];
      @(negedge clk);
      in_valid = 1;
      for (int l = 0; l < L; l++) begin
        longint s;
        x_r[l] = r16(-384, 256); x_i[l] = r16(-384, 256);
        prm[l].mu_r = r16(-50, 50); prm[l].mu_i = r16(-50, 50);
        prm[l].k_r = r16(1, 600);   prm[l].k_i = r16(1, 600);
        prm[l].g_r = r16(-512, 512); prm[l].g_i = r16(-512, 512);
        prm[l].b_r = r16(-2000, 2000); prm[l].b_i = r16(-2000, 2000);
        s = (longint'(x_r[l]) - prm[l].mu_r) * prm[l].k_r - (longint'(x_i[l]) - prm[l].mu_i) * prm[l].k_i;
        er[l] = sat(fdiv256(s * prm[l].g_r) + prm[l].b_r);
        ei[l] = sat(fdiv256(s * prm[l].g_i) + prm[l].b_i);
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int l = 0; l < L; l++) begin
        checks += 2;
        if (longint'(y_r[l]) != er[l] || longint'(y_i[l]) != ei[l]) begin
          failures++;
          if (failures < 5) $display("lane %0d: got %0d,%0d exp %0d,%0d", l, y_r[l], y_i[l], er[l], ei[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
