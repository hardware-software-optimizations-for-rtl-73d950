// tb_tanh_lut: sweeps every 16-bit input of the tanh table. Each output is compared
// with the true function at that input (tolerance 140 LSB of 2^-12: half an
// interval of 1/16 times the largest slope, plus rounding) and exactly with the
// table rule of tb_ref_pkg; the output must be monotonic and arrive one clock after
// the input, and hold while en is low.
module tb_tanh_lut;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en = 0;
  logic signed [15:0] x = 0, y;
  tanh_lut #(.DATA_W(16), .FRAC(12)) dut (.clk, .en, .x, .y);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin
    int prev = -100000;
    for (int i = -32768; i < 32768; i += 7) begin
      real v, f;
      @(negedge clk); en = 1; x = 16'(i);
      @(negedge clk); en = 0; x = 16'($urandom);
      @(negedge clk);
      v = real'(i) / 4096.0;
      f = ($exp(2.0*v) - 1.0) / ($exp(2.0*v) + 1.0);
      check(y == 16'(tanh_q(i)), $sformatf("x=%0d: y=%0d, table rule %0d", i, y, tanh_q(i)));
      check(((real'(y) > 4096.0 * f) ? real'(y) - 4096.0 * f : 4096.0 * f - real'(y)) <= 140.0, $sformatf("x=%0d: y=%0d far from %f", i, y, 4096.0 * f));
      check(int'(y) >= prev, $sformatf("not monotonic at x=%0d", i));
      prev = int'(y);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
