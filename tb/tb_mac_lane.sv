// tb_mac_lane: checks one MAC lane against a running sum kept here. Random
// products are accumulated with random enables and clears (a clear starts a new sum
// with the current product); the sum is checked every clock, so the one-clock
// latency and the one-product-per-clock rate are checked too.
module tb_mac_lane;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0, clr = 0;
  logic signed [15:0] a = 0, b = 0;
  logic signed [47:0] acc;
  mac_lane #(.DATA_W(16), .ACC_W(48)) dut (.clk, .rst_n, .en, .clr, .a, .b, .acc);

  int checks = 0, failures = 0;
  longint model = 0;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (acc != 0) begin failures++; $display("FAIL: acc not cleared by reset"); end
    for (int i = 0; i < 2000; i++) begin
      en  = ($urandom_range(9) != 0);
      clr = ($urandom_range(15) == 0);
      a   = 16'($urandom);
      b   = 16'($urandom);
      if (en) model = (clr ? 0 : model) + longint'(a) * longint'(b);
      @(negedge clk);
      checks++;
      if (acc != 48'(model)) begin
        failures++;
        if (failures < 10) $display("FAIL: step %0d acc %0d want %0d", i, acc, model);
      end
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
