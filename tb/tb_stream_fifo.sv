// tb_stream_fifo: pushes 3000 random words through a depth-8 FIFO with random
// producer and consumer gaps, compares the order with a queue kept here, checks the
// count against the queue length, that in_ready falls exactly when full, that a
// word written into an empty FIFO is readable on the next clock, and that full
// depth and simultaneous push/pop both occur.
module tb_stream_fifo;
  localparam int D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] in_data = 0, out_data;
  logic [3:0] count;
  stream_fifo #(.WIDTH(16), .DEPTH(D)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .count);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  logic [15:0] q [$];
  int sent = 0, n_full = 0, n_both = 0;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // fall-through latency
    in_valid = 1; in_data = 16'h1234;
    @(negedge clk); in_valid = 0;
    check(out_valid && out_data == 16'h1234, "word not visible one clock after push");
    out_ready = 1; @(negedge clk); out_ready = 0;
    check(!out_valid && count == 0, "not empty after pop");
    while (sent < 3000) begin
      bit push, pop;
      in_valid  = ($urandom_range(99) < 60);
      in_data   = 16'($urandom);
      out_ready = ($urandom_range(99) < (sent < 1500 ? 40 : 70));
      #1;
      check(in_ready == (q.size() < D), $sformatf("in_ready %0d with %0d stored", in_ready, q.size()));
      check(out_valid == (q.size() > 0), "out_valid wrong");
      check(int'(count) == q.size(), $sformatf("count %0d want %0d", count, q.size()));
      push = in_valid && in_ready;
      pop  = out_valid && out_ready;
      if (pop) check(out_data == q[0], $sformatf("out %h want %h", out_data, q[0]));
      if (q.size() == D) n_full++;
      if (push && pop) n_both++;
      @(negedge clk);
      if (pop) void'(q.pop_front());
      if (push) begin q.push_back(in_data); sent++; end
    end
    check(n_full > 0, "never full");
    check(n_both > 0, "never pushed and popped in one clock");
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
