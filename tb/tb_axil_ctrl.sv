// tb_axil_ctrl: exercises the control register map over AXI4-Lite.
//
// Checks: SEQ_LEN write and read-back; CTRL write gives a one-clock start pulse and
// keeps the load_params bit; a start written while busy is ignored; STATUS shows
// busy while the (testbench-driven) accelerator is busy and done after run_done;
// CYCLES equals the number of busy clocks; a new start clears done. Write and read
// responses are held while the master stalls bready / rready.
module tb_axil_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic arvalid = 0, arready, rvalid, rready = 0;
  logic [3:0] awaddr = 0, araddr = 0;
  logic [31:0] wdata = 0, rdata;
  logic [1:0] bresp, rresp;
  logic start, load_params, busy = 0, run_done = 0;
  logic [15:0] seq_len;
  axil_ctrl dut (.clk, .rst_n, .awvalid, .awready, .awaddr, .wvalid, .wready, .wdata,
    .bvalid, .bready, .bresp, .arvalid, .arready, .araddr, .rvalid, .rready, .rdata, .rresp,
    .start, .load_params, .seq_len, .busy, .run_done);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  int n_start;
  int n_busy;
  always @(posedge clk) begin if (start) n_start++; if (busy) n_busy++; end

  task automatic wr(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); awvalid = 1; wvalid = 1; awaddr = a; wdata = d;
    #1; while (!(awready && wready)) begin @(negedge clk); #1; end
    @(negedge clk); awvalid = 0; wvalid = 0;
    repeat ($urandom_range(3)) begin @(negedge clk); check(bvalid, "bvalid dropped before bready"); end
    bready = 1; check(bvalid && bresp == 2'b00, "write response");
    @(negedge clk); bready = 0;
  endtask
  task automatic rd(input logic [3:0] a, output logic [31:0] d);
    logic [31:0] first;
    @(negedge clk); arvalid = 1; araddr = a;
    #1; while (!arready) begin @(negedge clk); #1; end
    @(negedge clk); arvalid = 0;
    check(rvalid, "rvalid one clock after the address");
    first = rdata;
    repeat ($urandom_range(3)) begin @(negedge clk); check(rvalid && rdata == first, "read data not held"); end
    rready = 1; d = rdata; check(rresp == 2'b00, "read response");
    @(negedge clk); rready = 0;
  endtask

  initial begin
    logic [31:0] d;
    repeat (2) @(negedge clk); rst_n = 1;
    rd(4'h4, d); check(d == 0, $sformatf("STATUS after reset %h", d));
    wr(4'h8, 32'd200); check(seq_len == 16'd200, "seq_len output");
    rd(4'h8, d); check(d == 200, $sformatf("SEQ_LEN read %0d", d));
    n_start = 0;
    wr(4'h0, 32'h3);
    check(n_start == 1 && load_params, $sformatf("start pulses %0d, load %b", n_start, load_params));
    rd(4'h0, d); check(d == 32'h2, $sformatf("CTRL read %h", d));
    n_busy = 0;
    @(negedge clk); busy = 1;
    repeat (36) @(negedge clk);
    rd(4'h4, d); check(d == 32'h1, $sformatf("STATUS while busy %h", d));
    wr(4'h0, 32'h1);      // ignored while busy
    @(negedge clk); busy = 0; run_done = 1;
    @(negedge clk); run_done = 0;
    check(n_start == 1, "start accepted while busy");
    rd(4'h4, d); check(d == 32'h2, $sformatf("STATUS after run %h", d));
    rd(4'hC, d); check(d == 32'(n_busy) && n_busy > 36, $sformatf("CYCLES %0d, busy clocks %0d", d, n_busy));
    wr(4'h0, 32'h1);
    check(n_start == 2 && !load_params, "second start / load bit cleared");
    rd(4'h4, d); check(d == 32'h0, $sformatf("STATUS after new start %h", d));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
