// tb_interp_stage: feeds z and candidate words on two independent random streams
// and applies random output back-pressure for three steps; checks every blended
// state h = (1-z)*c + z*h_prev (fixed-point, tb_ref_pkg) on both the state write
// port and the output stream, the unit indices, and one step_done per H units.
module tb_interp_stage;
  import merinda_pkg::*;
  import tb_ref_pkg::*;
  localparam int H = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic z_valid = 0, z_ready, c_valid = 0, c_ready, h_we, out_valid, out_ready = 1, step_done;
  word_t z_data = 0, c_data = 0, h [H], h_data, out_data;
  logic [3:0] h_idx;
  interp_stage #(.H(H)) dut (.clk, .rst_n, .z_valid, .z_ready, .z_data, .c_valid, .c_ready,
    .c_data, .h, .h_we, .h_idx, .h_data, .out_valid, .out_ready, .out_data, .step_done);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  int zq [$], cq [$], wr [$], wi [$], outs [$], n_done;
  always @(negedge clk) begin
    out_ready = ($urandom_range(99) >= 30);
    #1;
    if (out_valid && out_ready) outs.push_back(int'(out_data));
    if (h_we) begin wr.push_back(int'(h_data)); wi.push_back(int'(h_idx)); end
    if (step_done) n_done++;
  end
  int zsent, csent;
  always @(posedge clk) begin
    if (z_valid && z_ready) zsent++;
    if (c_valid && c_ready) csent++;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int step = 0; step < 3; step++) begin
      int hp [H];
      foreach (h[i]) begin h[i] = word_t'(rnd(4096)); hp[i] = int'(h[i]); end
      zq.delete(); cq.delete(); wr.delete(); wi.delete(); outs.delete(); n_done = 0;
      for (int i = 0; i < H; i++) begin
        zq.push_back(int'($urandom_range(4096))); cq.push_back(rnd(4096));
      end
      @(negedge clk); zsent = 0; csent = 0;
      while (zsent < H || csent < H) begin
        @(negedge clk);
        z_valid = (zsent < H) && ($urandom_range(99) < 70);
        c_valid = (csent < H) && ($urandom_range(99) < 70);
        if (zsent < H) z_data = word_t'(zq[zsent]);
        if (csent < H) c_data = word_t'(cq[csent]);
      end
      z_valid = 0; c_valid = 0;
      repeat (30) @(negedge clk);
      check(wr.size() == H && outs.size() == H, $sformatf("step %0d: %0d writes %0d outputs", step, wr.size(), outs.size()));
      for (int i = 0; i < H && i < wr.size() && i < outs.size(); i++) begin
        int e;
        e = add_q(mul_q(4096 - zq[i], cq[i]), mul_q(zq[i], hp[i]));
        check(wr[i] == e && outs[i] == e && wi[i] == i,
              $sformatf("step %0d unit %0d: write %0d@%0d out %0d want %0d", step, i, wr[i], wi[i], outs[i], e));
      end
      check(n_done == 1, $sformatf("step_done %0d times", n_done));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
