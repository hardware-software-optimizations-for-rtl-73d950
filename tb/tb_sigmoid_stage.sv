// tb_sigmoid_stage: feeds three steps of random {r_pre, z_pre} pairs with random
// input gaps and random z back-pressure; checks every z against the sigmoid table
// rule, every rh write (index and value r*h_prev) and that rh_done pulses exactly
// once per step, with the last unit. Without gaps, the stage must take one pair per
// clock.
module tb_sigmoid_stage;
  import merinda_pkg::*;
  import tb_ref_pkg::*;
  localparam int H = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, z_valid, z_ready = 1, rh_we, rh_done;
  logic [31:0] in_data = 0;
  word_t h [H], z_data, rh_data;
  logic [3:0] rh_idx;
  sigmoid_stage #(.H(H)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .h,
    .z_valid, .z_ready, .z_data, .rh_we, .rh_idx, .rh_data, .rh_done);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  int rp [$], zp [$];
  int zs [$], rhs [$], rhi [$], dones [$];
  int gap, zbp, n_in, cyc, t_first, t_last;
  always @(posedge clk) cyc++;
  always @(negedge clk) begin
    z_ready = (zbp == 0) || ($urandom_range(99) >= zbp);
    #1;
    if (z_valid && z_ready) zs.push_back(int'(z_data));
    if (rh_we) begin rhs.push_back(int'(rh_data)); rhi.push_back(int'(rh_idx)); end
    if (rh_done) dones.push_back(rhs.size());
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int step = 0; step < 3; step++) begin
      gap = (step == 0) ? 0 : 40; zbp = (step == 0) ? 0 : 40;
      foreach (h[i]) h[i] = word_t'(rnd(4096));
      rp.delete(); zp.delete(); zs.delete(); rhs.delete(); rhi.delete(); dones.delete();
      n_in = 0;
      while (n_in < H) begin
        @(negedge clk);
        if ($urandom_range(99) < gap) begin in_valid = 0; continue; end
        rp.push_back(rnd(32768)); zp.push_back(rnd(32768));
        in_valid = 1; in_data = {16'(rp[$]), 16'(zp[$])};
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        if (n_in == 0) t_first = cyc;
        t_last = cyc;
        n_in++;
        @(posedge clk);
      end
      @(negedge clk); in_valid = 0;
      repeat (20) @(negedge clk);
      if (step == 0) check(t_last - t_first == H - 1, $sformatf("took %0d clocks for %0d pairs", t_last - t_first + 1, H));
      check(zs.size() == H && rhs.size() == H, $sformatf("step %0d: %0d z, %0d rh", step, zs.size(), rhs.size()));
      for (int i = 0; i < H && i < zs.size() && i < rhs.size(); i++) begin
        check(zs[i] == sig_q(zp[i]), $sformatf("step %0d unit %0d z %0d want %0d", step, i, zs[i], sig_q(zp[i])));
        check(rhi[i] == i, "rh index");
        check(rhs[i] == mul_q(sig_q(rp[i]), int'(h[i])), $sformatf("step %0d unit %0d rh %0d", step, i, rhs[i]));
      end
      check(dones.size() == 1 && dones[0] == H, "rh_done not once at the last unit");
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
