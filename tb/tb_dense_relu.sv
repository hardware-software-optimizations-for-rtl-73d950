// tb_dense_relu: loads a random Wy (8 x 16) and by, with the biases of some rows
// pushed far negative, runs the layer on random hidden states, and compares each
// output with a dot product computed here: ReLU for the first P = 6 outputs, linear
// for the last Q = 2. Checks that clamping happened and that a negative linear
// output passed through. Without back-pressure the last output is valid
// OUT*NB+4 clocks after start.
module tb_dense_relu;
  import merinda_pkg::*;
  import tb_ref_pkg::*;
  localparam int H = 16, P = 6, Q = 2, OUT = P + Q, NB = (H + 3) / 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  param_wr_t pwr = '0;
  logic start = 0, busy, done, out_valid, out_ready = 1;
  word_t h [H], out_data;
  dense_relu #(.H(H), .P(P), .Q(Q)) dut (.clk, .rst_n, .pwr, .start, .busy, .done, .h,
    .out_valid, .out_ready, .out_data);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  int wy [OUT][H], by [OUT];
  int got [$], cyc, t_start, t_last, bp, n_clamp, n_neg_lin;
  always @(posedge clk) cyc++;
  always @(negedge clk) begin
    out_ready = (bp == 0) || ($urandom_range(99) >= bp);
    if (out_valid && out_ready) begin got.push_back(int'(out_data)); t_last = cyc; end
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int j = 0; j < OUT; j++) begin
      for (int c = 0; c < H; c++) begin
        wy[j][c] = rnd(3000);
        @(negedge clk); pwr = '{we: 1'b1, sel: SEL_WY, row: 16'(j), col: 16'(c), data: word_t'(wy[j][c])};
      end
      by[j] = (j % 3 == 0) ? -20000 : rnd(2000);
      @(negedge clk); pwr = '{we: 1'b1, sel: SEL_BY, row: 16'(j), col: 16'(0), data: word_t'(by[j])};
    end
    @(negedge clk); pwr = '0;
    for (int pass = 0; pass < 3; pass++) begin
      int hv [] = new[H];
      bp = (pass == 2) ? 50 : 0;
      foreach (h[i]) begin h[i] = word_t'(rnd(4096)); hv[i] = int'(h[i]); end
      got.delete();
      @(negedge clk); start = 1; t_start = cyc + 1;
      @(negedge clk); start = 0;
      wait (got.size() == OUT);
      @(negedge clk);
      for (int j = 0; j < OUT; j++) begin
        int w [] = new[H];
        int e;
        foreach (w[c]) w[c] = wy[j][c];
        e = dot_q(w, hv, by[j]);
        if (j < P && e < 0) begin e = 0; n_clamp++; end
        if (j >= P && e < 0) n_neg_lin++;
        check(got[j] == e, $sformatf("pass %0d out %0d: got %0d want %0d", pass, j, got[j], e));
      end
      if (bp == 0)
        check(t_last - t_start + 1 == OUT * NB + 4,
              $sformatf("last output after %0d clocks, want %0d", t_last - t_start + 1, OUT * NB + 4));
    end
    check(n_clamp > 0, "ReLU never clamped");
    check(n_neg_lin > 0, "no negative linear output seen");
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
