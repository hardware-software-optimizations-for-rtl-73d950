// tb_candidate_stage: loads random [Wh|Uh] and bh, runs stage 3 on random x and rh
// for two steps (the second with random back-pressure) and compares each candidate
// with tanh of a dot product computed here (tb_ref_pkg table rule). Without
// back-pressure the last candidate must be valid H*NB+4 clocks after start.
module tb_candidate_stage;
  import merinda_pkg::*;
  import tb_ref_pkg::*;
  localparam int H = 16, X = 2, C = X + H, NB = (C + 3) / 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  param_wr_t pwr = '0;
  logic start = 0, busy, done, out_valid, out_ready = 1;
  word_t x [X], rh [H], out_data;
  candidate_stage #(.H(H), .X(X)) dut (.clk, .rst_n, .pwr, .start, .busy, .done, .x, .rh,
    .out_valid, .out_ready, .out_data);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  int wh [H][C], bh [H];
  int got [$], cyc, t_start, t_last, bp;
  always @(posedge clk) cyc++;
  always @(negedge clk) begin
    out_ready = (bp == 0) || ($urandom_range(99) >= bp);
    if (out_valid && out_ready) begin got.push_back(int'(out_data)); t_last = cyc; end
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < H; i++) begin
      for (int c = 0; c < C; c++) begin
        wh[i][c] = rnd(3000);
        @(negedge clk); pwr = '{we: 1'b1, sel: SEL_WUH, row: 16'(i), col: 16'(c), data: word_t'(wh[i][c])};
      end
      bh[i] = rnd(3000);
      @(negedge clk); pwr = '{we: 1'b1, sel: SEL_BH, row: 16'(i), col: 16'(0), data: word_t'(bh[i])};
    end
    @(negedge clk); pwr = '0;
    for (int step = 0; step < 2; step++) begin
      int v [] = new[C];
      bp = step * 50;
      foreach (x[j]) begin x[j] = word_t'(rnd(8000)); v[j] = int'(x[j]); end
      foreach (rh[i]) begin rh[i] = word_t'(rnd(4096)); v[X + i] = int'(rh[i]); end
      got.delete();
      @(negedge clk); start = 1; t_start = cyc + 1;
      @(negedge clk); start = 0;
      wait (got.size() == H);
      @(negedge clk);
      for (int i = 0; i < H; i++) begin
        int w [] = new[C];
        int e;
        foreach (w[c]) w[c] = wh[i][c];
        e = tanh_q(dot_q(w, v, bh[i]));
        check(got[i] == e, $sformatf("step %0d unit %0d: got %0d want %0d", step, i, got[i], e));
      end
      if (bp == 0)
        check(t_last - t_start + 1 == H * NB + 4,
              $sformatf("last candidate after %0d clocks, want %0d", t_last - t_start + 1, H * NB + 4));
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
