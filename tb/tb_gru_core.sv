// tb_gru_core: runs the four-stage GRU pipeline on its own.
//
// Random weights and biases go in over the parameter bus and a random h_0 over the
// state write port; then the core is started for T = 6 steps while the inputs
// arrive with random gaps and the hidden-state output sees random back-pressure.
// Every output word and the final state are compared with a GRU step computed here
// in the same fixed-point rules (tb_ref_pkg). A second run of 4 steps with no gaps
// and no back-pressure measures the step launch interval: two matrix passes of
// H rows at NB beats each (2*H*NB clocks) plus a short pipeline tail, so the
// interval must lie in [2*H*NB, 2*H*NB + 16].
module tb_gru_core;
  import merinda_pkg::*;
  import tb_ref_pkg::*;
  localparam int H = 16, X = 2, C = X + H, NB = (C + 3) / 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  param_wr_t pwr = '0;
  logic h0_we = 0, x_valid = 0, x_ready, start = 0, busy, done, h_out_valid, h_out_ready = 1;
  logic [3:0] h0_idx = 0;
  word_t h0_data = 0, x_data = 0, h_out_data, h_final [H];
  logic [15:0] seq_len = 0;
  logic ev_step, ev_recur_wait, ev_rh_wait, ev_out_stall, ev_fifo_backlog;
  gru_core dut (.clk, .rst_n, .pwr, .h0_we, .h0_idx, .h0_data, .x_valid, .x_ready, .x_data,
    .start, .seq_len, .busy, .done, .h_out_valid, .h_out_ready, .h_out_data, .h_final,
    .ev_step, .ev_recur_wait, .ev_rh_wait, .ev_out_stall, .ev_fifo_backlog);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  int wur [H][C], wuz [H][C], wuh [H][C], br [H], bz [H], bh [H];
  task automatic wr_word(input param_sel_e s, input int r, input int c, input int d);
    @(negedge clk); pwr = '{we: 1'b1, sel: s, row: 16'(r), col: 16'(c), data: word_t'(d)};
  endtask

  int outs [$], gap_in, gap_out, cyc, launches [$], n_done;
  always @(posedge clk) begin
    cyc++;
    if (ev_step) launches.push_back(cyc);
    if (done) n_done++;
  end
  always @(negedge clk) begin
    h_out_ready = (gap_out == 0) || ($urandom_range(99) >= gap_out);
    if (h_out_valid && h_out_ready) outs.push_back(int'(h_out_data));
  end

  task automatic run(input int T, input int gi, input int go);
    int h [H], xs [$];
    int exp_words [$];
    gap_in = gi; gap_out = go;
    outs.delete(); launches.delete(); n_done = 0;
    foreach (h[i]) begin
      h[i] = rnd(2048);
      @(negedge clk); h0_we = 1; h0_idx = 4'(i); h0_data = word_t'(h[i]);
    end
    @(negedge clk); h0_we = 0;
    for (int k = 0; k < T * X; k++) xs.push_back(rnd(4096));
    for (int t = 0; t < T; t++) begin
      int z [H], rh [H], hn [H];
      int v [] = new[C];
      for (int j = 0; j < X; j++) v[j] = xs[t * X + j];
      for (int i = 0; i < H; i++) v[X + i] = h[i];
      for (int i = 0; i < H; i++) begin
        int w [] = new[C];
        foreach (w[c]) w[c] = wur[i][c];
        rh[i] = mul_q(sig_q(dot_q(w, v, br[i])), h[i]);
        foreach (w[c]) w[c] = wuz[i][c];
        z[i] = sig_q(dot_q(w, v, bz[i]));
      end
      for (int i = 0; i < H; i++) v[X + i] = rh[i];
      for (int i = 0; i < H; i++) begin
        int w [] = new[C];
        foreach (w[c]) w[c] = wuh[i][c];
        hn[i] = add_q(mul_q(4096 - z[i], tanh_q(dot_q(w, v, bh[i]))), mul_q(z[i], h[i]));
      end
      h = hn;
      foreach (h[i]) exp_words.push_back(h[i]);
    end
    @(negedge clk); seq_len = 16'(T); start = 1;
    @(negedge clk); start = 0;
    foreach (xs[k]) begin
      while ($urandom_range(99) < gap_in) @(negedge clk);
      x_valid = 1; x_data = word_t'(xs[k]);
      #1;
      while (!x_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      x_valid = 0;
    end
    wait (n_done == 1);
    repeat (5) @(negedge clk);
    check(outs.size() == T * H, $sformatf("%0d output words, want %0d", outs.size(), T * H));
    for (int k = 0; k < exp_words.size() && k < outs.size(); k++)
      check(outs[k] == exp_words[k], $sformatf("step %0d unit %0d: got %0d want %0d", k / H, k % H, outs[k], exp_words[k]));
    foreach (h[i]) check(int'(h_final[i]) == h[i], $sformatf("final state %0d", i));
    check(launches.size() == T, $sformatf("%0d launches, want %0d", launches.size(), T));
    check(!busy && n_done == 1, "busy after done or done not once");
    if (gi == 0 && go == 0)
      for (int s = 1; s < launches.size(); s++)
        check(launches[s] - launches[s-1] >= 2 * H * NB && launches[s] - launches[s-1] <= 2 * H * NB + 16,
              $sformatf("launch interval %0d, want %0d..%0d", launches[s] - launches[s-1], 2 * H * NB, 2 * H * NB + 16));
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < H; i++) begin
      for (int c = 0; c < C; c++) begin
        wur[i][c] = rnd(2500); wuz[i][c] = rnd(2500); wuh[i][c] = rnd(2500);
        wr_word(SEL_WUR, i, c, wur[i][c]); wr_word(SEL_WUZ, i, c, wuz[i][c]); wr_word(SEL_WUH, i, c, wuh[i][c]);
      end
      br[i] = rnd(2000); bz[i] = rnd(2000); bh[i] = rnd(2000);
      wr_word(SEL_BR, i, 0, br[i]); wr_word(SEL_BZ, i, 0, bz[i]); wr_word(SEL_BH, i, 0, bh[i]);
    end
    @(negedge clk); pwr = '0;
    run(6, 40, 40);
    run(4, 0, 0);
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
