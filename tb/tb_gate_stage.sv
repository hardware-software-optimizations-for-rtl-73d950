// tb_gate_stage: loads random [Wr|Ur], [Wz|Uz], br, bz through the parameter bus,
// runs stage 1 on random x and h for three steps (the last with random
// back-pressure) and compares every {r_pre, z_pre} pair with dot products computed
// here. Without back-pressure the last pair must be valid H*NB+3 clocks after start
// (NB = ceil((X+H)/4) beats of one clock each with four banks).
module tb_gate_stage;
  import merinda_pkg::*;
  import tb_ref_pkg::*;
  localparam int H = 16, X = 2, C = X + H, NB = (C + 3) / 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  param_wr_t pwr = '0;
  logic start = 0, busy, done, out_valid, out_ready = 1;
  word_t x [X], h [H];
  logic [31:0] out_data;
  gate_stage #(.H(H), .X(X)) dut (.clk, .rst_n, .pwr, .start, .busy, .done, .x, .h,
    .out_valid, .out_ready, .out_data);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  int wr [H][C], wz [H][C], br [H], bz [H];
  task automatic wr_word(input param_sel_e s, input int r, input int c, input int d);
    @(negedge clk); pwr = '{we: 1'b1, sel: s, row: 16'(r), col: 16'(c), data: word_t'(d)};
  endtask

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
        wr[i][c] = rnd(3000); wz[i][c] = rnd(3000);
        wr_word(SEL_WUR, i, c, wr[i][c]); wr_word(SEL_WUZ, i, c, wz[i][c]);
      end
      br[i] = rnd(3000); bz[i] = rnd(3000);
      wr_word(SEL_BR, i, 0, br[i]); wr_word(SEL_BZ, i, 0, bz[i]);
    end
    @(negedge clk); pwr = '0;
    for (int step = 0; step < 3; step++) begin
      int v [] = new[C];
      bp = (step == 2) ? 50 : 0;
      foreach (x[j]) begin x[j] = word_t'(rnd(8000)); v[j] = int'(x[j]); end
      foreach (h[i]) begin h[i] = word_t'(rnd(4096)); v[X + i] = int'(h[i]); end
      got.delete();
      @(negedge clk); start = 1; t_start = cyc + 1;
      @(negedge clk); start = 0;
      wait (got.size() == H);
      @(negedge clk);
      for (int i = 0; i < H; i++) begin
        int w1 [] = new[C];
        int w2 [] = new[C];
        int er, ez;
        foreach (w1[c]) begin w1[c] = wr[i][c]; w2[c] = wz[i][c]; end
        er = dot_q(w1, v, br[i]); ez = dot_q(w2, v, bz[i]);
        check(got[i] == int'({16'(er), 16'(ez)}),
              $sformatf("step %0d unit %0d: got %h want %04h%04h", step, i, got[i], 16'(er), 16'(ez)));
      end
      if (bp == 0)
        check(t_last - t_start + 1 == H * NB + 3,
              $sformatf("last pair after %0d clocks, want %0d", t_last - t_start + 1, H * NB + 3));
      check(!busy, "still busy after all results");
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
