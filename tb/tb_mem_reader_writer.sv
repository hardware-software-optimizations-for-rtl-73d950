// tb_mem_reader_writer: checks the stream unpacking and packing.
//
// Instance A has the default sizes (H = 16, X = 2, OUT = 8). A run with parameter
// loading and T = 3 streams 128-bit beats with random gaps; every parameter write
// (array, row, column, value), every h_0 write, core_start and every input word
// (taken with random x_ready stalls) are compared with the word list built here.
// Its writer receives T*H state words then OUT dense words with random gaps and
// random m_axis back-pressure, and the packed beats, tlast and done are checked.
// A second run without parameter loading must produce no parameter writes.
// Instance B (H = 4, X = 3, OUT = 3) only exercises the writer with 15 result words,
// so the tlast beat carries 7 words and one zero pad word.
module tb_mem_reader_writer;
  import merinda_pkg::*;
  import tb_ref_pkg::*;
  localparam int H = 16, X = 2, OUT = 8, C = X + H, WPB = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 12) $display("FAIL: %s", what); end
  endtask

  // ---------------- instance A ----------------
  logic start = 0, load = 0, busy, done, s_tvalid = 0, s_tready, h0_we, core_start;
  logic x_valid, x_ready = 0, h_valid = 0, h_ready, y_valid = 0, y_ready;
  logic m_tvalid, m_tready = 0, m_tlast;
  logic [15:0] seq_len = 0;
  logic [127:0] s_tdata = 0, m_tdata;
  param_wr_t pwr;
  logic [3:0] h0_idx;
  word_t h0_data, x_data, h_data = 0, y_data = 0;
  mem_reader_writer dut (.clk, .rst_n, .start, .load_params(load), .seq_len, .busy, .done,
    .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready), .s_axis_tdata(s_tdata),
    .pwr, .h0_we, .h0_idx, .h0_data, .core_start, .x_valid, .x_ready, .x_data,
    .h_valid, .h_ready, .h_data, .y_valid, .y_ready, .y_data,
    .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .m_axis_tdata(m_tdata), .m_axis_tlast(m_tlast));

  // ---------------- instance B ----------------
  localparam int HB = 4, XB = 3, OB = 3;
  logic startb = 0, busyb, doneb, s_treadyb, h0_web, core_startb, x_validb;
  logic h_validb = 0, h_readyb, y_validb = 0, y_readyb, m_tvalidb, m_treadyb = 0, m_tlastb;
  logic [127:0] m_tdatab;
  param_wr_t pwrb;
  logic [1:0] h0_idxb;
  word_t h0_datab, x_datab, h_datab = 0, y_datab = 0;
  mem_reader_writer #(.H(HB), .X(XB), .OUT(OB)) dutb (.clk, .rst_n, .start(startb), .load_params(1'b0),
    .seq_len, .busy(busyb), .done(doneb),
    .s_axis_tvalid(1'b0), .s_axis_tready(s_treadyb), .s_axis_tdata(128'd0),
    .pwr(pwrb), .h0_we(h0_web), .h0_idx(h0_idxb), .h0_data(h0_datab), .core_start(core_startb),
    .x_valid(x_validb), .x_ready(1'b0), .x_data(x_datab),
    .h_valid(h_validb), .h_ready(h_readyb), .h_data(h_datab), .y_valid(y_validb), .y_ready(y_readyb), .y_data(y_datab),
    .m_axis_tvalid(m_tvalidb), .m_axis_tready(m_treadyb), .m_axis_tdata(m_tdatab), .m_axis_tlast(m_tlastb));

  // recorded traffic (sampled at rising edges, before the design updates)
  int pw_sel [$], pw_row [$], pw_col [$], pw_dat [$], h0_i [$], h0_d [$], xs_got [$];
  int n_core_start, h0_at_start, n_done, n_doneb;
  logic [127:0] beats [$], beatsb [$];
  bit lasts [$], lastsb [$];
  int in_beat, h_sent, y_sent, h_sentb, y_sentb;
  always @(posedge clk) begin
    if (pwr.we) begin pw_sel.push_back(int'(pwr.sel)); pw_row.push_back(int'(pwr.row));
                      pw_col.push_back(int'(pwr.col)); pw_dat.push_back(int'(pwr.data)); end
    if (h0_we) begin h0_i.push_back(int'(h0_idx)); h0_d.push_back(int'(h0_data)); end
    if (core_start) begin n_core_start++; h0_at_start = h0_i.size(); end
    if (x_valid && x_ready) xs_got.push_back(int'(x_data));
    if (s_tvalid && s_tready) in_beat++;
    if (h_valid && h_ready) h_sent++;
    if (y_valid && y_ready) y_sent++;
    if (m_tvalid && m_tready) begin beats.push_back(m_tdata); lasts.push_back(m_tlast); end
    if (done) n_done++;
    if (h_validb && h_readyb) h_sentb++;
    if (y_validb && y_readyb) y_sentb++;
    if (m_tvalidb && m_treadyb) begin beatsb.push_back(m_tdatab); lastsb.push_back(m_tlastb); end
    if (doneb) n_doneb++;
  end

  int in_words [$], res [$], resb [$];
  int nbeats, gap;
  always @(negedge clk) begin
    x_ready  = ($urandom_range(99) >= gap);
    m_tready = ($urandom_range(99) >= gap);
    m_treadyb = ($urandom_range(99) >= gap);
    s_tvalid = (in_beat < nbeats) && ($urandom_range(99) >= gap);
    for (int k = 0; k < WPB; k++)
      s_tdata[k*16 +: 16] = (in_beat * WPB + k < in_words.size()) ? 16'(in_words[in_beat * WPB + k]) : 16'hDEAD;
    h_valid = (h_sent < res.size() - OUT) && ($urandom_range(99) >= gap);
    h_data  = word_t'((h_sent < res.size()) ? res[h_sent] : 0);
    y_valid = (y_sent < OUT) && (h_sent == res.size() - OUT) && ($urandom_range(99) >= gap);
    y_data  = word_t'(res[res.size() - OUT + ((y_sent < OUT) ? y_sent : 0)]);
    h_validb = (h_sentb < resb.size() - OB) && ($urandom_range(99) >= gap);
    h_datab  = word_t'((h_sentb < resb.size()) ? resb[h_sentb] : 0);
    y_validb = (y_sentb < OB) && (h_sentb == resb.size() - OB) && ($urandom_range(99) >= gap);
    y_datab  = word_t'(resb[resb.size() - OB + ((y_sentb < OB) ? y_sentb : 0)]);
  end

  task automatic check_beats(input logic [127:0] bs [$], input bit ls [$], input int words [$], input string who);
    int nb = (words.size() + WPB - 1) / WPB;
    check(bs.size() == nb, $sformatf("%s: %0d beats, want %0d", who, bs.size(), nb));
    for (int b = 0; b < nb && b < bs.size(); b++) begin
      check(ls[b] == (b == nb - 1), $sformatf("%s: beat %0d tlast %b", who, b, ls[b]));
      for (int k = 0; k < WPB; k++) begin
        int e = (b * WPB + k < words.size()) ? words[b * WPB + k] : 0;
        check(int'(signed'(bs[b][k*16 +: 16])) == e,
              $sformatf("%s: beat %0d word %0d = %0d, want %0d", who, b, k, signed'(bs[b][k*16 +: 16]), e));
      end
    end
  endtask

  task automatic run(input int T, input bit ld);
    int exp_sel [$], exp_row [$], exp_col [$], exp_dat [$], h0 [$], xw [$];
    pw_sel.delete(); pw_row.delete(); pw_col.delete(); pw_dat.delete(); h0_i.delete(); h0_d.delete();
    xs_got.delete(); beats.delete(); lasts.delete(); in_words.delete(); res.delete();
    n_core_start = 0; n_done = 0; in_beat = 0; h_sent = 0; y_sent = 0;
    if (ld) begin
      for (int s = 0; s < 8; s++) begin
        int nr = (s == 6 || s == 7) ? OUT : H;
        int nc = (s < 3) ? C : (s == 6) ? H : 1;
        for (int r = 0; r < nr; r++) for (int c = 0; c < nc; c++) begin
          exp_sel.push_back(s); exp_row.push_back(r); exp_col.push_back(c);
          exp_dat.push_back(rnd(32768)); in_words.push_back(exp_dat[$]);
        end
      end
    end
    for (int i = 0; i < H; i++) begin h0.push_back(rnd(32768)); in_words.push_back(h0[$]); end
    for (int k = 0; k < T * X; k++) begin xw.push_back(rnd(32768)); in_words.push_back(xw[$]); end
    for (int k = 0; k < T * H + OUT; k++) res.push_back(rnd(32768));
    nbeats = (in_words.size() + WPB - 1) / WPB;
    @(negedge clk); seq_len = 16'(T); load = ld; start = 1;
    @(negedge clk); start = 0;
    wait (n_done == 1 && in_beat == nbeats && xs_got.size() == T * X);
    repeat (5) @(negedge clk);
    check(pw_sel.size() == exp_sel.size(), $sformatf("%0d parameter writes, want %0d", pw_sel.size(), exp_sel.size()));
    for (int k = 0; k < exp_sel.size() && k < pw_sel.size(); k++)
      check(pw_sel[k] == exp_sel[k] && pw_row[k] == exp_row[k] && pw_col[k] == exp_col[k] && pw_dat[k] == exp_dat[k],
            $sformatf("param write %0d: (%0d,%0d,%0d,%0d) want (%0d,%0d,%0d,%0d)", k, pw_sel[k], pw_row[k], pw_col[k],
                      pw_dat[k], exp_sel[k], exp_row[k], exp_col[k], exp_dat[k]));
    check(h0_i.size() == H, $sformatf("%0d h0 writes", h0_i.size()));
    for (int i = 0; i < H && i < h0_i.size(); i++)
      check(h0_i[i] == i && h0_d[i] == h0[i], $sformatf("h0 write %0d", i));
    check(n_core_start == 1 && h0_at_start == H, $sformatf("core_start %0d times, after %0d h0 words", n_core_start, h0_at_start));
    check(xs_got.size() == T * X, $sformatf("%0d input words, want %0d", xs_got.size(), T * X));
    for (int k = 0; k < T * X && k < xs_got.size(); k++)
      check(xs_got[k] == xw[k], $sformatf("input word %0d", k));
    check(in_beat == nbeats, $sformatf("%0d input beats taken, want %0d", in_beat, nbeats));
    check_beats(beats, lasts, res, "A");
    check(!busy && n_done == 1, "A: busy or done count");
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    gap = 30;
    run(3, 1);
    gap = 0;
    run(2, 0);
    // instance B: writer padding
    gap = 30; n_doneb = 0; h_sentb = 0; y_sentb = 0;
    for (int k = 0; k < 3 * HB + OB; k++) resb.push_back(rnd(32768));
    @(negedge clk); seq_len = 16'd3; startb = 1;
    @(negedge clk); startb = 0;
    wait (n_doneb == 1);
    repeat (5) @(negedge clk);
    check_beats(beatsb, lastsb, resb, "B");
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
