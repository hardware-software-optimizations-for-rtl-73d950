// tb_merinda_top: end-to-end test of the accelerator at its default sizes.
//
// Run 1 loads random parameters, h_0 and a 200-step input sequence (the length of
// one insulin-delivery trace) through the input stream, with random gaps on the
// input stream and random back-pressure on the output stream. Run 2 reuses the
// loaded parameters (CTRL.load_params = 0) for a short sequence with both streams
// free-running. Every output word (h_1 .. h_T and the dense outputs) is compared
// with a bit-exact model of the GRU and dense layer computed here from the
// equations (tb_ref_pkg). The test also reads the CYCLES register and checks the
// time per step against the schedule of the four-stage pipeline, and it counts the
// pipeline mechanisms: step launches, recurrence waits, stage-3 waits for the rh
// vector, output back-pressure stalls, FIFO backlog, input starvation, ReLU
// clamping and parameter reuse. A mechanism that never happened is a failure.
module tb_merinda_top;
  import tb_ref_pkg::*;

  localparam int H = 16, X = 2, P = 6, Q = 2, OUT = P + Q, C = X + H;
  localparam int SW = 128, WPB = SW / 16;
  localparam int T1 = 200, T2 = 6;
  localparam int UNROLL = 4;
  localparam int NB = (C + UNROLL - 1) / UNROLL;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 1;
  logic [3:0]  awaddr = 0, araddr = 0;
  logic [31:0] wdata = 0, rdata;
  logic [1:0]  bresp, rresp;
  logic        arvalid = 0, arready, rvalid, rready = 1;
  logic        s_tvalid = 0, s_tready;
  logic [SW-1:0] s_tdata = '0;
  logic        m_tvalid, m_tready = 0, m_tlast, irq;
  logic [SW-1:0] m_tdata;

  merinda_top dut (
    .clk, .rst_n,
    .s_axil_awvalid(awvalid), .s_axil_awready(awready), .s_axil_awaddr(awaddr),
    .s_axil_wvalid(wvalid), .s_axil_wready(wready), .s_axil_wdata(wdata),
    .s_axil_bvalid(bvalid), .s_axil_bready(bready), .s_axil_bresp(bresp),
    .s_axil_arvalid(arvalid), .s_axil_arready(arready), .s_axil_araddr(araddr),
    .s_axil_rvalid(rvalid), .s_axil_rready(rready), .s_axil_rdata(rdata), .s_axil_rresp(rresp),
    .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready), .s_axis_tdata(s_tdata),
    .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .m_axis_tdata(m_tdata),
    .m_axis_tlast(m_tlast), .irq_done(irq));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- model parameters ----------------
  int wur [H][C], wuz [H][C], wuh [H][C], br [H], bz [H], bh [H];
  int wy [OUT][H], by [OUT];

  // ---------------- mechanism counters ----------------
  int n_step, n_recur, n_rhwait, n_ostall, n_backlog, n_starve, n_relu, n_reuse;
  int clk_count, last_launch, max_interval, min_interval;
  always @(posedge clk) if (rst_n) begin
    clk_count++;
    if (dut.u_core.ev_step) begin
      if (last_launch > 0) begin
        if (clk_count - last_launch > max_interval) max_interval = clk_count - last_launch;
        if (min_interval == 0 || clk_count - last_launch < min_interval)
          min_interval = clk_count - last_launch;
      end
      last_launch = clk_count;
    end
    n_step    += int'(dut.u_core.ev_step);
    n_recur   += int'(dut.u_core.ev_recur_wait);
    n_rhwait  += int'(dut.u_core.ev_rh_wait);
    n_ostall  += int'(dut.u_core.ev_out_stall);
    n_backlog += int'(dut.u_core.ev_fifo_backlog);
    n_starve  += int'(dut.u_core.running && !dut.u_core.step_active && !dut.u_core.x_full
                      && dut.u_core.steps_left != 0);
  end

  // ---------------- AXI-Lite ----------------
  task automatic axil_write(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); awvalid = 1; awaddr = a; wvalid = 1; wdata = d;
    while (!(awready && wready)) @(negedge clk);
    @(negedge clk); awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
  endtask
  task automatic axil_read(input logic [3:0] a, output logic [31:0] d);
    @(negedge clk); arvalid = 1; araddr = a;
    while (!arready) @(negedge clk);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
  endtask

  // ---------------- one run ----------------
  int in_words [$];
  int out_words [$];
  int gap_in, gap_out;   // percent of clocks with no input beat / no output ready

  // Signals are driven and sampled at the falling edge: a handshake seen there
  // completes at the next rising edge.
  task automatic send_stream();
    int k = 0;
    while (k < in_words.size()) begin
      @(negedge clk);
      if ($urandom_range(99) < gap_in) begin s_tvalid = 0; continue; end
      for (int i = 0; i < WPB; i++)
        s_tdata[i*16 +: 16] = (k + i < in_words.size()) ? 16'(in_words[k + i]) : 16'h0;
      s_tvalid = 1;
      while (!s_tready) @(negedge clk);
      k += WPB;
      @(posedge clk);
    end
    @(negedge clk); s_tvalid = 0;
  endtask

  task automatic recv_stream();
    bit last = 0;
    while (!last) begin
      @(negedge clk);
      m_tready = ($urandom_range(99) >= gap_out);
      if (m_tvalid && m_tready) begin
        for (int i = 0; i < WPB; i++) out_words.push_back(int'($signed(m_tdata[i*16 +: 16])));
        last = m_tlast;
      end
    end
    @(posedge clk);
    @(negedge clk); m_tready = 0;
  endtask

  task automatic run(input int T, input bit load, input int gi, input int go);
    int h [H], xs [][X];
    int exp_words [$];
    logic [31:0] cyc, st;
    int per_step, bound;
    in_words.delete(); out_words.delete();
    gap_in = gi; gap_out = go;
    if (load) begin
      for (int i = 0; i < H; i++) for (int c = 0; c < C; c++) in_words.push_back(wur[i][c]);
      for (int i = 0; i < H; i++) for (int c = 0; c < C; c++) in_words.push_back(wuz[i][c]);
      for (int i = 0; i < H; i++) for (int c = 0; c < C; c++) in_words.push_back(wuh[i][c]);
      foreach (br[i]) in_words.push_back(br[i]);
      foreach (bz[i]) in_words.push_back(bz[i]);
      foreach (bh[i]) in_words.push_back(bh[i]);
      for (int j = 0; j < OUT; j++) for (int c = 0; c < H; c++) in_words.push_back(wy[j][c]);
      foreach (by[j]) in_words.push_back(by[j]);
    end
    foreach (h[i]) begin h[i] = rnd(2048); in_words.push_back(h[i]); end
    xs = new[T];
    for (int t = 0; t < T; t++) for (int j = 0; j < X; j++) begin
      xs[t][j] = rnd(4096); in_words.push_back(xs[t][j]);
    end

    // reference
    for (int t = 0; t < T; t++) begin
      int r [H], z [H], rh [H], hn [H];
      int v [] = new[C];
      for (int j = 0; j < X; j++) v[j] = xs[t][j];
      for (int i = 0; i < H; i++) v[X + i] = h[i];
      for (int i = 0; i < H; i++) begin
        int w [] = new[C];
        foreach (w[c]) w[c] = wur[i][c];
        r[i] = sig_q(dot_q(w, v, br[i]));
        foreach (w[c]) w[c] = wuz[i][c];
        z[i] = sig_q(dot_q(w, v, bz[i]));
        rh[i] = mul_q(r[i], h[i]);
      end
      for (int i = 0; i < H; i++) v[X + i] = rh[i];
      for (int i = 0; i < H; i++) begin
        int w [] = new[C];
        int cand;
        foreach (w[c]) w[c] = wuh[i][c];
        cand  = tanh_q(dot_q(w, v, bh[i]));
        hn[i] = add_q(mul_q(4096 - z[i], cand), mul_q(z[i], h[i]));
      end
      h = hn;
      foreach (h[i]) exp_words.push_back(h[i]);
    end
    for (int j = 0; j < OUT; j++) begin
      int w [] = new[H];
      int hv [] = new[H];
      int y;
      foreach (w[c]) begin w[c] = wy[j][c]; hv[c] = h[c]; end
      y = dot_q(w, hv, by[j]);
      if (j < P && y < 0) begin y = 0; n_relu++; end
      exp_words.push_back(y);
    end

    last_launch = 0; max_interval = 0; min_interval = 0;
    axil_write(4'h8, 32'(T));
    axil_write(4'h0, {30'd0, load, 1'b1});
    if (!load) n_reuse++;
    fork
      send_stream();
      recv_stream();
    join
    repeat (3) @(posedge clk);
    axil_read(4'h4, st);
    check(st[1:0] == 2'b10, $sformatf("STATUS after run = %0h, want done and not busy", st));
    axil_read(4'hC, cyc);

    check(out_words.size() >= exp_words.size(), "too few output words");
    foreach (exp_words[k]) if (k < out_words.size())
      check(out_words[k] == exp_words[k],
            $sformatf("T=%0d word %0d (step %0d unit %0d): got %0d want %0d",
                      T, k, k / H, k % H, out_words[k], exp_words[k]));
    for (int k = exp_words.size(); k < out_words.size(); k++)
      check(out_words[k] == 0, "padding word not zero");

    // time per step: stage 1 and stage 3 each need H*NB clocks per step and run one
    // after the other (the recurrence forbids more overlap); allow a fixed number of
    // clocks per step for pipeline fill and hand-over.
    per_step = int'(cyc) / T;
    bound    = 2 * H * NB + 16;
    $display("run T=%0d load=%0d: CYCLES=%0d, step launch interval %0d..%0d (two PE passes %0d)",
             T, load, cyc, min_interval, max_interval, 2 * H * NB);
    if (gi == 0 && go == 0)
      check(max_interval <= bound && min_interval >= 2 * H * NB,
            $sformatf("step interval %0d..%0d outside [%0d, %0d]", min_interval, max_interval,
                      2 * H * NB, bound));
    check(int'(cyc) > T * 2 * H * NB, "CYCLES register smaller than the work of the run");
  endtask

  initial begin
    // small weights keep the state away from saturation so every bit is exercised
    for (int i = 0; i < H; i++) begin
      for (int c = 0; c < C; c++) begin
        wur[i][c] = rnd(1200); wuz[i][c] = rnd(1200); wuh[i][c] = rnd(1600);
      end
      br[i] = rnd(1024); bz[i] = rnd(1024); bh[i] = rnd(1024);
    end
    for (int j = 0; j < OUT; j++) begin
      for (int c = 0; c < H; c++) wy[j][c] = rnd(2048);
      by[j] = rnd(1024);
    end
    // make sure at least one coefficient output is negative before ReLU
    by[0] = -30000;

    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    run(T1, 1'b1, 30, 40);
    run(T2, 1'b0, 0, 0);

    check(n_step == T1 + T2, $sformatf("steps launched %0d, want %0d", n_step, T1 + T2));
    $display("mechanisms: steps=%0d recurrence_waits=%0d rh_waits=%0d out_stalls=%0d fifo_backlog=%0d input_starved=%0d relu_clamps=%0d param_reuse=%0d",
             n_step, n_recur, n_rhwait, n_ostall, n_backlog, n_starve, n_relu, n_reuse);
    check(n_recur   > 0, "recurrence wait never happened");
    check(n_rhwait  > 0, "stage 3 never waited for rh");
    check(n_ostall  > 0, "output back-pressure never stalled stage 4");
    check(n_backlog > 0, "no FIFO ever held more than one word");
    check(n_starve  > 0, "the core never waited for input");
    check(n_relu    > 0, "ReLU never clamped");
    check(n_reuse   > 0, "parameters never reused");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
