// workload_run: runs one whole inference on a copy of the accelerator built at the
// sizes of one workload, and checks every output word.
//
// The instance drives its own clock and reset. It loads random parameters, a random
// h_0 and a random T-step input sequence through the input stream, reads all of the
// output stream, and compares each word (h_1 .. h_T, then the P+Q dense outputs and
// the zero padding of the last beat) with a bit-exact model computed here from the
// GRU and dense-layer equations (tb_ref_pkg). GAP sets the percent of clocks with no
// input beat and with no output ready, so one workload can run with gaps and another
// free-running. It also checks the CYCLES register: with free-running streams the
// step launch interval must lie between two PE passes (2*H*ceil((X+H)/UNROLL)
// clocks) and that plus 16.
//
// Interface: parameters X, P, Q (the workload's sizes), T (steps), GAP and a NAME for
// messages; outputs done (set once the run is checked), checks and failures. The
// sizes of each workload are set by the testbench that instantiates this module.
module workload_run #(
  parameter int    X    = 2,
  parameter int    P    = 6,
  parameter int    Q    = 2,
  parameter int    T    = 20,
  parameter int    GAP  = 0,
  parameter string NAME = "workload"
) (
  output bit done,
  output int checks,
  output int failures
);
  import tb_ref_pkg::*;

  localparam int H = 16, OUT = P + Q, C = X + H;
  localparam int SW = 128, WPB = SW / 16;
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

  merinda_top #(.X(X), .P(P), .Q(Q)) dut (
    .clk, .rst_n,
    .s_axil_awvalid(awvalid), .s_axil_awready(awready), .s_axil_awaddr(awaddr),
    .s_axil_wvalid(wvalid), .s_axil_wready(wready), .s_axil_wdata(wdata),
    .s_axil_bvalid(bvalid), .s_axil_bready(bready), .s_axil_bresp(bresp),
    .s_axil_arvalid(arvalid), .s_axil_arready(arready), .s_axil_araddr(araddr),
    .s_axil_rvalid(rvalid), .s_axil_rready(rready), .s_axil_rdata(rdata), .s_axil_rresp(rresp),
    .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready), .s_axis_tdata(s_tdata),
    .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .m_axis_tdata(m_tdata),
    .m_axis_tlast(m_tlast), .irq_done(irq));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s: %s", NAME, what);
    end
  endtask

  // step launches and the spacing between them
  int n_step, clk_count, last_launch, max_interval, min_interval;
  always @(posedge clk) if (rst_n) begin
    clk_count++;
    if (dut.u_core.ev_step) begin
      if (last_launch > 0) begin
        if (clk_count - last_launch > max_interval) max_interval = clk_count - last_launch;
        if (min_interval == 0 || clk_count - last_launch < min_interval)
          min_interval = clk_count - last_launch;
      end
      last_launch = clk_count;
      n_step++;
    end
  end

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

  int in_words [$];
  int out_words [$];

  // Signals are driven and sampled at the falling edge: a handshake seen there
  // completes at the next rising edge.
  task automatic send_stream();
    int k = 0;
    while (k < in_words.size()) begin
      @(negedge clk);
      if (int'($urandom_range(99)) < GAP) begin s_tvalid = 0; continue; end
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
      m_tready = (int'($urandom_range(99)) >= GAP);
      if (m_tvalid && m_tready) begin
        for (int i = 0; i < WPB; i++) out_words.push_back(int'($signed(m_tdata[i*16 +: 16])));
        last = m_tlast;
      end
    end
    @(posedge clk);
    @(negedge clk); m_tready = 0;
  endtask

  int wur [H][C], wuz [H][C], wuh [H][C], br [H], bz [H], bh [H];
  int wy [OUT][H], by [OUT];

  initial begin
    int h [H], xs [][X];
    int exp_words [$];
    logic [31:0] cyc, st;

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
    by[0] = -30000;   // one coefficient is clamped by the ReLU

    for (int i = 0; i < H; i++) for (int c = 0; c < C; c++) in_words.push_back(wur[i][c]);
    for (int i = 0; i < H; i++) for (int c = 0; c < C; c++) in_words.push_back(wuz[i][c]);
    for (int i = 0; i < H; i++) for (int c = 0; c < C; c++) in_words.push_back(wuh[i][c]);
    foreach (br[i]) in_words.push_back(br[i]);
    foreach (bz[i]) in_words.push_back(bz[i]);
    foreach (bh[i]) in_words.push_back(bh[i]);
    for (int j = 0; j < OUT; j++) for (int c = 0; c < H; c++) in_words.push_back(wy[j][c]);
    foreach (by[j]) in_words.push_back(by[j]);
    foreach (h[i]) begin h[i] = rnd(2048); in_words.push_back(h[i]); end
    xs = new[T];
    for (int t = 0; t < T; t++) for (int j = 0; j < X; j++) begin
      xs[t][j] = rnd(4096); in_words.push_back(xs[t][j]);
    end

    // reference
    for (int t = 0; t < T; t++) begin
      int r [H], z [H], rh [H], hn [H];
      automatic int v [] = new[C];
      for (int j = 0; j < X; j++) v[j] = xs[t][j];
      for (int i = 0; i < H; i++) v[X + i] = h[i];
      for (int i = 0; i < H; i++) begin
        automatic int w [] = new[C];
        foreach (w[c]) w[c] = wur[i][c];
        r[i] = sig_q(dot_q(w, v, br[i]));
        foreach (w[c]) w[c] = wuz[i][c];
        z[i] = sig_q(dot_q(w, v, bz[i]));
        rh[i] = mul_q(r[i], h[i]);
      end
      for (int i = 0; i < H; i++) v[X + i] = rh[i];
      for (int i = 0; i < H; i++) begin
        automatic int w [] = new[C];
        int cand;
        foreach (w[c]) w[c] = wuh[i][c];
        cand  = tanh_q(dot_q(w, v, bh[i]));
        hn[i] = add_q(mul_q(4096 - z[i], cand), mul_q(z[i], h[i]));
      end
      h = hn;
      foreach (h[i]) exp_words.push_back(h[i]);
    end
    for (int j = 0; j < OUT; j++) begin
      automatic int w [] = new[H];
      automatic int hv [] = new[H];
      int y;
      foreach (w[c]) begin w[c] = wy[j][c]; hv[c] = h[c]; end
      y = dot_q(w, hv, by[j]);
      if (j < P && y < 0) y = 0;
      exp_words.push_back(y);
    end

    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    axil_write(4'h8, 32'(T));
    axil_write(4'h0, 32'b11);   // start, load parameters
    fork
      send_stream();
      recv_stream();
    join
    repeat (3) @(posedge clk);
    axil_read(4'h4, st);
    check(st[1:0] == 2'b10, $sformatf("STATUS after run = %0h, want done and not busy", st));
    axil_read(4'hC, cyc);

    check(out_words.size() == (exp_words.size() + WPB - 1) / WPB * WPB,
          $sformatf("%0d output words, want %0d padded to whole beats", out_words.size(),
                    exp_words.size()));
    foreach (exp_words[k]) if (k < out_words.size())
      check(out_words[k] == exp_words[k],
            $sformatf("word %0d: got %0d want %0d", k, out_words[k], exp_words[k]));
    for (int k = exp_words.size(); k < out_words.size(); k++)
      check(out_words[k] == 0, "padding word not zero");
    check(n_step == T, $sformatf("steps launched %0d, want %0d", n_step, T));
    check(int'(cyc) > T * 2 * H * NB, "CYCLES register smaller than the work of the run");
    if (GAP == 0)
      check(min_interval >= 2 * H * NB && max_interval <= 2 * H * NB + 16,
            $sformatf("step interval %0d..%0d outside [%0d, %0d]", min_interval, max_interval,
                      2 * H * NB, 2 * H * NB + 16));
    $display("%s: X=%0d P=%0d Q=%0d T=%0d, CYCLES=%0d, step launch interval %0d..%0d",
             NAME, X, P, Q, T, cyc, min_interval, max_interval);
    done = 1;
  end
endmodule
