// tb_dot_engine: tests the PE array with its banked weight memory.
//
// Three engines with UNROLL = 4 lanes run the same random 5 x 18 matrix-vector
// product (with biases) from memories of 1, 2 and 4 banks. Each result is compared
// with a dot product computed here, and the spacing between results is checked
// against the banking rule II = ceil(UNROLL / (2*BANKS)) per beat: one bank needs
// 2 clocks per beat, two or four banks 1 clock. The first result must appear
// NB*II + 3 clocks after start. One extra pass with random back-pressure checks that
// no result is lost or changed while the output is held. A last pass uses operands
// near full scale to check saturation.
module tb_dot_engine;
  import tb_ref_pkg::*;

  localparam int ROWS = 5, COLS = 18, UNROLL = 4;
  localparam int NB = (COLS + UNROLL - 1) / UNROLL;
  localparam int NBK = 3;
  localparam int BANKS_OF [NBK] = '{1, 2, 4};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic signed [15:0] opv [COLS];
  logic signed [15:0] bias [ROWS];
  int W [ROWS][COLS];

  logic        wr_en = 0;
  logic [4:0]  wr_row_l, wr_col_l;
  logic signed [15:0] wr_data;
  logic        start = 0;
  logic        ready [NBK];
  logic        valid [NBK];
  logic signed [15:0] data [NBK];
  logic [2:0]  row [NBK];
  logic        busy [NBK], done [NBK];

  for (genvar k = 0; k < NBK; k++) begin : g
    localparam int B   = BANKS_OF[k];
    localparam int CPB = (COLS + B - 1) / B;
    localparam int AW  = $clog2(ROWS * CPB);
    logic          rd_en;
    logic [AW-1:0] rd_addr [B][2];
    logic signed [15:0] rd_data [B][2];
    weight_bank_mem #(.ROWS(ROWS), .COLS(COLS), .BANKS(B)) u_mem (
      .clk, .wr_en, .wr_row(wr_row_l[2:0]), .wr_col(wr_col_l), .wr_data,
      .rd_en, .rd_addr, .rd_data);
    dot_engine #(.ROWS(ROWS), .COLS(COLS), .UNROLL(UNROLL), .BANKS(B)) u_pe (
      .clk, .rst_n, .start, .busy(busy[k]), .done(done[k]), .opv, .bias,
      .rd_en, .rd_addr, .rd_data,
      .out_valid(valid[k]), .out_ready(ready[k]), .out_data(data[k]), .out_row(row[k]));
  end

  int got [NBK][$];
  int when [NBK][$];
  int cyc = 0;
  int backpressure = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) begin
    for (int k = 0; k < NBK; k++) begin
      ready[k] = (backpressure == 0) || ($urandom_range(99) >= backpressure);
      if (valid[k] && ready[k]) begin
        got[k].push_back(int'(data[k]));
        when[k].push_back(cyc);
        check(int'(row[k]) == got[k].size() - 1, $sformatf("bank cfg %0d: row index %0d", k, row[k]));
      end
    end
  end

  task automatic load(input int span);
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      W[r][c] = rnd(span);
      @(negedge clk); wr_en = 1; wr_row_l = 5'(r); wr_col_l = 5'(c); wr_data = 16'(W[r][c]);
    end
    @(negedge clk); wr_en = 0;
  endtask

  task automatic pass(input int bp, input int span, input string name);
    int t0;
    int v [] = new[COLS];
    backpressure = bp;
    foreach (opv[c]) begin opv[c] = 16'(rnd(span)); v[c] = int'(opv[c]); end
    foreach (bias[r]) bias[r] = 16'(rnd(span));
    for (int k = 0; k < NBK; k++) begin got[k].delete(); when[k].delete(); end
    @(negedge clk); start = 1; t0 = cyc + 1;
    @(negedge clk); start = 0;
    fork
      begin
        wait (got[0].size() == ROWS && got[1].size() == ROWS && got[2].size() == ROWS);
      end
      begin repeat (2000) @(posedge clk); end
    join_any
    disable fork;
    for (int k = 0; k < NBK; k++) begin
      int ii;
      ii = (UNROLL + 2 * BANKS_OF[k] - 1) / (2 * BANKS_OF[k]);
      check(got[k].size() == ROWS, $sformatf("%s banks=%0d: %0d results", name, BANKS_OF[k], got[k].size()));
      for (int r = 0; r < ROWS && r < got[k].size(); r++) begin
        int w [] = new[COLS];
        int e;
        foreach (w[c]) w[c] = W[r][c];
        e = dot_q(w, v, int'(bias[r]));
        check(got[k][r] == e, $sformatf("%s banks=%0d row %0d: got %0d want %0d",
                                        name, BANKS_OF[k], r, got[k][r], e));
        if (bp == 0) begin
          if (r == 0)
            check(when[k][0] - t0 == NB * ii + 3 - 1,
                  $sformatf("%s banks=%0d: first result after %0d clocks, want %0d",
                            name, BANKS_OF[k], when[k][0] - t0 + 1, NB * ii + 3));
          else
            check(when[k][r] - when[k][r-1] == NB * ii,
                  $sformatf("%s banks=%0d: row interval %0d, want %0d",
                            name, BANKS_OF[k], when[k][r] - when[k][r-1], NB * ii));
        end
      end
    end
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(3000);
    pass(0, 3000, "free");
    pass(60, 3000, "backpressure");
    load(32767);
    pass(0, 32767, "saturating");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
