// tb_weight_bank_mem: writes a 6 x 10 matrix into a 4-bank memory and reads every
// element back through all eight read ports, checking the cyclic layout (element
// (r, c) in bank c % 4 at word r*3 + c/4), the one-clock read latency, and that the
// output holds while rd_en is low.
module tb_weight_bank_mem;
  localparam int ROWS = 6, COLS = 10, B = 4, CPB = 3, AW = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [2:0] wr_row = 0;
  logic [3:0] wr_col = 0;
  logic signed [15:0] wr_data = 0;
  logic [AW-1:0] rd_addr [B][2];
  logic signed [15:0] rd_data [B][2];
  weight_bank_mem #(.ROWS(ROWS), .COLS(COLS), .BANKS(B)) dut (.clk, .wr_en, .wr_row, .wr_col,
    .wr_data, .rd_en, .rd_addr, .rd_data);

  int checks = 0, failures = 0;
  int W [ROWS][COLS];
  initial begin
    foreach (rd_addr[b, p]) rd_addr[b][p] = '0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      W[r][c] = int'($urandom_range(65535)) - 32768;
      @(negedge clk); wr_en = 1; wr_row = 3'(r); wr_col = 4'(c); wr_data = 16'(W[r][c]);
    end
    @(negedge clk); wr_en = 0;
    for (int r = 0; r < ROWS; r++) for (int c0 = 0; c0 < CPB * B; c0 += 2 * B) begin
      // port p of bank b reads column c0 + p*B + b of row r
      foreach (rd_addr[b, p]) rd_addr[b][p] = AW'(r * CPB + (c0 + p * B + b) / B);
      rd_en = 1;
      @(negedge clk);
      rd_en = 0;
      foreach (rd_addr[b, p]) rd_addr[b][p] = '0;   // must not matter while rd_en is low
      @(negedge clk);
      foreach (rd_data[b, p]) begin
        int c;
        c = c0 + p * B + b;
        if (c < COLS) begin
          checks++;
          if (rd_data[b][p] != 16'(W[r][c])) begin
            failures++;
            if (failures < 10) $display("FAIL: (%0d,%0d) bank %0d port %0d got %0d want %0d",
                                        r, c, b, p, rd_data[b][p], W[r][c]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
