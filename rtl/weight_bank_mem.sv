// weight_bank_mem: a ROWS x COLS weight matrix held in BANKS dual-ported on-chip
// RAM banks, partitioned cyclically along the column dimension.
//
// Element (row, col) lives in bank col % BANKS at word row*CPB + col/BANKS, where
// CPB = ceil(COLS/BANKS) is the number of words per row in a bank. This is the
// layout of the paper's "ARRAY_PARTITION dim=2 factor=4 cyclic" directive: with
// BANKS banks of two ports each, 2*BANKS different weights can be read per clock,
// so UNROLL parallel MAC lanes are served in ceil(UNROLL/(2*BANKS)) clocks.
//
// Interface: every bank has two read ports, rd_addr[b][p] -> rd_data[b][p], with a
// registered output (one clock of latency, like a block RAM's output); the data
// register only updates when rd_en is high, so a stalled pipeline sees its data
// held. Writes come from the parameter-load bus, one word per clock, through port
// 0 of the bank that owns the column; the design only loads weights while the
// compute engines are idle, so writes and reads never collide. Loading is this
// design's own mechanism: the paper declares the arrays as two-port ROMs filled by
// the host.
module weight_bank_mem #(
  parameter int unsigned ROWS   = 16,
  parameter int unsigned COLS   = 18,
  parameter int unsigned BANKS  = 4,
  parameter int unsigned DATA_W = 16,
  localparam int unsigned CPB   = (COLS + BANKS - 1) / BANKS,
  localparam int unsigned DEPTH = ROWS * CPB,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned RW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW    = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                           clk,
  // load port
  input  logic                           wr_en,
  input  logic [RW-1:0]                  wr_row,
  input  logic [CW-1:0]                  wr_col,
  input  logic signed [DATA_W-1:0]       wr_data,
  // read ports
  input  logic                           rd_en,
  input  logic [AW-1:0]                  rd_addr [BANKS][2],
  output logic signed [DATA_W-1:0]       rd_data [BANKS][2]
);
  logic signed [DATA_W-1:0] mem [BANKS][DEPTH];

  logic [$clog2(BANKS+1)-1:0] wr_bank;
  logic [AW-1:0]              wr_addr;
  always_comb begin
    wr_bank = ($clog2(BANKS+1))'(32'(wr_col) % BANKS);
    wr_addr = AW'(32'(wr_row) * CPB + 32'(wr_col) / BANKS);
  end

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    always_ff @(posedge clk) begin
      if (wr_en && wr_bank == b) mem[b][wr_addr] <= wr_data;
      if (rd_en) begin
        rd_data[b][0] <= mem[b][rd_addr[b][0]];
        rd_data[b][1] <= mem[b][rd_addr[b][1]];
      end
    end
  end
endmodule
