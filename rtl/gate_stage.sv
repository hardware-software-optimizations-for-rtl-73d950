// gate_stage: pipeline stage 1, the reset and update gate affines.
//
// For every hidden unit i it computes the two gate pre-activations
//   r_pre[i] = Wr[i,:] x_t + Ur[i,:] h_{t-1} + br[i]
//   z_pre[i] = Wz[i,:] x_t + Uz[i,:] h_{t-1} + bz[i]
// with two PE arrays (dot_engine) working in lock step, each with UNROLL MAC lanes
// and its own banked weight memory. The input and recurrent matrices of a gate are
// stored side by side as one H x (X+H) array [W | U], and the operand vector is
// [x_t ; h_{t-1}], so one row of MACs covers both products of the paper's equations
// (W x + U h); this concatenation is this design's choice. With the default
// UNROLL=4 and BANKS=4 the stage reads 8 weights per clock, 4 per gate from each
// gate's own memory, and runs at one beat per clock. Two banks per memory would
// already reach that; four follows the paper's partition factor of 4.
//
// Interface: load weights and biases through `pwr` (sel SEL_WUR/SEL_WUZ/SEL_BR/
// SEL_BZ) while idle. Pulse `start` with x and h stable until `done`. The pair
// {r_pre, z_pre} of unit i leaves on out_valid/out_ready/out_data in unit order.
// Timing: H*ceil((X+H)/UNROLL)*ceil(UNROLL/(2*BANKS)) clocks per step plus 3 clocks
// of latency, without back-pressure.
module gate_stage
  import merinda_pkg::*;
#(
  parameter int unsigned H      = 16,
  parameter int unsigned X      = 2,
  parameter int unsigned UNROLL = 4,
  parameter int unsigned BANKS  = 4,
  parameter int unsigned ACC_W  = 48
) (
  input  logic        clk,
  input  logic        rst_n,
  input  param_wr_t   pwr,
  input  logic        start,
  output logic        busy,
  output logic        done,
  input  word_t       x [X],
  input  word_t       h [H],
  output logic        out_valid,
  input  logic        out_ready,
  output logic [2*DATA_W-1:0] out_data   // {r_pre, z_pre}
);
  localparam int unsigned C   = X + H;
  localparam int unsigned CPB = (C + BANKS - 1) / BANKS;
  localparam int unsigned AW  = (H * CPB > 1) ? $clog2(H * CPB) : 1;
  localparam int unsigned RW  = (H > 1) ? $clog2(H) : 1;
  localparam int unsigned CW  = (C > 1) ? $clog2(C) : 1;

  word_t opv [C];
  always_comb for (int c = 0; c < int'(C); c++) opv[c] = (c < int'(X)) ? x[c] : h[c - int'(X)];

  word_t br [H], bz [H];
  always_ff @(posedge clk) begin
    if (pwr.we && pwr.sel == SEL_BR) br[RW'(pwr.row)] <= pwr.data;
    if (pwr.we && pwr.sel == SEL_BZ) bz[RW'(pwr.row)] <= pwr.data;
  end

  logic          rd_en_r, rd_en_z;
  logic [AW-1:0] addr_r [BANKS][2], addr_z [BANKS][2];
  word_t         data_r [BANKS][2], data_z [BANKS][2];

  weight_bank_mem #(.ROWS(H), .COLS(C), .BANKS(BANKS), .DATA_W(DATA_W)) u_mem_r (
    .clk, .wr_en(pwr.we && pwr.sel == SEL_WUR), .wr_row(RW'(pwr.row)), .wr_col(CW'(pwr.col)),
    .wr_data(pwr.data), .rd_en(rd_en_r), .rd_addr(addr_r), .rd_data(data_r));
  weight_bank_mem #(.ROWS(H), .COLS(C), .BANKS(BANKS), .DATA_W(DATA_W)) u_mem_z (
    .clk, .wr_en(pwr.we && pwr.sel == SEL_WUZ), .wr_row(RW'(pwr.row)), .wr_col(CW'(pwr.col)),
    .wr_data(pwr.data), .rd_en(rd_en_z), .rd_addr(addr_z), .rd_data(data_z));

  logic  v_r, v_z, busy_r, busy_z, done_r, done_z;
  word_t y_r, y_z;
  logic [RW-1:0] row_r, row_z;
  logic  take;
  assign out_valid = v_r && v_z;
  assign take      = out_valid && out_ready;
  assign out_data  = {y_r, y_z};

  dot_engine #(.ROWS(H), .COLS(C), .UNROLL(UNROLL), .BANKS(BANKS), .DATA_W(DATA_W),
               .FRAC(FRAC), .ACC_W(ACC_W)) u_pe_r (
    .clk, .rst_n, .start, .busy(busy_r), .done(done_r), .opv, .bias(br),
    .rd_en(rd_en_r), .rd_addr(addr_r), .rd_data(data_r),
    .out_valid(v_r), .out_ready(take), .out_data(y_r), .out_row(row_r));
  dot_engine #(.ROWS(H), .COLS(C), .UNROLL(UNROLL), .BANKS(BANKS), .DATA_W(DATA_W),
               .FRAC(FRAC), .ACC_W(ACC_W)) u_pe_z (
    .clk, .rst_n, .start, .busy(busy_z), .done(done_z), .opv, .bias(bz),
    .rd_en(rd_en_z), .rd_addr(addr_z), .rd_data(data_z),
    .out_valid(v_z), .out_ready(take), .out_data(y_z), .out_row(row_z));

  assign busy = busy_r || busy_z;
  assign done = done_r;

  // the two gate engines run the same schedule, so their results pair up
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (v_r == v_z) && (!v_r || row_r == row_z) && (done_r == done_z));
endmodule
