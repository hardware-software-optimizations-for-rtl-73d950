// candidate_stage: pipeline stage 3, the candidate state.
//
// For every hidden unit i it computes
//   h~_t[i] = tanh( Wh[i,:] x_t + Uh[i,:] (r_t .* h_{t-1}) + bh[i] )
// with one PE array (dot_engine) over the stored [Wh | Uh] array and the operand
// vector [x_t ; rh], followed by a tanh table (one clock). It is started once stage
// 2 has finished the whole rh vector of the step.
//
// Interface: load [Wh | Uh] (SEL_WUH) and bh (SEL_BH) through `pwr` while idle.
// Pulse `start` with x and rh stable until `done`. Candidates leave in unit order on
// out_valid/out_ready/out_data. Timing: as dot_engine plus one clock for the table;
// back-pressure on the output holds the engine.
module candidate_stage
  import merinda_pkg::*;
#(
  parameter int unsigned H      = 16,
  parameter int unsigned X      = 2,
  parameter int unsigned UNROLL = 4,
  parameter int unsigned BANKS  = 4,
  parameter int unsigned ACC_W  = 48
) (
  input  logic      clk,
  input  logic      rst_n,
  input  param_wr_t pwr,
  input  logic      start,
  output logic      busy,
  output logic      done,
  input  word_t     x  [X],
  input  word_t     rh [H],
  output logic      out_valid,
  input  logic      out_ready,
  output word_t     out_data
);
  localparam int unsigned C   = X + H;
  localparam int unsigned CPB = (C + BANKS - 1) / BANKS;
  localparam int unsigned AW  = (H * CPB > 1) ? $clog2(H * CPB) : 1;
  localparam int unsigned RW  = (H > 1) ? $clog2(H) : 1;
  localparam int unsigned CW  = (C > 1) ? $clog2(C) : 1;

  word_t opv [C];
  always_comb for (int c = 0; c < int'(C); c++) opv[c] = (c < int'(X)) ? x[c] : rh[c - int'(X)];

  word_t bh [H];
  always_ff @(posedge clk) if (pwr.we && pwr.sel == SEL_BH) bh[RW'(pwr.row)] <= pwr.data;

  logic          rd_en;
  logic [AW-1:0] addr [BANKS][2];
  word_t         data [BANKS][2];
  weight_bank_mem #(.ROWS(H), .COLS(C), .BANKS(BANKS), .DATA_W(DATA_W)) u_mem_h (
    .clk, .wr_en(pwr.we && pwr.sel == SEL_WUH), .wr_row(RW'(pwr.row)), .wr_col(CW'(pwr.col)),
    .wr_data(pwr.data), .rd_en, .rd_addr(addr), .rd_data(data));

  logic  e_valid, adv, t_valid;
  word_t e_data;
  logic [RW-1:0] e_row;
  assign adv = !t_valid || out_ready;

  dot_engine #(.ROWS(H), .COLS(C), .UNROLL(UNROLL), .BANKS(BANKS), .DATA_W(DATA_W),
               .FRAC(FRAC), .ACC_W(ACC_W)) u_pe_h (
    .clk, .rst_n, .start, .busy, .done, .opv, .bias(bh),
    .rd_en, .rd_addr(addr), .rd_data(data),
    .out_valid(e_valid), .out_ready(adv), .out_data(e_data), .out_row(e_row));

  tanh_lut #(.DATA_W(DATA_W), .FRAC(FRAC)) u_tanh (.clk, .en(adv), .x(e_data), .y(out_data));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   t_valid <= 1'b0;
    else if (adv) t_valid <= e_valid;
  end
  assign out_valid = t_valid;
endmodule
