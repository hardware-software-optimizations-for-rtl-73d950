// dense_relu: the dense output layer of the model-recovery network.
//
// After the last time step it maps the H-unit hidden state to OUT = P + Q values:
//   y[j] = Wy[j,:] h_T + by[j]
// and applies ReLU, max(0, y), to the first P outputs, the model-coefficient
// estimates; the last Q outputs, the input-shift values, are passed on linearly.
// This follows the paper's description of the dense layer (ReLU for the coefficient
// nodes only) and its Wy weight array; the layer runs on the same kind of PE array
// and banked memory as the GRU gates. P and Q are this design's defaults: the
// paper gives no numbers for them.
//
// Interface: load Wy (SEL_WY, OUT x H) and by (SEL_BY) through `pwr` while idle.
// Pulse `start` with h stable until `done`; results leave in order on out_*.
// Timing: OUT*ceil(H/UNROLL)*ceil(UNROLL/(2*BANKS)) clocks plus 4 of latency.
module dense_relu
  import merinda_pkg::*;
#(
  parameter int unsigned H      = 16,
  parameter int unsigned P      = 6,
  parameter int unsigned Q      = 2,
  parameter int unsigned UNROLL = 4,
  parameter int unsigned BANKS  = 4,
  parameter int unsigned ACC_W  = 48,
  localparam int unsigned OUT   = P + Q
) (
  input  logic      clk,
  input  logic      rst_n,
  input  param_wr_t pwr,
  input  logic      start,
  output logic      busy,
  output logic      done,
  input  word_t     h [H],
  output logic      out_valid,
  input  logic      out_ready,
  output word_t     out_data
);
  localparam int unsigned CPB = (H + BANKS - 1) / BANKS;
  localparam int unsigned AW  = (OUT * CPB > 1) ? $clog2(OUT * CPB) : 1;
  localparam int unsigned RW  = (OUT > 1) ? $clog2(OUT) : 1;
  localparam int unsigned CW  = (H > 1) ? $clog2(H) : 1;

  word_t by [OUT];
  always_ff @(posedge clk) if (pwr.we && pwr.sel == SEL_BY) by[RW'(pwr.row)] <= pwr.data;

  logic          rd_en;
  logic [AW-1:0] addr [BANKS][2];
  word_t         data [BANKS][2];
  weight_bank_mem #(.ROWS(OUT), .COLS(H), .BANKS(BANKS), .DATA_W(DATA_W)) u_mem_y (
    .clk, .wr_en(pwr.we && pwr.sel == SEL_WY), .wr_row(RW'(pwr.row)), .wr_col(CW'(pwr.col)),
    .wr_data(pwr.data), .rd_en, .rd_addr(addr), .rd_data(data));

  logic  e_valid, adv;
  word_t e_data;
  logic [RW-1:0] e_row;
  assign adv = !out_valid || out_ready;

  dot_engine #(.ROWS(OUT), .COLS(H), .UNROLL(UNROLL), .BANKS(BANKS), .DATA_W(DATA_W),
               .FRAC(FRAC), .ACC_W(ACC_W)) u_pe_y (
    .clk, .rst_n, .start, .busy, .done, .opv(h), .bias(by),
    .rd_en, .rd_addr(addr), .rd_data(data),
    .out_valid(e_valid), .out_ready(adv), .out_data(e_data), .out_row(e_row));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0;
    end else if (adv) begin
      out_valid <= e_valid;
      if (e_valid)
        out_data <= (32'(e_row) < P && e_data < 0) ? word_t'(0) : e_data;
    end
  end
endmodule
