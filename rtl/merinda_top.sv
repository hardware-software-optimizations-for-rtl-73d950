// merinda_top: the MERINDA GRU accelerator for model recovery.
//
// One run streams a sequence of T input vectors through a GRU with H hidden units
// and then through a dense layer that turns the final hidden state into P model-
// coefficient estimates (ReLU) and Q input-shift values. The host writes SEQ_LEN and
// CTRL over AXI4-Lite, a DMA engine feeds the input AXI4-Stream (optional
// parameters, h_0, the inputs; layout in mem_reader_writer) and drains the output
// AXI4-Stream (h_1 .. h_T, then the dense outputs).
//
//   axil_ctrl ──start──▶ mem_reader_writer ──pwr / h0 / x──▶ gru_core ──h_t──▶ writer
//                                    │                         │ h_T
//                                    └──────pwr──────▶ dense_relu ──y──▶ writer
//
// gru_core holds the paper's four concurrent stages (gate affines, sigmoid and reset
// modulation, candidate with tanh, interpolation) joined by FIFOs, with the weights
// in banked on-chip memories that feed UNROLL MAC lanes per engine. The DDR, the DMA
// engines, the AXI interconnect and the host processor are outside this module;
// their connections are the AXI ports.
//
// Defaults: H=16 hidden units and X=2 inputs per step (glucose and insulin for the
// insulin-delivery case) are this design's choices, as are P=6 and Q=2; UNROLL=4
// lanes, BANKS=4 banks per weight array, FIFO depth 256 and the 128-bit stream are
// the paper's numbers. Numbers are 16-bit Q4.12.
//
// The core's busy flag and event pulses, and the dense layer's busy and done, are
// left unread here: the writer and axil_ctrl already follow the run, and the event
// pulses exist for a testbench or a performance counter to watch the pipeline.
module merinda_top
  import merinda_pkg::*;
#(
  parameter int unsigned H          = 16,
  parameter int unsigned X          = 2,
  parameter int unsigned P          = 6,
  parameter int unsigned Q          = 2,
  parameter int unsigned UNROLL     = 4,
  parameter int unsigned BANKS      = 4,
  parameter int unsigned FIFO_DEPTH = 256,
  parameter int unsigned STREAM_W   = 128,
  parameter int unsigned ACC_W      = 48,
  parameter int unsigned T_W        = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // AXI4-Lite control
  input  logic                s_axil_awvalid,
  output logic                s_axil_awready,
  input  logic [3:0]          s_axil_awaddr,
  input  logic                s_axil_wvalid,
  output logic                s_axil_wready,
  input  logic [31:0]         s_axil_wdata,
  output logic                s_axil_bvalid,
  input  logic                s_axil_bready,
  output logic [1:0]          s_axil_bresp,
  input  logic                s_axil_arvalid,
  output logic                s_axil_arready,
  input  logic [3:0]          s_axil_araddr,
  output logic                s_axil_rvalid,
  input  logic                s_axil_rready,
  output logic [31:0]         s_axil_rdata,
  output logic [1:0]          s_axil_rresp,
  // AXI4-Stream in (from DMA)
  input  logic                s_axis_tvalid,
  output logic                s_axis_tready,
  input  logic [STREAM_W-1:0] s_axis_tdata,
  // AXI4-Stream out (to DMA)
  output logic                m_axis_tvalid,
  input  logic                m_axis_tready,
  output logic [STREAM_W-1:0] m_axis_tdata,
  output logic                m_axis_tlast,
  output logic                irq_done
);
  localparam int unsigned OUT = P + Q;
  localparam int unsigned RW  = (H > 1) ? $clog2(H) : 1;

  logic           start, load_params, busy, run_done;
  logic [T_W-1:0] seq_len;

  axil_ctrl #(.T_W(T_W)) u_ctrl (
    .clk, .rst_n,
    .awvalid(s_axil_awvalid), .awready(s_axil_awready), .awaddr(s_axil_awaddr),
    .wvalid(s_axil_wvalid), .wready(s_axil_wready), .wdata(s_axil_wdata),
    .bvalid(s_axil_bvalid), .bready(s_axil_bready), .bresp(s_axil_bresp),
    .arvalid(s_axil_arvalid), .arready(s_axil_arready), .araddr(s_axil_araddr),
    .rvalid(s_axil_rvalid), .rready(s_axil_rready), .rdata(s_axil_rdata), .rresp(s_axil_rresp),
    .start, .load_params, .seq_len, .busy, .run_done);

  param_wr_t     pwr;
  logic          h0_we, core_start, x_valid, x_ready;
  logic [RW-1:0] h0_idx;
  word_t         h0_data, x_data;
  logic          h_valid, h_ready, y_valid, y_ready;
  word_t         h_data, y_data;

  mem_reader_writer #(.H(H), .X(X), .OUT(OUT), .STREAM_W(STREAM_W), .T_W(T_W)) u_mrw (
    .clk, .rst_n, .start, .load_params, .seq_len, .busy, .done(run_done),
    .s_axis_tvalid, .s_axis_tready, .s_axis_tdata,
    .pwr, .h0_we, .h0_idx, .h0_data, .core_start, .x_valid, .x_ready, .x_data,
    .h_valid, .h_ready, .h_data, .y_valid, .y_ready, .y_data,
    .m_axis_tvalid, .m_axis_tready, .m_axis_tdata, .m_axis_tlast);

  logic  core_busy, core_done;
  word_t h_final [H];
  logic  ev_step, ev_recur_wait, ev_rh_wait, ev_out_stall, ev_fifo_backlog;

  gru_core #(.H(H), .X(X), .UNROLL(UNROLL), .BANKS(BANKS), .FIFO_DEPTH(FIFO_DEPTH),
             .ACC_W(ACC_W), .T_W(T_W)) u_core (
    .clk, .rst_n, .pwr, .h0_we, .h0_idx, .h0_data,
    .x_valid, .x_ready, .x_data, .start(core_start), .seq_len,
    .busy(core_busy), .done(core_done),
    .h_out_valid(h_valid), .h_out_ready(h_ready), .h_out_data(h_data), .h_final,
    .ev_step, .ev_recur_wait, .ev_rh_wait, .ev_out_stall, .ev_fifo_backlog);

  logic dense_busy, dense_done;
  dense_relu #(.H(H), .P(P), .Q(Q), .UNROLL(UNROLL), .BANKS(BANKS), .ACC_W(ACC_W)) u_dense (
    .clk, .rst_n, .pwr, .start(core_done), .busy(dense_busy), .done(dense_done), .h(h_final),
    .out_valid(y_valid), .out_ready(y_ready), .out_data(y_data));

  assign irq_done = run_done;
endmodule
