// gru_core: the concurrent GRU, four dataflow stages joined by FIFOs.
//
//   stage 1 gate_stage      r_pre, z_pre            -> FIFO rz -> 
//   stage 2 sigmoid_stage   r, z, rh = r .* h       -> FIFO z (to stage 4), rh buffer
//   stage 3 candidate_stage h~ = tanh(Wh x + Uh rh + bh) -> FIFO c ->
//   stage 4 interp_stage    h = (1-z) h~ + z h      -> state buffer, result words
//
// The stages run concurrently and hand over unit by unit: stage 2 works on unit i
// while stage 1 computes unit i+1, and stage 4 blends unit i while stage 3 computes
// unit i+1. Two waits remain, both forced by the GRU equations: stage 3 needs the
// complete rh vector (its recurrent product covers all units), so it starts when
// stage 2 has finished a step; and stage 1 of step t+1 needs the complete h_t, so a
// step is launched only when the previous one has left stage 4 (the recurrence
// wait). The paper describes the steady state as each stage working on a different
// time step; for a single sequence the recurrence does not allow that, and this
// core overlaps the stages within a step instead. While a step runs, the input
// words of the next step are already collected into x_nxt.
//
// State: the hidden state h lives in registers (H words) and is updated in place by
// stage 4; rh and the current and next input vectors are registers as well. The
// weights live in the banked memories inside the stages.
//
// Interface: `pwr` loads parameters; h0_we/h0_idx/h0_data write the initial state
// while idle; x words arrive on x_valid/x_ready/x_data, X per step, in order;
// `start` with `seq_len` (number of steps, >= 1) runs a sequence; each h_t leaves as
// H words on h_out_*; `done` pulses when the last step has left stage 4 and h_final
// then holds h_T. The ev_* outputs pulse on the events the top level counts.
module gru_core
  import merinda_pkg::*;
#(
  parameter int unsigned H          = 16,
  parameter int unsigned X          = 2,
  parameter int unsigned UNROLL     = 4,
  parameter int unsigned BANKS      = 4,
  parameter int unsigned FIFO_DEPTH = 256,
  parameter int unsigned ACC_W      = 48,
  parameter int unsigned T_W        = 16,
  localparam int unsigned RW        = (H > 1) ? $clog2(H) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  param_wr_t      pwr,
  input  logic           h0_we,
  input  logic [RW-1:0]  h0_idx,
  input  word_t          h0_data,
  input  logic           x_valid,
  output logic           x_ready,
  input  word_t          x_data,
  input  logic           start,
  input  logic [T_W-1:0] seq_len,
  output logic           busy,
  output logic           done,
  output logic           h_out_valid,
  input  logic           h_out_ready,
  output word_t          h_out_data,
  output word_t          h_final [H],
  // events
  output logic           ev_step,         // a time step was launched
  output logic           ev_recur_wait,   // next input ready, step waits for h_t
  output logic           ev_rh_wait,      // stage 3 idle, waiting for the rh vector
  output logic           ev_out_stall,    // stage 4 has a result the consumer does not take
  output logic           ev_fifo_backlog  // a stage FIFO holds more than one word
);
  localparam int unsigned PW = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;
  localparam int unsigned XW = $clog2(X + 1);
  localparam int unsigned XI = (X > 1) ? $clog2(X) : 1;

  // ---------------- buffers ----------------
  word_t h  [H];
  word_t rh [H];
  word_t x_cur [X];
  word_t x_nxt [X];
  logic [XW-1:0] x_cnt;
  assign h_final = h;

  // ---------------- sequencer ----------------
  logic           running, step_active;
  logic [T_W-1:0] steps_left;    // steps not yet launched
  logic           launch, step_done, rh_done, last_step;
  logic           x_full;
  assign x_full  = (32'(x_cnt) == X);
  assign x_ready = !x_full && running && (steps_left != '0);
  assign launch  = running && !step_active && x_full && (steps_left != '0);
  assign busy    = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; step_active <= 1'b0; steps_left <= '0; x_cnt <= '0;
      last_step <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        running <= 1'b1; steps_left <= seq_len; x_cnt <= '0;
      end else begin
        if (launch) begin
          x_cnt       <= '0;
          step_active <= 1'b1;
          steps_left  <= steps_left - 1'b1;
          last_step   <= (steps_left == T_W'(1));
        end else if (x_valid && x_ready) begin
          x_cnt <= x_cnt + 1'b1;
        end
        if (step_done) begin
          step_active <= 1'b0;
          if (last_step) begin
            running <= 1'b0; done <= 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (x_valid && x_ready) x_nxt[XI'(x_cnt)] <= x_data;
    if (launch) x_cur <= x_nxt;
  end

  // ---------------- stage 1 ----------------
  logic                g_valid, g_ready, g_busy, g_done;
  logic [2*DATA_W-1:0] g_data;
  gate_stage #(.H(H), .X(X), .UNROLL(UNROLL), .BANKS(BANKS), .ACC_W(ACC_W)) u_s1 (
    .clk, .rst_n, .pwr, .start(launch), .busy(g_busy), .done(g_done), .x(x_cur), .h,
    .out_valid(g_valid), .out_ready(g_ready), .out_data(g_data));

  logic                rz_valid, rz_ready;
  logic [2*DATA_W-1:0] rz_data;
  logic [PW:0]         rz_count;
  stream_fifo #(.WIDTH(2*DATA_W), .DEPTH(FIFO_DEPTH)) u_fifo_rz (
    .clk, .rst_n, .in_valid(g_valid), .in_ready(g_ready), .in_data(g_data),
    .out_valid(rz_valid), .out_ready(rz_ready), .out_data(rz_data), .count(rz_count));

  // ---------------- stage 2 ----------------
  logic          zs_valid, zs_ready, rh_we;
  word_t         zs_data, rh_data;
  logic [RW-1:0] rh_idx;
  sigmoid_stage #(.H(H)) u_s2 (
    .clk, .rst_n, .in_valid(rz_valid), .in_ready(rz_ready), .in_data(rz_data), .h,
    .z_valid(zs_valid), .z_ready(zs_ready), .z_data(zs_data),
    .rh_we, .rh_idx, .rh_data, .rh_done);

  always_ff @(posedge clk) if (rh_we) rh[rh_idx] <= rh_data;

  logic        zf_valid, zf_ready;
  word_t       zf_data;
  logic [PW:0] zf_count;
  stream_fifo #(.WIDTH(DATA_W), .DEPTH(FIFO_DEPTH)) u_fifo_z (
    .clk, .rst_n, .in_valid(zs_valid), .in_ready(zs_ready), .in_data(zs_data),
    .out_valid(zf_valid), .out_ready(zf_ready), .out_data(zf_data), .count(zf_count));

  // ---------------- stage 3 ----------------
  // rh_done comes in the clock its last word is written; start one clock later so
  // the candidate engine sees the complete vector.
  logic c_start, c_busy, c_done;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c_start <= 1'b0;
    else        c_start <= rh_done;
  end

  logic  cs_valid, cs_ready;
  word_t cs_data;
  candidate_stage #(.H(H), .X(X), .UNROLL(UNROLL), .BANKS(BANKS), .ACC_W(ACC_W)) u_s3 (
    .clk, .rst_n, .pwr, .start(c_start), .busy(c_busy), .done(c_done), .x(x_cur), .rh,
    .out_valid(cs_valid), .out_ready(cs_ready), .out_data(cs_data));

  logic        cf_valid, cf_ready;
  word_t       cf_data;
  logic [PW:0] cf_count;
  stream_fifo #(.WIDTH(DATA_W), .DEPTH(FIFO_DEPTH)) u_fifo_c (
    .clk, .rst_n, .in_valid(cs_valid), .in_ready(cs_ready), .in_data(cs_data),
    .out_valid(cf_valid), .out_ready(cf_ready), .out_data(cf_data), .count(cf_count));

  // ---------------- stage 4 ----------------
  logic          h_we;
  logic [RW-1:0] h_idx;
  word_t         h_data;
  interp_stage #(.H(H)) u_s4 (
    .clk, .rst_n, .z_valid(zf_valid), .z_ready(zf_ready), .z_data(zf_data),
    .c_valid(cf_valid), .c_ready(cf_ready), .c_data(cf_data), .h,
    .h_we, .h_idx, .h_data,
    .out_valid(h_out_valid), .out_ready(h_out_ready), .out_data(h_out_data), .step_done);

  always_ff @(posedge clk) begin
    if (h_we)                 h[h_idx]  <= h_data;
    else if (h0_we && !running) h[h0_idx] <= h0_data;
  end

  // ---------------- events ----------------
  assign ev_step         = launch;
  assign ev_recur_wait   = running && step_active && x_full && (steps_left != '0);
  assign ev_rh_wait      = step_active && !c_busy && !c_start && g_busy;
  assign ev_out_stall    = h_out_valid && !h_out_ready;
  assign ev_fifo_backlog = (rz_count > 1) || (zf_count > 1) || (cf_count > 1);

  a_no_launch_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    launch |-> !g_busy && !c_busy);
  a_no_h0_while_running: assert property (@(posedge clk) disable iff (!rst_n)
    h0_we |-> !running);
endmodule
