// sigmoid_stage: pipeline stage 2, gate activations and reset modulation.
//
// It takes the gate pre-activation pairs {r_pre, z_pre} of stage 1 in unit order,
// looks both up in sigmoid tables (one clock), and then for unit i
//   - writes rh[i] = r_t[i] * h_{t-1}[i] (the reset-modulated state, one multiply)
//     into the buffer stage 3 reads as its recurrent operand, and
//   - forwards z_t[i] to stage 4 through the z FIFO.
// After the H-th unit of a step it pulses rh_done, the signal for stage 3 to start,
// because the candidate's recurrent product needs the whole rh vector.
//
// Interface: in_valid/in_ready/in_data from stage 1's FIFO; z_valid/z_ready/z_data to
// stage 4's FIFO; rh_we/rh_idx/rh_data write the rh buffer; h is the previous state.
// Timing: one unit per clock, 2 clocks from a pair entering to rh/z leaving; the
// stage holds when the z FIFO is full. The unit counter wraps every H units.
module sigmoid_stage
  import merinda_pkg::*;
#(
  parameter int unsigned H = 16,
  localparam int unsigned RW = (H > 1) ? $clog2(H) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [2*DATA_W-1:0] in_data,    // {r_pre, z_pre}
  input  word_t               h [H],
  output logic                z_valid,
  input  logic                z_ready,
  output word_t               z_data,
  output logic                rh_we,
  output logic [RW-1:0]       rh_idx,
  output word_t               rh_data,
  output logic                rh_done
);
  logic  s_valid, adv;
  word_t r_act, z_act;
  logic [RW-1:0] idx;

  assign adv      = !s_valid || z_ready;
  assign in_ready = adv;

  sigmoid_lut #(.DATA_W(DATA_W), .FRAC(FRAC)) u_sig_r (
    .clk, .en(adv), .x(word_t'(in_data[2*DATA_W-1:DATA_W])), .y(r_act));
  sigmoid_lut #(.DATA_W(DATA_W), .FRAC(FRAC)) u_sig_z (
    .clk, .en(adv), .x(word_t'(in_data[DATA_W-1:0])), .y(z_act));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid <= 1'b0; idx <= '0;
    end else begin
      if (adv) s_valid <= in_valid;
      if (s_valid && z_ready) idx <= (32'(idx) == H - 1) ? '0 : idx + 1'b1;
    end
  end

  assign z_valid = s_valid;
  assign z_data  = z_act;
  assign rh_we   = s_valid && z_ready;
  assign rh_idx  = idx;
  assign rh_data = fx_mul(r_act, h[idx]);
  assign rh_done = rh_we && (32'(idx) == H - 1);
endmodule
