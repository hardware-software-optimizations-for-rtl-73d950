// interp_stage: pipeline stage 4, the final interpolation of the GRU update
//   h_t[i] = (1 - z_t[i]) * h~_t[i] + z_t[i] * h_{t-1}[i]
// written, as in the paper, as two multiplies and one add per unit.
//
// It pairs the update gate z (from stage 2's FIFO) with the candidate h~ (from stage
// 3's FIFO) of the same unit, blends, writes h_t[i] back into the state buffer (the
// old value of unit i is not needed any more once this unit is blended, so the state
// is updated in place) and sends it out as a result word. step_done pulses after
// the H-th unit of a step.
//
// Interface: z_*/c_* valid/ready inputs, h the state buffer, h_we/h_idx/h_data the
// write port of the state buffer, out_* the result word stream.
// Timing: one unit per clock, result registered (1 clock); held by out_ready.
module interp_stage
  import merinda_pkg::*;
#(
  parameter int unsigned H = 16,
  localparam int unsigned RW = (H > 1) ? $clog2(H) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          z_valid,
  output logic          z_ready,
  input  word_t         z_data,
  input  logic          c_valid,
  output logic          c_ready,
  input  word_t         c_data,
  input  word_t         h [H],
  output logic          h_we,
  output logic [RW-1:0] h_idx,
  output word_t         h_data,
  output logic          out_valid,
  input  logic          out_ready,
  output word_t         out_data,
  output logic          step_done
);
  logic  adv, pop;
  word_t blend;
  logic [RW-1:0] idx;

  assign adv     = !out_valid || out_ready;
  assign pop     = adv && z_valid && c_valid;
  assign z_ready = pop;
  assign c_ready = pop;
  assign blend   = fx_add(fx_mul(ONE - z_data, c_data), fx_mul(z_data, h[idx]));

  assign h_we   = pop;
  assign h_idx  = idx;
  assign h_data = blend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0; idx <= '0; step_done <= 1'b0;
    end else begin
      step_done <= pop && (32'(idx) == H - 1);
      if (adv) out_valid <= pop;
      if (pop) begin
        out_data <= blend;
        idx      <= (32'(idx) == H - 1) ? '0 : idx + 1'b1;
      end
    end
  end
endmodule
