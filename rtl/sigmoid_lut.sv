// sigmoid_lut: the logistic sigmoid 1/(1+e^-x) by table lookup, one clock of latency.
//
// The paper evaluates its gate nonlinearities with look-up tables held in LUT RAM
// or a small block RAM so that an activation costs one clock and no multiplier.
// Here the signed DATA_W-bit input with FRAC fraction bits is cut to a table index
// by keeping its top bits: idx = x >>> (FRAC - STEP_BITS), i.e. one entry per
// 1/2^STEP_BITS of input over the whole input range (256 entries for Q4.12 and
// STEP_BITS=4). Entry i holds round(2^FRAC * f((i + 0.5) / 2^STEP_BITS)) with i
// read as a signed index: the function at the middle of the input interval the
// entry covers. The table is computed at elaboration from that formula, so no data
// file is needed. Output range (0, 1) in the same fixed-point format.
// The index step and the mid-point rule are this design's choices; the paper
// gives neither the table size nor its contents.
//
// Interface: when en is high, x is sampled and y shows f(x) on the next clock.
module sigmoid_lut #(
  parameter int unsigned DATA_W    = 16,
  parameter int unsigned FRAC      = 12,
  parameter int unsigned STEP_BITS = 4,
  localparam int unsigned IW       = DATA_W - FRAC + STEP_BITS,
  localparam int unsigned N        = 1 << IW
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic signed [DATA_W-1:0] x,
  output logic signed [DATA_W-1:0] y
);
  typedef logic signed [DATA_W-1:0] table_t [N];

  function automatic table_t build();
    table_t t;
    real ONE_R, v, f;
    ONE_R = real'(1 << FRAC);
    for (int i = 0; i < int'(N); i++) begin
      // index i is the two's-complement bit pattern of the signed interval number
      v = (real'((i >= int'(N / 2)) ? i - int'(N) : i) + 0.5) / real'(1 << STEP_BITS);
      f = ONE_R / (1.0 + $exp(-v));
      t[i] = DATA_W'($rtoi(f + ((f >= 0.0) ? 0.5 : -0.5)));
    end
    return t;
  endfunction

  localparam table_t TABLE = build();

  logic [IW-1:0] idx;
  assign idx = IW'(x >>> (FRAC - STEP_BITS));

  always_ff @(posedge clk) if (en) y <= TABLE[idx];
endmodule
