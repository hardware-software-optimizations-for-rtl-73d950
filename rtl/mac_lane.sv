// mac_lane: one multiply-accumulate lane, the unit a DSP slice implements.
//
// Each enabled clock it forms the full-precision product a*b and either starts a
// new sum with it (clr=1) or adds it to the running sum (clr=0), so one product is
// computed and accumulated per clock, as the paper describes for its DSP MAC lanes.
// The sum is kept at ACC_W bits (48 by default, the width of a DSP48 accumulator); narrowing to the 16-bit stage
// format happens after the lanes are reduced, in dot_engine.
//
// Interface: en, clr, a, b sampled on the rising clock; acc is registered and valid
// the clock after the product was presented. Reset clears acc. Latency 1, II 1.
module mac_lane #(
  parameter int unsigned DATA_W = 16,
  parameter int unsigned ACC_W  = 48
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     clr,
  input  logic signed [DATA_W-1:0] a,
  input  logic signed [DATA_W-1:0] b,
  output logic signed [ACC_W-1:0]  acc
);
  logic signed [2*DATA_W-1:0] prod;
  assign prod = a * b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= (clr ? ACC_W'(0) : acc) + ACC_W'(prod);
  end
endmodule
