// merinda_pkg: shared fixed-point format, parameter-load bus and helpers for the
// MERINDA GRU accelerator.
//
// Every value that travels between stages is a signed 16-bit fixed-point word with
// 12 fraction bits (Q4.12, range [-8, 8)). The paper uses 8-16 bit activations and
// 12-16 bit weights; this design takes 16 bits for both, and the Q4.12 split is its
// own choice. Products are formed at full precision (Q8.24), summed in a wide
// accumulator, then shifted right arithmetically (truncation toward minus infinity)
// and saturated back to Q4.12.
//
// Parameters (weights and biases) are written into the accelerator over a simple
// one-word-per-cycle write bus, param_wr_t, whose `sel` field names the target
// array. The order in which the input stream carries them is fixed by
// mem_reader_writer.
package merinda_pkg;

  localparam int unsigned DATA_W = 16;
  localparam int unsigned FRAC   = 12;
  localparam int unsigned IDX_W  = 16;   // row / column index width on the load bus

  typedef logic signed [DATA_W-1:0] word_t;

  localparam word_t ONE    = word_t'(1 << FRAC);
  localparam word_t W_MAX  = word_t'({1'b0, {(DATA_W-1){1'b1}}});
  localparam word_t W_MIN  = word_t'({1'b1, {(DATA_W-1){1'b0}}});

  // Target arrays of the parameter-load bus. The reset and update gates and the
  // candidate each keep their input (W) and recurrent (U) matrices side by side in
  // one array of X+H columns: columns 0..X-1 hold W, columns X..X+H-1 hold U.
  typedef enum logic [2:0] {
    SEL_WUR = 3'd0,   // [Wr | Ur], H rows
    SEL_WUZ = 3'd1,   // [Wz | Uz], H rows
    SEL_WUH = 3'd2,   // [Wh | Uh], H rows
    SEL_BR  = 3'd3,   // br, H entries (row index)
    SEL_BZ  = 3'd4,   // bz
    SEL_BH  = 3'd5,   // bh
    SEL_WY  = 3'd6,   // dense layer Wy, OUT rows x H columns
    SEL_BY  = 3'd7    // dense layer by
  } param_sel_e;

  typedef struct packed {
    logic              we;
    param_sel_e        sel;
    logic [IDX_W-1:0]  row;
    logic [IDX_W-1:0]  col;
    word_t             data;
  } param_wr_t;

  // Saturate a wide signed value to a word.
  function automatic word_t sat_word(input logic signed [63:0] v);
    if (v > 64'(signed'(W_MAX)))      return W_MAX;
    else if (v < 64'(signed'(W_MIN))) return W_MIN;
    else                              return word_t'(v);
  endfunction

  // Fixed-point product of two words, truncated and saturated to a word.
  function automatic word_t fx_mul(input word_t a, input word_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return sat_word(64'(p >>> FRAC));
  endfunction

  // Saturating word addition.
  function automatic word_t fx_add(input word_t a, input word_t b);
    return sat_word(64'(a) + 64'(b));
  endfunction

endpackage
