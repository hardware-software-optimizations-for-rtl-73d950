// mem_reader_writer: the accelerator's memory reader/writer, the bridge between the
// DMA streams and the on-chip arrays.
//
// Reader. The input AXI4-Stream carries STREAM_W-bit beats of WPB = STREAM_W/16
// words, word 0 in the lowest bits. The words of one run follow each other without
// gaps, beat boundaries ignored:
//   1. if load_params: every parameter array, in the order of param_sel_e
//      ([Wr|Ur], [Wz|Uz], [Wh|Uh], br, bz, bh, Wy, by), each row by row, column 0
//      first; a matrix row of [W|U] holds the X input weights then the H recurrent
//      weights;
//   2. the initial state h_0, H words;
//   3. the inputs x_1 .. x_T, X words per step.
// Parameter words become writes on the `pwr` bus, h_0 words writes of the state
// buffer, and input words a valid/ready word stream to the GRU core. Words left in
// the last beat after the inputs are ignored. `core_start` pulses when h_0 is
// loaded, so the core runs while the inputs are still streaming in.
//
// Writer. Result words (the T hidden states, H words each, then the OUT dense-layer
// outputs) are packed into beats the same way; the beat that carries the last word
// is sent with tlast (unused words zero) and `done` pulses when it is accepted.
//
// The paper names this unit and says it streams inputs and parameters from DDR into
// on-chip memory and writes results back; the stream layout and the single-word-
// per-clock unpacking are this design's choices. The stream width default of 128
// bits is the paper's example.
module mem_reader_writer
  import merinda_pkg::*;
#(
  parameter int unsigned H        = 16,
  parameter int unsigned X        = 2,
  parameter int unsigned OUT      = 8,
  parameter int unsigned STREAM_W = 128,
  parameter int unsigned T_W      = 16,
  localparam int unsigned RW      = (H > 1) ? $clog2(H) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                load_params,
  input  logic [T_W-1:0]      seq_len,
  output logic                busy,
  output logic                done,
  // input stream
  input  logic                s_axis_tvalid,
  output logic                s_axis_tready,
  input  logic [STREAM_W-1:0] s_axis_tdata,
  // to the arrays
  output param_wr_t           pwr,
  output logic                h0_we,
  output logic [RW-1:0]       h0_idx,
  output word_t               h0_data,
  output logic                core_start,
  output logic                x_valid,
  input  logic                x_ready,
  output word_t               x_data,
  // results
  input  logic                h_valid,
  output logic                h_ready,
  input  word_t               h_data,
  input  logic                y_valid,
  output logic                y_ready,
  input  word_t               y_data,
  output logic                m_axis_tvalid,
  input  logic                m_axis_tready,
  output logic [STREAM_W-1:0] m_axis_tdata,
  output logic                m_axis_tlast
);
  localparam int unsigned WPB = STREAM_W / DATA_W;
  localparam int unsigned WI  = (WPB > 1) ? $clog2(WPB) : 1;
  localparam int unsigned C   = X + H;

  initial assert (STREAM_W % DATA_W == 0) else $error("STREAM_W must be a multiple of DATA_W");

  typedef enum logic [2:0] {R_IDLE, R_PARAM, R_H0, R_X, R_END} rphase_e;
  rphase_e rphase;

  // ---------------- unpacker ----------------
  logic [STREAM_W-1:0] ib;
  logic                ib_valid;
  logic [WI-1:0]       wi;
  word_t               w;
  logic                consume;
  assign w = word_t'(ib[32'(wi)*DATA_W +: DATA_W]);
  assign s_axis_tready = !ib_valid && (rphase inside {R_PARAM, R_H0, R_X});

  always_comb begin
    unique case (rphase)
      R_PARAM, R_H0: consume = ib_valid;
      R_X:           consume = ib_valid && x_ready;
      default:       consume = 1'b0;
    endcase
  end
  assign x_valid = ib_valid && (rphase == R_X);
  assign x_data  = w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ib_valid <= 1'b0; wi <= '0; ib <= '0;
    end else if (s_axis_tvalid && s_axis_tready) begin
      ib <= s_axis_tdata; ib_valid <= 1'b1; wi <= '0;
    end else if (consume) begin
      if (32'(wi) == WPB - 1) ib_valid <= 1'b0;
      wi <= wi + 1'b1;
    end else if (rphase == R_END) begin
      ib_valid <= 1'b0;
    end
  end

  // ---------------- reader sequencing ----------------
  param_sel_e        sel;
  logic [IDX_W-1:0]  row, col;
  logic [31:0]       x_left;
  logic [IDX_W-1:0]  nrows, ncols;
  always_comb begin
    unique case (sel)
      SEL_WUR, SEL_WUZ, SEL_WUH: begin nrows = IDX_W'(H);   ncols = IDX_W'(C); end
      SEL_BR,  SEL_BZ,  SEL_BH:  begin nrows = IDX_W'(H);   ncols = IDX_W'(1); end
      SEL_WY:                    begin nrows = IDX_W'(OUT); ncols = IDX_W'(H); end
      default:                   begin nrows = IDX_W'(OUT); ncols = IDX_W'(1); end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rphase <= R_IDLE; sel <= SEL_WUR; row <= '0; col <= '0; x_left <= '0;
      pwr <= '0; h0_we <= 1'b0; h0_idx <= '0; h0_data <= '0; core_start <= 1'b0;
    end else begin
      pwr.we <= 1'b0; h0_we <= 1'b0; core_start <= 1'b0;
      unique case (rphase)
        R_IDLE: if (start) begin
          rphase <= load_params ? R_PARAM : R_H0;
          sel <= SEL_WUR; row <= '0; col <= '0;
          x_left <= 32'(seq_len) * X;
        end
        R_PARAM: if (consume) begin
          pwr <= '{we: 1'b1, sel: sel, row: row, col: col, data: w};
          if (col != ncols - 1'b1) col <= col + 1'b1;
          else begin
            col <= '0;
            if (row != nrows - 1'b1) row <= row + 1'b1;
            else begin
              row <= '0;
              if (sel == SEL_BY) rphase <= R_H0;
              else               sel <= param_sel_e'(sel + 1'b1);
            end
          end
        end
        R_H0: if (consume) begin
          h0_we <= 1'b1; h0_idx <= RW'(row); h0_data <= w;
          if (32'(row) != H - 1) row <= row + 1'b1;
          else begin
            row <= '0; rphase <= R_X; core_start <= 1'b1;
          end
        end
        R_X: if (consume) begin
          x_left <= x_left - 1;
          if (x_left == 32'd1) rphase <= R_END;
        end
        R_END: rphase <= R_IDLE;          // last beat dropped by the beat buffer
        default: rphase <= R_IDLE;
      endcase
    end
  end

  // ---------------- packer ----------------
  logic [31:0] out_cnt, out_total;
  logic [WI-1:0] oi;
  logic in_h, take_h, take_y, take, last_word;
  word_t ow;
  assign in_h      = out_cnt < out_total - OUT;
  assign h_ready   = !m_axis_tvalid && in_h && busy;
  assign y_ready   = !m_axis_tvalid && !in_h && busy;
  assign take_h    = h_valid && h_ready;
  assign take_y    = y_valid && y_ready;
  assign take      = take_h || take_y;
  assign ow        = take_h ? h_data : y_data;
  assign last_word = (out_cnt == out_total - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; out_cnt <= '0; out_total <= '0; oi <= '0;
      m_axis_tvalid <= 1'b0; m_axis_tdata <= '0; m_axis_tlast <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; out_cnt <= '0; oi <= '0;
        out_total <= 32'(seq_len) * H + OUT;
      end
      if (m_axis_tvalid && m_axis_tready) begin
        m_axis_tvalid <= 1'b0; m_axis_tdata <= '0; m_axis_tlast <= 1'b0;
        if (m_axis_tlast) begin busy <= 1'b0; done <= 1'b1; end
      end else if (take) begin
        m_axis_tdata[32'(oi)*DATA_W +: DATA_W] <= ow;
        out_cnt <= out_cnt + 1;
        oi      <= oi + 1'b1;
        if (32'(oi) == WPB - 1 || last_word) begin
          m_axis_tvalid <= 1'b1;
          m_axis_tlast  <= last_word;
          oi            <= '0;
        end
      end
    end
  end

  a_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata) && $stable(m_axis_tlast));
endmodule
