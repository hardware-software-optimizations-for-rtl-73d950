// dot_engine: the PE array. UNROLL multiply-accumulate lanes, fed from a banked
// weight memory, compute y[row] = sum_c W[row][c] * v[c] + bias[row] for every row
// of a ROWS x COLS matrix, one row after the other.
//
// How it works. A row is split into NB = ceil(COLS/UNROLL) beats of UNROLL columns;
// lane l takes column beat*UNROLL + l. The weights of a beat are fetched from the
// cyclically partitioned memory (weight_bank_mem), which offers 2*BANKS read ports
// per clock. A beat therefore takes SUB = ceil(UNROLL/(2*BANKS)) clocks: in
// sub-cycle s the lanes s*2*BANKS .. s*2*BANKS+2*BANKS-1 are served. This is the
// paper's rule II >= ceil(R/(2B)) made concrete: with UNROLL=4 one bank gives II=2
// per beat and two or more banks give II=1 (paper Fig. 7). Each lane accumulates
// its own partial sum at full precision; when the last beat of a row is in, the
// lane sums are added, the bias is added in the same step (the paper folds biases
// into the DSP post-adder), and the result is shifted to Q(.FRAC) and saturated to
// DATA_W bits. Columns past COLS in the last beat contribute zero.
//
// Interface. Pulse `start` while idle; the operand vector `opv` and `bias` must stay
// stable until `done`. Results leave on a valid/ready port (out_valid, out_ready,
// out_data, out_row) in row order. When a result is not taken, the whole engine,
// including the memory's output register (rd_en), holds. `done` pulses with the
// hand-over of the last row.
//
// Timing without back-pressure: the first result is valid NB*SUB+3 clocks after
// `start`, and one result follows every NB*SUB clocks; the last is valid
// ROWS*NB*SUB+3 clocks after `start`. The beat/sub-cycle schedule and the latency
// are this design's choices; the paper gives only the lane count and banking rule.
module dot_engine #(
  parameter int unsigned ROWS   = 16,
  parameter int unsigned COLS   = 18,
  parameter int unsigned UNROLL = 4,
  parameter int unsigned BANKS  = 4,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned FRAC   = 12,
  parameter int unsigned ACC_W  = 48,
  localparam int unsigned CPB   = (COLS + BANKS - 1) / BANKS,
  localparam int unsigned DEPTH = ROWS * CPB,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned RW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned BW    = (BANKS > 1) ? $clog2(BANKS) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  input  logic signed [DATA_W-1:0]  opv  [COLS],
  input  logic signed [DATA_W-1:0]  bias [ROWS],
  // banked weight memory
  output logic                      rd_en,
  output logic [AW-1:0]             rd_addr [BANKS][2],
  input  logic signed [DATA_W-1:0]  rd_data [BANKS][2],
  // results
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic signed [DATA_W-1:0]  out_data,
  output logic [RW-1:0]             out_row
);
  localparam int unsigned NB    = (COLS + UNROLL - 1) / UNROLL;
  localparam int unsigned PORTS = 2 * BANKS;
  localparam int unsigned SUB   = (UNROLL + PORTS - 1) / PORTS;
  localparam int unsigned SUM_W = ACC_W + $clog2(UNROLL) + 2;
  localparam logic signed [SUM_W-1:0] SAT_HI = (SUM_W'(1) <<< (DATA_W - 1)) - 1;
  localparam logic signed [SUM_W-1:0] SAT_LO = -(SUM_W'(1) <<< (DATA_W - 1));

  initial begin
    assert (BANKS >= 1 && UNROLL >= 1) else $error("dot_engine: BANKS and UNROLL must be >= 1");
  end

  logic adv;           // pipeline advances this clock
  assign adv   = !(out_valid && !out_ready);
  assign rd_en = adv;

  // ---------------- issue: row / beat / sub-cycle counters ----------------
  logic          issuing;
  logic [RW-1:0] row_i;
  logic [$clog2(NB+1)-1:0]  beat_i;
  logic [$clog2(SUB+1)-1:0] sub_i;
  logic last_sub, last_beat, last_row;
  assign last_sub  = (32'(sub_i)  == SUB - 1);
  assign last_beat = (32'(beat_i) == NB - 1);
  assign last_row  = (32'(row_i)  == ROWS - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0; row_i <= '0; beat_i <= '0; sub_i <= '0;
    end else if (start && !busy) begin
      issuing <= 1'b1; row_i <= '0; beat_i <= '0; sub_i <= '0;
    end else if (issuing && adv) begin
      if (!last_sub) sub_i <= sub_i + 1'b1;
      else begin
        sub_i <= '0;
        if (!last_beat) beat_i <= beat_i + 1'b1;
        else begin
          beat_i <= '0;
          if (!last_row) row_i <= row_i + 1'b1;
          else           issuing <= 1'b0;
        end
      end
    end
  end

  // column, bank and port of each lane in the current beat
  always_comb begin
    for (int b = 0; b < int'(BANKS); b++) begin
      rd_addr[b][0] = '0;
      rd_addr[b][1] = '0;
    end
    for (int l = 0; l < int'(UNROLL); l++) begin
      int unsigned c;
      c = 32'(beat_i) * UNROLL + 32'(l);
      if (32'(l) / PORTS == 32'(sub_i))
        rd_addr[c % BANKS][(32'(l) / BANKS) % 2] = AW'(32'(row_i) * CPB + c / BANKS);
    end
  end

  // ---------------- MAC stage: lanes receive their weights ----------------
  logic                     m_en  [UNROLL];
  logic                     m_clr [UNROLL];
  logic signed [DATA_W-1:0] m_op  [UNROLL];
  logic [BW-1:0]            m_bank [UNROLL];
  logic                     m_last;
  logic [RW-1:0]            m_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < int'(UNROLL); l++) begin
        m_en[l] <= 1'b0; m_clr[l] <= 1'b0; m_op[l] <= '0; m_bank[l] <= '0;
      end
      m_last <= 1'b0; m_row <= '0;
    end else if (adv) begin
      for (int l = 0; l < int'(UNROLL); l++) begin
        int unsigned c;
        c = 32'(beat_i) * UNROLL + 32'(l);
        m_en[l]   <= issuing && (32'(l) / PORTS == 32'(sub_i));
        m_clr[l]  <= (beat_i == '0);
        m_op[l]   <= (c < COLS) ? opv[c < COLS ? c : 0] : '0;
        m_bank[l] <= BW'(c % BANKS);
      end
      m_last <= issuing && last_sub && last_beat;
      m_row  <= row_i;
    end
  end

  logic signed [ACC_W-1:0] acc [UNROLL];
  for (genvar l = 0; l < UNROLL; l++) begin : g_lane
    mac_lane #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_lane (
      .clk, .rst_n,
      .en  (m_en[l] && adv),
      .clr (m_clr[l]),
      .a   (rd_data[m_bank[l]][(l / BANKS) % 2]),
      .b   (m_op[l]),
      .acc (acc[l])
    );
  end

  // ---------------- reduce: lane sums + bias, narrow to a word ----------------
  logic          q_last;
  logic [RW-1:0] q_row;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_last <= 1'b0; q_row <= '0;
    end else if (adv) begin
      q_last <= m_last; q_row <= m_row;
    end
  end

  logic signed [SUM_W-1:0] total;
  logic signed [SUM_W-1:0] shifted;
  logic signed [DATA_W-1:0] narrowed;
  always_comb begin
    total = SUM_W'(bias[q_row]) <<< FRAC;
    for (int l = 0; l < int'(UNROLL); l++) total += SUM_W'(acc[l]);
    shifted = total >>> FRAC;
    if (shifted > SAT_HI)
      narrowed = DATA_W'(SAT_HI);
    else if (shifted < SAT_LO)
      narrowed = DATA_W'(SAT_LO);
    else
      narrowed = DATA_W'(shifted);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0; out_row <= '0;
    end else if (adv) begin
      out_valid <= q_last;
      if (q_last) begin
        out_data <= narrowed;
        out_row  <= q_row;
      end
    end
  end

  // ---------------- busy / done ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) busy <= 1'b1;
      else if (busy && out_valid && out_ready && 32'(out_row) == ROWS - 1) begin
        busy <= 1'b0; done <= 1'b1;
      end
    end
  end

  // a result is never dropped: once valid it stays until taken
  property p_hold;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  a_hold: assert property (p_hold);
endmodule
