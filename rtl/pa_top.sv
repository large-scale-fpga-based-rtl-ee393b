// pa_top: hybrid privacy amplification (DM3H + MMH-MH) over GAMMA-bit blocks.
//
// The input key X (n blocks x_1..x_n of GAMMA bits, GAMMA = 756839, the last block padded
// with zeros after last_bits bits) is compressed into the key
//   K = y_1 || ... || y_m || z,   |K| = m*GAMMA + l'
// where y_i = sum_j a_{j+i-1} * x_j mod (2^GAMMA - 1)  (DM3H, one MMH sum per output block)
// and  z = top l' bits of (b * y_{m+1} + c) mod 2^GAMMA  (MMH-MH; skipped when l' = 0).
// Each of the up to (m+1)*n products goes through the one large_int_mul; the MMH sums
// build up in mmh_mod_acc, the MH tail in mh_mod_acc.
//
// Sequence, for each output block i = 0..m (0-based; the last only when l' > 0):
//   for j = 0..n-1: request x_j and a_{j+i}; load both, a row of 16 digits per clock,
//   into the multiplier (rows past the block are zero); if x_j is 2^GAMMA-1 it is
//   requested again with x_req_reload set and only NTTA is reloaded; multiply;
//   accumulate (restart the sum when j = 0).
//   Normalise the sum. For i < m, stream y_i out on the key port. For i = m, request c
//   (into mh_mod_acc) and b, load y_{m+1} from the accumulator into NTTA and b into NTTB,
//   multiply, run the MH pass and stream the l' bits of z.
// Source interface: after x_req (and/or s_req) the source delivers the block's
// ceil((Q+1)/16) rows in order, x_valid/x_row for key blocks and s_valid/s_row for seeds;
// during operand loads a row is taken only in a cycle where both x_valid and s_valid are
// high, so the two streams must be delivered in step (the reload takes x only, the c load
// s only). Each row holds 16 little-endian 24-bit digits. There is no backpressure.
// Key port: key_valid for one cycle per 24-bit digit, least significant digit of each
// block first, key_nbits valid low bits (GAMMA%24 in the last digit of a y block, the
// remainder of l' in the last digit of z), key_last on the final digit of K.
// Following the paper: Algorithm 1 (padding, split, reload of an all-ones block, m+1 MMH
// sums, MH on the last one, concatenation), reuse of one multiplier for DM3H and MH.
// This design's own: the source and key interfaces, the bit order of K, last_bits as
// the way to pass N, and the strictly sequential (non-overlapped) schedule.
module pa_top
  import pa_pkg::*;
#(
  parameter int GAMMA  = GAMMA_DEFAULT,
  parameter int LOGN16 = 4,
  localparam int Q     = GAMMA / DIGIT_W,
  localparam int OFF   = GAMMA % DIGIT_W,
  localparam int ROWS  = (Q + 1 + RADIX - 1) / RADIX,
  localparam int RW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int LOGN  = 4 * LOGN16,
  localparam int DEPTH = (1 << LOGN) / RADIX,
  localparam int CW    = (LOGN > 4) ? LOGN - 4 : 1
)(
  input  logic        clk,
  input  logic        rst_n,
  // job
  input  logic        start,
  input  logic [31:0] n_blocks,    // n >= 1
  input  logic [31:0] m_blocks,    // m >= 0
  input  logic [31:0] l_rem,       // l' < GAMMA
  input  logic [31:0] last_bits,   // bits of X in block n, 1..GAMMA
  output logic        busy,
  output logic        done,
  // key block source
  output logic        x_req,
  output logic [31:0] x_req_idx,
  output logic        x_req_reload,
  input  logic        x_valid,
  input  digit_t      x_row [RADIX],
  // seed source
  output logic        s_req,
  output seed_kind_e  s_req_kind,
  output logic [31:0] s_req_idx,
  input  logic        s_valid,
  input  digit_t      s_row [RADIX],
  // final key
  output logic        key_valid,
  output digit_t      key_digit,
  output logic [4:0]  key_nbits,
  output logic        key_last
);

  // The multiplier must hold the full product of two GAMMA-bit operands.
  initial assert (2 * (Q + 1) <= (1 << LOGN)) else $error("pa_top: GAMMA too large for the NTT");

  typedef enum logic [3:0] {
    S_IDLE, S_BLK, S_REQ, S_LOAD, S_CHECK, S_RELOAD, S_MUL, S_ACC, S_NORM,
    S_OUT_Y, S_REQ_C, S_LOAD_C, S_REQ_B, S_MH, S_OUT_Z, S_DONE
  } state_e;
  state_e state_q;

  logic [31:0] n_q, m_q, lrem_q, last_q;
  logic [31:0] blk_q, j_q, k_q, rem_q;
  logic [CW:0] row_q;          // one bit wider than a row index
  logic        mh_q;           // the multiplication is the MH one
  logic        ones_q;         // x_j loaded so far is all ones
  logic        go_q;           // one-cycle start pulses
  logic [1:0]  phase_q;        // 0: issue, 1: wait

  // multiplier
  logic          m_we_a, m_we_b, m_start, m_busy, m_done;
  logic [CW-1:0] m_row, m_rd_row;
  digit_t        m_ld_a [RADIX];
  digit_t        m_ld_b [RADIX];
  fe_t           m_rd_data [RADIX];
  // MMH accumulator
  logic          a_acc_start, a_norm_start, a_busy, a_done;
  logic [CW-1:0] a_coef_row;
  logic [RW-1:0] a_rd_row;
  digit_t        a_rd_data [RADIX];
  // MH unit
  logic          h_we, h_start, h_busy, h_done;
  logic [CW-1:0] h_coef_row;
  digit_t        h_out;

  large_int_mul #(.LOGN16(LOGN16)) u_mul (
    .clk, .rst_n,
    .ld_we_a(m_we_a), .ld_we_b(m_we_b), .ld_row(m_row), .ld_a(m_ld_a), .ld_b(m_ld_b),
    .start(m_start), .busy(m_busy), .done(m_done),
    .rd_row(m_rd_row), .rd_data(m_rd_data)
  );

  mmh_mod_acc #(.GAMMA(GAMMA), .LOGN16(LOGN16)) u_mmh (
    .clk, .rst_n,
    .acc_start(a_acc_start), .first(j_q == 0), .norm_start(a_norm_start),
    .busy(a_busy), .done(a_done),
    .coef_row(a_coef_row), .coef_data(m_rd_data),
    .rd_row(a_rd_row), .rd_data(a_rd_data)
  );

  mh_mod_acc #(.GAMMA(GAMMA), .LOGN16(LOGN16)) u_mh (
    .clk, .rst_n,
    .c_we(h_we), .c_row(RW'(row_q)), .c_data(s_row),
    .start(h_start), .busy(h_busy), .done(h_done),
    .coef_row(h_coef_row), .coef_data(m_rd_data),
    .l_rem(lrem_q), .out_k(k_q), .out_digit(h_out)
  );

  assign m_rd_row = h_busy ? h_coef_row : a_coef_row;

  // Key digit masked to the block boundary (GAMMA, or last_bits in the last block).
  logic [31:0] limit;
  logic        in_data;      // current row is inside the block
  logic        rows_ok;      // the row's data are present
  logic        row_ones;
  digit_t      x_masked [RADIX];

  always_comb begin
    limit   = (j_q == n_q - 1) ? last_q : 32'(GAMMA);
    in_data = 32'(row_q) < ROWS;
    row_ones = 1'b1;
    for (int c = 0; c < RADIX; c++) begin
      for (int b = 0; b < DIGIT_W; b++) begin
        logic [31:0] pos;
        pos = 32'(DIGIT_W) * (32'(RADIX) * 32'(row_q) + 32'(c)) + 32'(b);
        x_masked[c][b] = x_row[c][b] && (pos < limit);
        if (pos < GAMMA && !x_masked[c][b]) row_ones = 1'b0;
      end
    end
  end

  always_comb begin
    m_we_a  = 1'b0;
    m_we_b  = 1'b0;
    m_row   = CW'(row_q);
    h_we    = 1'b0;
    a_rd_row = RW'(row_q);
    rows_ok = 1'b1;
    for (int c = 0; c < RADIX; c++) begin
      m_ld_a[c] = '0;
      m_ld_b[c] = '0;
    end
    unique case (state_q)
      S_LOAD: begin
        if (mh_q) begin
          rows_ok = !in_data || s_valid;
          if (in_data) begin
            m_ld_a = a_rd_data;
            m_ld_b = s_row;
          end
        end else begin
          rows_ok = !in_data || (x_valid && s_valid);
          if (in_data) begin
            m_ld_a = x_masked;
            m_ld_b = s_row;
          end
        end
        m_we_a = rows_ok;
        m_we_b = rows_ok;
      end
      S_RELOAD: begin
        rows_ok = !in_data || x_valid;
        if (in_data) m_ld_a = x_masked;
        m_we_a = rows_ok && phase_q == 2'd1;
      end
      S_LOAD_C: begin
        rows_ok = s_valid;
        h_we    = s_valid && phase_q == 2'd1;
      end
      S_OUT_Y: a_rd_row = RW'(k_q >> 4);
      default: ;
    endcase
  end

  // Handshake rules between the sequencer and its units.
  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (m_we_a || m_we_b) |-> !m_busy);
  a_no_acc_start_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (a_acc_start || a_norm_start) |-> !a_busy);

  assign m_start      = (state_q == S_MUL) && go_q;
  assign a_acc_start  = (state_q == S_ACC) && go_q;
  assign a_norm_start = (state_q == S_NORM) && go_q;
  assign h_start      = (state_q == S_MH) && go_q;
  assign busy         = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      {n_q, m_q, lrem_q, last_q} <= '0;
      {blk_q, j_q, k_q, rem_q}   <= '0;
      row_q        <= '0;
      mh_q         <= 1'b0;
      ones_q       <= 1'b0;
      go_q         <= 1'b0;
      phase_q      <= '0;
      done         <= 1'b0;
      x_req        <= 1'b0;
      x_req_idx    <= '0;
      x_req_reload <= 1'b0;
      s_req        <= 1'b0;
      s_req_kind   <= SEED_A;
      s_req_idx    <= '0;
      key_valid    <= 1'b0;
      key_digit    <= '0;
      key_nbits    <= '0;
      key_last     <= 1'b0;
    end else begin
      done      <= 1'b0;
      x_req     <= 1'b0;
      s_req     <= 1'b0;
      go_q      <= 1'b0;
      key_valid <= 1'b0;
      key_last  <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          n_q <= n_blocks; m_q <= m_blocks; lrem_q <= l_rem; last_q <= last_bits;
          blk_q <= '0;
          state_q <= S_BLK;
        end
        S_BLK: begin
          j_q  <= '0;
          mh_q <= 1'b0;
          if (blk_q < m_q || (blk_q == m_q && lrem_q != 0)) state_q <= S_REQ;
          else state_q <= S_DONE;
        end
        S_REQ: begin
          x_req <= 1'b1; x_req_idx <= j_q; x_req_reload <= 1'b0;
          s_req <= 1'b1; s_req_kind <= SEED_A; s_req_idx <= j_q + blk_q;
          row_q  <= '0;
          ones_q <= 1'b1;
          state_q <= S_LOAD;
        end
        S_LOAD: if (rows_ok) begin
          if (in_data) ones_q <= ones_q && row_ones;
          if (32'(row_q) == DEPTH - 1) state_q <= mh_q ? S_MUL : S_CHECK;
          else row_q <= row_q + 1'b1;
          if (32'(row_q) == DEPTH - 1) go_q <= mh_q;
        end
        S_CHECK: begin
          if (ones_q) begin
            x_req <= 1'b1; x_req_idx <= j_q; x_req_reload <= 1'b1;
            row_q <= '0; ones_q <= 1'b1; phase_q <= 2'd1;
            state_q <= S_RELOAD;
          end else begin
            go_q <= 1'b1;
            state_q <= S_MUL;
          end
        end
        S_RELOAD: if (rows_ok) begin
          if (in_data) ones_q <= ones_q && row_ones;
          if (32'(row_q) == DEPTH - 1) begin
            phase_q <= '0;
            state_q <= S_CHECK;
          end else row_q <= row_q + 1'b1;
        end
        S_MUL: if (m_done) begin
          go_q <= 1'b1;
          state_q <= mh_q ? S_MH : S_ACC;
        end
        S_ACC: if (a_done) begin
          if (j_q + 1 < n_q) begin
            j_q <= j_q + 1;
            state_q <= S_REQ;
          end else begin
            go_q <= 1'b1;
            state_q <= S_NORM;
          end
        end
        S_NORM: if (a_done) begin
          k_q <= '0;
          if (blk_q < m_q) state_q <= S_OUT_Y;
          else state_q <= S_REQ_C;
        end
        S_OUT_Y: begin
          key_valid <= 1'b1;
          key_digit <= a_rd_data[k_q[3:0]];
          key_nbits <= (k_q == Q) ? 5'(OFF) : 5'(DIGIT_W);
          key_last  <= (k_q == Q) && (blk_q + 1 == m_q) && (lrem_q == 0);
          if (k_q == Q) begin
            blk_q <= blk_q + 1;
            state_q <= S_BLK;
          end else k_q <= k_q + 1;
        end
        S_REQ_C: begin
          s_req <= 1'b1; s_req_kind <= SEED_C; s_req_idx <= '0;
          row_q <= '0; phase_q <= 2'd1;
          state_q <= S_LOAD_C;
        end
        S_LOAD_C: if (rows_ok) begin
          if (32'(row_q) == ROWS - 1) begin
            phase_q <= '0;
            state_q <= S_REQ_B;
          end else row_q <= row_q + 1'b1;
        end
        S_REQ_B: begin
          s_req <= 1'b1; s_req_kind <= SEED_B; s_req_idx <= '0;
          row_q <= '0;
          mh_q  <= 1'b1;
          state_q <= S_LOAD;
        end
        S_MH: if (h_done) begin
          k_q   <= '0;
          rem_q <= lrem_q;
          state_q <= S_OUT_Z;
        end
        S_OUT_Z: begin
          key_valid <= 1'b1;
          key_digit <= h_out;
          key_nbits <= (rem_q > DIGIT_W) ? 5'(DIGIT_W) : 5'(rem_q);
          key_last  <= (rem_q <= DIGIT_W);
          rem_q <= rem_q - ((rem_q > DIGIT_W) ? DIGIT_W : rem_q);
          k_q   <= k_q + 1;
          if (rem_q <= DIGIT_W) state_q <= S_DONE;
        end
        S_DONE: begin
          done <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
