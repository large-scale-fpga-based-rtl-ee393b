// mmh_mod_acc: modular accumulation unit for the MMH sums,
//   y = sum_j a_j * x_j  mod (2^GAMMA - 1),  GAMMA = 756839 by default.
//
// The accumulator holds y as Q+1 24-bit digits (Q = GAMMA/24; the top digit keeps only
// OFF = GAMMA%24 bits) in 16 digit banks, so a whole row of 16 digits can be read at
// once. Because 2^GAMMA = 1 modulo 2^GAMMA - 1, a product v < 2^(2*GAMMA) is added as
// its low GAMMA bits plus its high GAMMA bits, and a carry out of bit GAMMA-1 re-enters
// at bit 0.
//
// acc_start: one pass over product coefficients i = 0 .. 2Q+1 (one per clock, fetched
// from the multiplier through coef_row/coef_data, 16 per row). Each coefficient (< 2^63)
// plus the running carry gives product digit d_i. For i <= Q, d_i is added to
// accumulator digit i; for i > Q the high-part digit k = i-Q-1, which is d_i:d_{i-1}
// shifted right by OFF, is added to digit k. A single carry runs through both halves
// (the carry out of the top digit of the low half is exactly the end-around carry into
// digit 0 of the high half); the carry left at the end is kept as `pending` and enters
// the next product's pass at digit 0. With first=1 the old accumulator contents are
// ignored (the sum restarts). Duration: 2Q+2 cycles, then a done pulse.
// norm_start: adds `pending` back in (repeating while a carry wraps) and replaces
// 2^GAMMA-1 by 0, leaving the canonical residue. Q+1 cycles per pass.
// rd_row/rd_data read a row of the accumulator combinationally (idle only).
// The paper gives the folding identity (a+b) mod (2^756839-1) = low parts + high parts
// and that one adder array and one store serve all accumulations; the digit-serial
// datapath, the pending carry and the canonicalisation pass are this design's own.
module mmh_mod_acc
  import pa_pkg::*;
#(
  parameter int GAMMA  = GAMMA_DEFAULT,
  parameter int LOGN16 = 4,
  localparam int Q     = GAMMA / DIGIT_W,
  localparam int OFF   = GAMMA % DIGIT_W,
  localparam int ROWS  = (Q + 1 + RADIX - 1) / RADIX,
  localparam int RW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int LOGN  = 4 * LOGN16,
  localparam int CW    = (LOGN > 4) ? LOGN - 4 : 1
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          acc_start,
  input  logic          first,
  input  logic          norm_start,
  output logic          busy,
  output logic          done,
  // product coefficients from the multiplier
  output logic [CW-1:0] coef_row,
  input  fe_t           coef_data [RADIX],
  // accumulator rows
  input  logic [RW-1:0] rd_row,
  output digit_t        rd_data [RADIX]
);

  localparam digit_t TOP_MASK = digit_t'((1 << OFF) - 1);

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_NORM, S_ZERO} state_e;
  state_e state_q;

  digit_t acc [ROWS][RADIX];

  logic [31:0] i_q;        // coefficient index (ACC) or digit index (NORM/ZERO)
  logic        first_q;
  logic [40:0] pc_q;       // carry of the product's digit resolution
  digit_t      prev_q;     // previous product digit
  logic [1:0]  lc_q;       // carry of the modular addition
  logic [1:0]  pending_q;  // end-around carry not yet added back
  logic        ones_q;     // all digits so far are all-ones

  // Current word k and its addend.
  logic [31:0] k;
  logic [64:0] t;
  digit_t      d, addend, old, wdata;
  logic [25:0] s;
  logic [1:0]  cout;
  logic        we;

  always_comb begin
    t      = {1'b0, coef_data[i_q[3:0]]} + {24'b0, pc_q};
    d      = t[23:0];
    k      = (i_q <= Q) ? i_q : i_q - Q - 1;
    old    = acc[k[4 +: RW]][k[3:0]];
    addend = '0;
    if (state_q == S_ACC) begin
      if (i_q <= Q) addend = d;
      else          addend = digit_t'({d, prev_q} >> OFF);
      if (k == Q) addend = addend & TOP_MASK;
      if (i_q <= Q && first_q) old = '0;
    end
    s = {2'b0, old} + {2'b0, addend} + {24'b0, lc_q};
    if (k == Q) begin
      wdata = s[23:0] & TOP_MASK;
      cout  = 2'(s >> OFF);
    end else begin
      wdata = s[23:0];
      cout  = s[25:24];
    end
    if (state_q == S_ZERO) wdata = '0;
    we = (state_q != S_IDLE);
  end

  assign coef_row = CW'(i_q >> 4);
  assign busy     = (state_q != S_IDLE);

  always_comb begin
    for (int c = 0; c < RADIX; c++) rd_data[c] = acc[rd_row][c];
  end

  always_ff @(posedge clk) begin
    if (we) acc[k[4 +: RW]][k[3:0]] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      i_q       <= '0;
      first_q   <= 1'b0;
      pc_q      <= '0;
      prev_q    <= '0;
      lc_q      <= '0;
      pending_q <= '0;
      ones_q    <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          i_q <= '0;
          if (acc_start) begin
            state_q <= S_ACC;
            first_q <= first;
            pc_q    <= '0;
            prev_q  <= '0;
            lc_q    <= first ? 2'd0 : pending_q;
          end else if (norm_start) begin
            state_q <= S_NORM;
            lc_q    <= pending_q;
            ones_q  <= 1'b1;
          end
        end
        S_ACC: begin
          pc_q   <= t[64:24];
          prev_q <= d;
          lc_q   <= cout;
          if (i_q == 2 * Q + 1) begin
            pending_q <= cout;
            state_q   <= S_IDLE;
            done      <= 1'b1;
          end else begin
            i_q <= i_q + 1;
          end
        end
        S_NORM: begin
          lc_q   <= cout;
          ones_q <= ones_q && (wdata == ((k == Q) ? TOP_MASK : '1));
          if (i_q == Q) begin
            i_q <= '0;
            if (cout != 0) begin
              ones_q <= 1'b1;              // wrap again with the new carry
            end else if (ones_q && wdata == TOP_MASK) begin
              state_q <= S_ZERO;           // 2^GAMMA-1 is 0
            end else begin
              pending_q <= '0;
              state_q   <= S_IDLE;
              done      <= 1'b1;
            end
          end else begin
            i_q <= i_q + 1;
          end
        end
        S_ZERO: begin
          if (i_q == Q) begin
            pending_q <= '0;
            state_q   <= S_IDLE;
            done      <= 1'b1;
          end else begin
            i_q <= i_q + 1;
          end
        end
      endcase
    end
  end

  initial assert (OFF != 0) else $error("mmh_mod_acc: GAMMA must not be a multiple of 24");

endmodule
