// mh_mod_acc: modular accumulation unit of the MH function,
//   z = ((b * y + c) mod 2^GAMMA) >> (GAMMA - l'),   i.e. the top l' bits.
//
// The seed c is first written into the unit's store, a row of 16 24-bit digits per
// clock (c_we/c_row/c_data). start then runs one pass over product coefficients
// i = 0 .. Q (Q = GAMMA/24, one per clock, fetched through coef_row/coef_data): each
// coefficient plus the running carry gives product digit d_i, which is added with carry
// to stored digit i. Digit Q keeps only its OFF = GAMMA%24 low bits and every carry out
// of bit GAMMA-1 is dropped: that is the reduction mod 2^GAMMA. Duration Q+1 cycles, then
// a done pulse.
// Output: out_k selects output digit k, and out_digit returns bits
// GAMMA-l'+24k .. GAMMA-l'+24k+23 of z (bits at or above GAMMA read as 0), combinationally.
// The caller uses the first ceil(l'/24) digits; the last one holds l' mod 24 bits.
// The paper gives the function ((b*x + c) mod 2^alpha, then keep the top bits) and that it
// shares the multiplier and the accumulation style of the MMH unit; the digit datapath
// and the output funnel are this design's own.
module mh_mod_acc
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
  // load c
  input  logic          c_we,
  input  logic [RW-1:0] c_row,
  input  digit_t        c_data [RADIX],
  // accumulate b*y
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [CW-1:0] coef_row,
  input  fe_t           coef_data [RADIX],
  // top l' bits
  input  logic [31:0]   l_rem,
  input  logic [31:0]   out_k,
  output digit_t        out_digit
);

  localparam digit_t TOP_MASK = digit_t'((1 << OFF) - 1);

  digit_t z [ROWS][RADIX];

  logic        run_q;
  logic [31:0] i_q;
  logic [40:0] pc_q;
  logic        lc_q;

  logic [64:0] t;
  digit_t      d, wdata;
  logic [24:0] s;

  always_comb begin
    t = {1'b0, coef_data[i_q[3:0]]} + {24'b0, pc_q};
    d = t[23:0];
    s = {1'b0, z[i_q[4 +: RW]][i_q[3:0]]} + {1'b0, d} + {24'b0, lc_q};
    wdata = (i_q == Q) ? (s[23:0] & TOP_MASK) : s[23:0];
  end

  assign coef_row = CW'(i_q >> 4);
  assign busy     = run_q;

  always_ff @(posedge clk) begin
    if (run_q)
      z[i_q[4 +: RW]][i_q[3:0]] <= wdata;
    else if (c_we)
      for (int c = 0; c < RADIX; c++) z[c_row][c] <= c_data[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q <= 1'b0;
      i_q   <= '0;
      pc_q  <= '0;
      lc_q  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!run_q) begin
        i_q  <= '0;
        pc_q <= '0;
        lc_q <= 1'b0;
        if (start) run_q <= 1'b1;
      end else begin
        pc_q <= t[64:24];
        lc_q <= s[24];
        if (i_q == Q) begin
          run_q <= 1'b0;
          done  <= 1'b1;
        end else begin
          i_q <= i_q + 1;
        end
      end
    end
  end

  // Output funnel: bit position GAMMA - l' + 24*out_k.
  always_comb begin
    logic [31:0] base, w;
    logic [4:0]  sh;
    digit_t      lo, hi;
    base = 32'(GAMMA) - l_rem + 32'(DIGIT_W) * out_k;
    w    = base / DIGIT_W;
    sh   = 5'(base % DIGIT_W);
    lo   = (w <= Q)     ? z[w[4 +: RW]][w[3:0]] : '0;
    hi   = (w + 1 <= Q) ? z[RW'((w + 1) >> 4)][4'(w + 1)] : '0;
    out_digit = digit_t'({hi, lo} >> sh);
  end

endmodule
