// large_int_mul: NTT-based multiplier for integers of up to N/2 24-bit digits
// (N = 65536 points: 32768 * 24 = 786432 bits per operand by default).
//
// Operands are loaded as rows of 16 digits, operand A into core NTTA and operand B into
// core NTTB; rows not written must have been written with zeros by the caller, so the
// upper half of each core holds zeros and the cyclic convolution equals the product.
// After start:
//   1. FWD: both cores run the forward transform at the same time, in lock step, and
//      share one twiddle ROM (w_factor_rom), as in the paper's figure.
//   2. PW:  one row per cycle, NTTA[i] <= NTTA[i] * NTTB[i] * N^-1 mod P (the pointwise
//      multiplier; the 1/N of the inverse transform is folded in here).
//   3. INV: NTTA runs the inverse transform. NTTA then holds the product's N
//      coefficients c_i (product = sum c_i * 2^(24 i), each c_i < 2^63), in natural
//      order, readable on the rd_row port.
// Timing: done pulses 2*LOGN16*N/16 + N/16 + 3 cycles after start (36867 cycles at
// the default size). Load and read rows only while busy is low.
// Following the paper: two parallel NTT cores, shared W factor ROM, pointwise
// multiplier, 24-bit points, P = 2^64-2^32+1. This design's own choices: the inverse
// transform is run on NTTA (the paper does not say where the INTT is done) and the
// row-wide load/read ports.
module large_int_mul
  import pa_pkg::*;
#(
  parameter int LOGN16 = 4,
  localparam int LOGN  = 4 * LOGN16,
  localparam int N     = 1 << LOGN,
  localparam int DEPTH = N / RADIX,
  localparam int AW    = (LOGN > 4) ? LOGN - 4 : 1
)(
  input  logic          clk,
  input  logic          rst_n,
  // operand load, one row of 16 digits per cycle (idle only)
  input  logic          ld_we_a,
  input  logic          ld_we_b,
  input  logic [AW-1:0] ld_row,
  input  digit_t        ld_a [RADIX],
  input  digit_t        ld_b [RADIX],
  // control
  input  logic          start,
  output logic          busy,
  output logic          done,
  // product coefficients (idle only)
  input  logic [AW-1:0] rd_row,
  output fe_t           rd_data [RADIX]
);

  localparam fe_t NINV = P - ((P - 64'd1) >> LOGN);

  typedef enum logic [1:0] {S_IDLE, S_FWD, S_PW, S_INV} state_e;
  state_e state_q;

  logic [AW-1:0] pw_row_q;

  // core A
  logic          a_we, a_start, a_inv, a_busy, a_done;
  logic [AW-1:0] a_row;
  fe_t           a_wdata [RADIX];
  fe_t           a_rdata [RADIX];
  logic [LOGN-1:0] a_tw_exp [RADIX];
  logic          a_tw_inv;
  // core B
  logic          b_we, b_start, b_busy, b_done;
  logic [AW-1:0] b_row;
  fe_t           b_wdata [RADIX];
  fe_t           b_rdata [RADIX];
  logic [LOGN-1:0] b_tw_exp [RADIX];
  logic          b_tw_inv;
  // shared ROM
  fe_t           tw_val [RADIX];

  always_comb begin
    a_we  = 1'b0;
    b_we  = ld_we_b && state_q == S_IDLE;
    a_row = ld_we_a ? ld_row : rd_row;
    b_row = ld_row;
    for (int t = 0; t < RADIX; t++) begin
      a_wdata[t] = {40'b0, ld_a[t]};
      b_wdata[t] = {40'b0, ld_b[t]};
    end
    if (state_q == S_IDLE) begin
      a_we = ld_we_a;
    end else if (state_q == S_PW) begin
      a_we  = 1'b1;
      a_row = pw_row_q;
      b_row = pw_row_q;
      for (int t = 0; t < RADIX; t++)
        a_wdata[t] = fe_mul(fe_mul(a_rdata[t], b_rdata[t]), NINV);
    end
  end

  assign a_start = (state_q == S_IDLE && start) || (state_q == S_PW && 32'(pw_row_q) == DEPTH - 1);
  assign a_inv   = (state_q == S_PW);
  assign b_start = (state_q == S_IDLE && start);

  ntt_core #(.LOGN16(LOGN16)) u_ntta (
    .clk, .rst_n,
    .row_we(a_we), .row_idx(a_row), .row_wdata(a_wdata), .row_rdata(a_rdata),
    .start(a_start), .inverse(a_inv), .busy(a_busy), .done(a_done),
    .tw_exp(a_tw_exp), .tw_inv(a_tw_inv), .tw_val(tw_val)
  );

  ntt_core #(.LOGN16(LOGN16)) u_nttb (
    .clk, .rst_n,
    .row_we(b_we), .row_idx(b_row), .row_wdata(b_wdata), .row_rdata(b_rdata),
    .start(b_start), .inverse(1'b0), .busy(b_busy), .done(b_done),
    .tw_exp(b_tw_exp), .tw_inv(b_tw_inv), .tw_val(tw_val)
  );

  w_factor_rom #(.LOGN16(LOGN16)) u_rom (.inverse(a_tw_inv), .exp_in(a_tw_exp), .val(tw_val));

  assign rd_data = a_rdata;
  assign busy    = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      pw_row_q <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) state_q <= S_FWD;
        S_FWD:  if (a_done) begin state_q <= S_PW; pw_row_q <= '0; end
        S_PW: begin
          pw_row_q <= pw_row_q + 1'b1;
          if (32'(pw_row_q) == DEPTH - 1) state_q <= S_INV;
        end
        S_INV: if (a_done) begin state_q <= S_IDLE; done <= 1'b1; end
      endcase
    end
  end

  // The ROM follows core A; core B may only run while it needs the same twiddles, and
  // both forward transforms end together.
  logic same_tw;
  always_comb begin
    same_tw = !a_tw_inv && !b_tw_inv;
    for (int t = 0; t < RADIX; t++) same_tw &= (a_tw_exp[t] == b_tw_exp[t]);
  end
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) b_busy |-> (a_busy && same_tw));
  a_same_end: assert property (@(posedge clk) disable iff (!rst_n) b_done |-> a_done);

endmodule
