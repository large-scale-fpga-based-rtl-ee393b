// ntt_core: one N-point NTT core (NTTA or NTTB), N = 16^LOGN16 = 65536 by default.
//
// The N points (64-bit residues mod P) sit in 16 RAM banks of N/16 words, placed by
// ntt_addr_map. A transform is LOGN16 passes; each pass visits the N/16 butterfly
// groups, one group per clock: the 16 points of the group are read from the 16 banks,
// go through the radix-16 butterfly and the twiddle multiplier, and are written back to
// the same places (in-place).
//   * Forward (inverse=0): decimation in frequency. Pass p works on the hexadecimal
//     digit d = LOGN16-1-p; the butterfly comes first and output k of a group whose
//     position inside its sub-transform is j is multiplied by w_N^(k*j*N/16^(d+1)).
//     Natural-order input gives digit-reversed output.
//   * Inverse (inverse=1): decimation in time, d = p, the twiddle w_N^-(t*j*N/16^(d+1))
//     multiplies input t before the butterfly (run with the inverse root). Digit-reversed
//     input gives natural-order output, so forward, pointwise product and inverse need
//     no reordering pass. The 1/N scale is not applied here.
// Twiddles come from the shared w_factor_rom: the core drives tw_exp/tw_inv and takes
// tw_val back in the same cycle.
// Row port: while the core is idle, row_idx selects the 16 points 16*row_idx .. +15
// (natural index); row_rdata shows them combinationally and row_we writes row_wdata
// at the clock edge.
// Timing: start (while idle) -> busy for LOGN16*N/16 cycles -> one-cycle done pulse.
// Following the paper: 65536 points, radix 16 in 4 passes, 16 RAMs, butterfly followed
// by the twiddle multiplier (Fig. 2). This design's own choices: the DIT order for the
// inverse, single-cycle read-modify-write of a group (asynchronous RAM reads) and the
// row port.
module ntt_core
  import pa_pkg::*;
#(
  parameter int LOGN16 = 4,
  localparam int LOGN  = 4 * LOGN16,
  localparam int N     = 1 << LOGN,
  localparam int DEPTH = N / RADIX,
  localparam int AW    = (LOGN > 4) ? LOGN - 4 : 1
)(
  input  logic            clk,
  input  logic            rst_n,
  // row port (idle only)
  input  logic            row_we,
  input  logic [AW-1:0]   row_idx,
  input  fe_t             row_wdata [RADIX],
  output fe_t             row_rdata [RADIX],
  // transform control
  input  logic            start,
  input  logic            inverse,
  output logic            busy,
  output logic            done,
  // twiddle ROM lookup
  output logic [LOGN-1:0] tw_exp [RADIX],
  output logic            tw_inv,
  input  fe_t             tw_val [RADIX]
);

  fe_t ram [RADIX][DEPTH];

  logic [$clog2(LOGN16+1)-1:0] pass_q;
  logic [AW-1:0]               grp_q;
  logic                        inv_q;

  logic [LOGN-1:0] idx  [RADIX];
  logic [3:0]      bank [RADIX];
  logic [AW-1:0]   addr [RADIX];
  fe_t             rd   [RADIX];
  fe_t             bf_in  [RADIX];
  fe_t             bf_out [RADIX];
  fe_t             wr   [RADIX];

  ntt_addr_map #(.LOGN16(LOGN16)) u_map (.idx(idx), .bank(bank), .addr(addr));

  // Index generation: a row, or the butterfly group grp_q of digit d.
  always_comb begin
    int d;
    int unsigned g, lo, hi, j;
    d  = inv_q ? int'(pass_q) : LOGN16 - 1 - int'(pass_q);
    g  = busy ? 32'(grp_q) : 32'(row_idx);
    lo = g & ((32'd1 << (4 * d)) - 1);
    hi = g >> (4 * d);
    j  = lo;
    for (int t = 0; t < RADIX; t++) begin
      if (busy) begin
        idx[t]    = LOGN'((hi << (4 * d + 4)) | (32'(t) << (4 * d)) | lo);
        tw_exp[t] = LOGN'((32'(t) * j) << (LOGN - 4 * (d + 1)));
      end else begin
        idx[t]    = LOGN'((g << 4) | 32'(t));
        tw_exp[t] = '0;
      end
    end
  end

  assign tw_inv = inv_q;

  // Read 16 banks, butterfly and twiddle multiplier (DIF: after, DIT: before).
  always_comb begin
    for (int t = 0; t < RADIX; t++) begin
      rd[t]        = ram[bank[t]][addr[t]];
      row_rdata[t] = rd[t];
      bf_in[t]     = inv_q ? fe_mul(rd[t], tw_val[t]) : rd[t];
    end
  end

  radix16_butterfly u_bfly (.inverse(inv_q), .x(bf_in), .y(bf_out));

  always_comb begin
    for (int t = 0; t < RADIX; t++)
      wr[t] = busy ? (inv_q ? bf_out[t] : fe_mul(bf_out[t], tw_val[t])) : row_wdata[t];
  end

  always_ff @(posedge clk) begin
    if (busy || row_we)
      for (int t = 0; t < RADIX; t++) ram[bank[t]][addr[t]] <= wr[t];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      pass_q <= '0;
      grp_q  <= '0;
      inv_q  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          pass_q <= '0;
          grp_q  <= '0;
          inv_q  <= inverse;
        end
      end else if (32'(grp_q) == DEPTH - 1) begin
        grp_q <= '0;
        if (32'(pass_q) == LOGN16 - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          pass_q <= pass_q + 1'b1;
        end
      end else begin
        grp_q <= grp_q + 1'b1;
      end
    end
  end

  // The 16 points touched in one cycle must sit in 16 different banks.
  logic [RADIX-1:0] bank_hit;
  always_comb begin
    bank_hit = '0;
    for (int t = 0; t < RADIX; t++) bank_hit[bank[t]] = 1'b1;
  end
  a_no_bank_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    (busy || row_we) |-> bank_hit == '1);

endmodule
