// w_factor_rom: twiddle-factor ROM shared by the two NTT cores.
//
// Entry e holds w_N^e mod P for the N-point transform (N = 16^LOGN16, 65536 by default),
// where w_N = W65536^(65536/N). Sixteen exponents are looked up per cycle, one per
// butterfly lane; with `inverse` set the ROM returns w_N^-e = w_N^(N-e), so the same
// table serves the forward transform and the inverse. Reads are combinational.
// The table is computed by an initial loop (successive products by w_N) rather than
// read from a file. The paper names this ROM and shows it feeding both cores'
// twiddle multipliers; its size, port count and contents follow from the transform.
module w_factor_rom
  import pa_pkg::*;
#(
  parameter int LOGN16 = 4,
  localparam int LOGN  = 4 * LOGN16,
  localparam int N     = 1 << LOGN
)(
  input  logic            inverse,
  input  logic [LOGN-1:0] exp_in [RADIX],
  output fe_t             val    [RADIX]
);

  localparam fe_t WN = fe_pow(W65536, 65536 / N);

  fe_t rom [N];

  initial begin
    fe_t w;
    w = 64'd1;
    for (int e = 0; e < N; e++) begin
      rom[e] = w;
      w = fe_mul(w, WN);
    end
  end

  always_comb begin
    for (int t = 0; t < RADIX; t++) begin
      logic [LOGN-1:0] e;
      e = inverse ? LOGN'(-exp_in[t]) : exp_in[t];
      val[t] = rom[e];
    end
  end

endmodule
