// ntt_addr_map: conflict-free placement of NTT points in the 16 RAM banks.
//
// A point with logical index i (LOGN16 hexadecimal digits d_{LOGN16-1}..d_0) is kept in
// bank (d_0 + d_1 + ... ) mod 16 at address i >> 4. A butterfly group varies exactly one
// hexadecimal digit over 0..15, and a load/unload row varies d_0, so in both cases the
// 16 points fall in 16 different banks and one cycle reads or writes all of them.
// Combinational. The paper shows an "Address Mapping" block beside RAM1..RAM16 without
// describing it; the digit-sum rule is this design's own choice.
module ntt_addr_map
  import pa_pkg::*;
#(
  parameter int LOGN16 = 4,
  localparam int LOGN  = 4 * LOGN16,
  localparam int AW    = (LOGN > 4) ? LOGN - 4 : 1
)(
  input  logic [LOGN-1:0] idx  [RADIX],
  output logic [3:0]      bank [RADIX],
  output logic [AW-1:0]   addr [RADIX]
);

  always_comb begin
    for (int t = 0; t < RADIX; t++) begin
      logic [3:0] s;
      s = 4'd0;
      for (int d = 0; d < LOGN16; d++) s = s + idx[t][4*d +: 4];
      bank[t] = s;
      addr[t] = AW'(idx[t] >> 4);
    end
  end

endmodule
