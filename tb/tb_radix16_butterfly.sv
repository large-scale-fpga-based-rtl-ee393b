// tb_radix16_butterfly: compares the shift-only radix-16 butterfly with a direct 16-point
// DFT over GF(P) computed with ordinary modular products and the root 4096 (forward) or
// 4096^15 (inverse), on random and corner-case inputs.
module tb_radix16_butterfly;
  import pa_pkg::*;
  import pa_ref_pkg::*;

  int checks = 0, failures = 0;
  logic inverse;
  fe_t x [RADIX];
  fe_t y [RADIX];

  radix16_butterfly dut (.inverse(inverse), .x(x), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 400; v++) begin
      logic [63:0] w, e;
      inverse = v[0];
      for (int t = 0; t < RADIX; t++) begin
        logic [63:0] r;
        r = {$urandom, $urandom};
        if (v < 4) r = RP - 1 - 64'(t);      // values near P
        x[t] = 64'(r % RP);
      end
      #1;
      w = inverse ? rpow(64'd4096, 15) : 64'd4096;
      for (int k = 0; k < RADIX; k++) begin
        e = 0;
        for (int t = 0; t < RADIX; t++) e = radd(e, rmul(x[t], rpow(w, longint'(t * k))));
        checks++;
        if (y[k] !== e) begin
          failures++;
          if (failures < 5) $display("mismatch v=%0d k=%0d got %h exp %h", v, k, y[k], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
