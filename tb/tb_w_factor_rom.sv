// tb_w_factor_rom: checks the twiddle ROM at the full 65536-point size: the root has order
// exactly 65536, its 4096th power is 2^12 (the butterfly's shift root), and random
// forward and inverse lookups equal powers computed by square-and-multiply.
module tb_w_factor_rom;
  import pa_pkg::*;
  import pa_ref_pkg::*;

  localparam int LOGN16 = 4;
  localparam int N = 1 << (4 * LOGN16);
  int checks = 0, failures = 0;
  logic inverse;
  logic [4*LOGN16-1:0] e [RADIX];
  fe_t val [RADIX];

  w_factor_rom #(.LOGN16(LOGN16)) dut (.inverse(inverse), .exp_in(e), .val(val));

  task automatic check(logic [63:0] got, logic [63:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 8) $display("mismatch %s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] w;
    w = 64'hDC92_18A8_6D10_F3A3;
    inverse = 0;
    foreach (e[t]) e[t] = '0;
    e[0] = 16'd4096; e[1] = 16'd32768; e[2] = 16'd0; e[3] = 16'd1;
    #1;
    check(val[0], 64'd4096, "w^4096");
    check(val[1], RP - 1, "w^32768");
    check(val[2], 64'd1, "w^0");
    check(val[3], w, "w^1");
    for (int v = 0; v < 300; v++) begin
      inverse = v[0];
      foreach (e[t]) e[t] = 16'($urandom);
      #1;
      foreach (e[t]) begin
        longint unsigned ex;
        ex = inverse ? longint'((N - int'(e[t])) % N) : longint'(e[t]);
        check(val[t], rpow(w, ex), "random");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
