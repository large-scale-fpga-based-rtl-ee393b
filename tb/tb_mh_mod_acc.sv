// tb_mh_mod_acc: GAMMA = 2203, 256-coefficient rows. The testbench plays the multiplier
// (raw convolution coefficients of y*b) and loads c as rows, then checks the top l' bits of
// (b*y + c) mod 2^GAMMA for several l' (1, 24, 25, 1000, GAMMA-1), against a bit-level
// reference, and the pass length of Q+1 cycles.
module tb_mh_mod_acc;
  import pa_pkg::*;
  import pa_ref_pkg::*;

  localparam int G = 2203;
  localparam int LOGN16 = 2;
  localparam int N = 1 << (4 * LOGN16);
  localparam int Q = G / 24;
  localparam int ROWS = (Q + 1 + 15) / 16;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  logic c_we = 0, start = 0, busy, done;
  logic [$clog2(ROWS)-1:0] c_row = '0;
  digit_t c_data [RADIX];
  logic [4*LOGN16-5:0] coef_row;
  fe_t coef_data [RADIX];
  logic [31:0] l_rem = 0, out_k = 0;
  digit_t out_digit;

  mh_mod_acc #(.GAMMA(G), .LOGN16(LOGN16)) dut (.*);

  always #5 clk = ~clk;

  longint unsigned coef [N];
  always_comb for (int t = 0; t < RADIX; t++) coef_data[t] = 64'(coef[16 * coef_row + t]);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bits_t y, b, c, z;
    int lrems [5] = '{1, 24, 25, 1000, G - 1};
    foreach (c_data[t]) c_data[t] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (lrems[v]) begin
      int cyc;
      y = rand_bits(G);
      b = rand_bits(G);
      c = rand_bits(G);
      foreach (coef[k]) coef[k] = 0;
      for (int i = 0; i <= Q; i++)
        for (int j = 0; j <= Q; j++) coef[i + j] += longint'(get_digit(y, i)) * longint'(get_digit(b, j));
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        c_we = 1; c_row = r[$clog2(ROWS)-1:0];
        for (int t = 0; t < RADIX; t++) c_data[t] = get_digit(c, 16 * r + t);
      end
      @(negedge clk);
      c_we = 0; start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != Q + 2) begin
        failures++;
        $display("pass took %0d cycles, expected %0d", cyc, Q + 2);
      end
      l_rem = lrems[v];
      z = mh_ref(y, b, c, G, lrems[v]);
      for (int k = 0; 24 * k < lrems[v]; k++) begin
        digit_t e, mask;
        out_k = k;
        #1;
        e = get_digit(z, k);
        mask = (lrems[v] - 24 * k >= 24) ? 24'hFFFFFF : 24'((1 << (lrems[v] - 24 * k)) - 1);
        checks++;
        if ((out_digit & mask) !== e) begin
          failures++;
          if (failures < 6) $display("l'=%0d digit %0d got %h exp %h", lrems[v], k, out_digit & mask, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
