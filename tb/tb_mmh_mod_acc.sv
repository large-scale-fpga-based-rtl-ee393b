// tb_mmh_mod_acc: GAMMA = 2203 (Mersenne exponent, 92 digits), 256-coefficient rows.
// The testbench plays the multiplier: it serves the raw convolution coefficients of
// random GAMMA-bit operands on the coefficient port. Checks:
//  * sum of 3 products mod 2^GAMMA-1 after normalisation, against a bit-level reference;
//  * restart with first=1 discards the old sum;
//  * a product equal to 2^GAMMA-1 normalises to 0 (canonical form);
//  * pass lengths: 2Q+2 cycles per product, Q+1 per normalisation pass.
module tb_mmh_mod_acc;
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
  logic acc_start = 0, first = 0, norm_start = 0, busy, done;
  logic [4*LOGN16-5:0] coef_row;
  fe_t coef_data [RADIX];
  logic [$clog2(ROWS)-1:0] rd_row = '0;
  digit_t rd_data [RADIX];

  mmh_mod_acc #(.GAMMA(G), .LOGN16(LOGN16)) dut (.*);

  always #5 clk = ~clk;

  longint unsigned coef [N];
  always_comb for (int t = 0; t < RADIX; t++) coef_data[t] = 64'(coef[16 * coef_row + t]);

  function automatic void set_product(bits_t x, bits_t y);
    foreach (coef[k]) coef[k] = 0;
    for (int i = 0; i <= Q; i++)
      for (int j = 0; j <= Q; j++) coef[i + j] += longint'(get_digit(x, i)) * longint'(get_digit(y, j));
  endfunction

  task automatic wait_done(int expect_cycles, string what);
    int cyc;
    cyc = 1;
    @(negedge clk);
    while (!done) begin @(negedge clk); cyc++; end
    if (expect_cycles > 0) begin
      checks++;
      if (cyc != expect_cycles) begin
        failures++;
        $display("%s took %0d cycles, expected %0d", what, cyc, expect_cycles);
      end
    end
  endtask

  task automatic accumulate(bits_t x, bits_t y, bit f);
    set_product(x, y);
    @(negedge clk);
    acc_start = 1; first = f;
    @(negedge clk);
    acc_start = 0;
    wait_done(2 * Q + 2, "accumulate");
  endtask

  task automatic normalise();
    @(negedge clk);
    norm_start = 1;
    @(negedge clk);
    norm_start = 0;
    wait_done(0, "normalise");
  endtask

  task automatic compare(bits_t exp, string what);
    for (int r = 0; r < ROWS; r++) begin
      rd_row = r[$clog2(ROWS)-1:0];
      #1;
      for (int t = 0; t < RADIX; t++) begin
        if (16 * r + t > Q) continue;
        checks++;
        if (rd_data[t] !== get_digit(exp, 16 * r + t)) begin
          failures++;
          if (failures < 6) $display("%s digit %0d got %h exp %h", what, 16 * r + t, rd_data[t], get_digit(exp, 16 * r + t));
        end
      end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bits_t x, y, sum, one, allones;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 3; trial++) begin
      sum = zeros(G);
      for (int j = 0; j < 3; j++) begin
        x = rand_bits(G);
        y = rand_bits(G);
        accumulate(x, y, j == 0);
        sum = add_ea(sum, mod_mersenne(big_mul(x, y), G), G);
      end
      sum = mod_mersenne(sum, G);
      normalise();
      compare(sum, "sum");
    end
    // 1 * (2^G - 1) must come out as 0
    one = zeros(G); one[0] = 1;
    allones = new[G];
    foreach (allones[i]) allones[i] = 1;
    accumulate(one, allones, 1'b1);
    normalise();
    compare(zeros(G), "canonical");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
