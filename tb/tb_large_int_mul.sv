// tb_large_int_mul: 256-point multiplier (operands of up to 128 digits = 3072 bits).
// Loads random operands (full length, short, and all-ones digits) as rows, zero rows
// above, runs start and compares every output coefficient with the exact linear
// convolution of the digit sequences. Checks the start-to-done time
// 2*passes*N/16 + N/16 + 3 cycles.
module tb_large_int_mul;
  import pa_pkg::*;
  import pa_ref_pkg::*;

  localparam int LOGN16 = 2;
  localparam int N = 1 << (4 * LOGN16);
  localparam int DEPTH = N / RADIX;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  logic ld_we_a = 0, ld_we_b = 0, start = 0, busy, done;
  logic [4*LOGN16-5:0] ld_row = '0, rd_row = '0;
  digit_t ld_a [RADIX];
  digit_t ld_b [RADIX];
  fe_t rd_data [RADIX];

  large_int_mul #(.LOGN16(LOGN16)) dut (.*);

  always #5 clk = ~clk;

  longint unsigned a [N], b [N], c [N];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (ld_a[t]) begin ld_a[t] = '0; ld_b[t] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      int len, cyc;
      len = (trial == 1) ? 5 : N / 2;
      foreach (a[i]) begin
        a[i] = (i < len) ? longint'($urandom & 24'hFFFFFF) : 0;
        b[i] = (i < len) ? longint'($urandom & 24'hFFFFFF) : 0;
        if (trial == 2 && i < len) begin a[i] = 24'hFFFFFF; b[i] = 24'hFFFFFF; end
      end
      foreach (c[k]) begin
        c[k] = 0;
        for (int i = 0; i <= k; i++) c[k] += a[i] * b[k - i];
      end
      for (int r = 0; r < DEPTH; r++) begin
        @(negedge clk);
        ld_we_a = 1; ld_we_b = 1; ld_row = (4*LOGN16-4)'(r);
        for (int t = 0; t < RADIX; t++) begin
          ld_a[t] = 24'(a[16 * r + t]);
          ld_b[t] = 24'(b[16 * r + t]);
        end
      end
      @(negedge clk);
      ld_we_a = 0; ld_we_b = 0;
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 2 * LOGN16 * DEPTH + DEPTH + 3) begin
        failures++;
        $display("latency %0d expected %0d", cyc, 2 * LOGN16 * DEPTH + DEPTH + 3);
      end
      for (int r = 0; r < DEPTH; r++) begin
        rd_row = (4*LOGN16-4)'(r);
        #1;
        for (int t = 0; t < RADIX; t++) begin
          checks++;
          if (rd_data[t] !== 64'(c[16 * r + t])) begin
            failures++;
            if (failures < 6) $display("coef %0d got %h exp %h", 16 * r + t, rd_data[t], c[16 * r + t]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
