// tb_ntt_core: 256-point core (2 radix-16 passes) with its twiddle ROM.
// Loads random residues through the row port, runs the forward transform and checks
// that location i holds X[digit_reverse(i)] of a directly computed DFT; then runs the
// inverse transform in place and checks that it returns N * x. Also checks the busy time
// (passes * N/16 cycles) and the done pulse.
module tb_ntt_core;
  import pa_pkg::*;
  import pa_ref_pkg::*;

  localparam int LOGN16 = 2;
  localparam int LOGN = 4 * LOGN16;
  localparam int N = 1 << LOGN;
  localparam int DEPTH = N / RADIX;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  logic row_we = 0, start = 0, inverse = 0, busy, done, tw_inv;
  logic [LOGN-5:0] row_idx = '0;
  fe_t row_wdata [RADIX];
  fe_t row_rdata [RADIX];
  logic [LOGN-1:0] tw_exp [RADIX];
  fe_t tw_val [RADIX];

  ntt_core #(.LOGN16(LOGN16)) dut (.*);
  w_factor_rom #(.LOGN16(LOGN16)) rom (.inverse(tw_inv), .exp_in(tw_exp), .val(tw_val));

  always #5 clk = ~clk;

  logic [63:0] x [N];
  logic [63:0] X [N];

  task automatic check(logic [63:0] got, logic [63:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 8) $display("mismatch %s: got %h exp %h", what, got, exp);
    end
  endtask

  function automatic int digit_rev(int i);
    int r;
    r = 0;
    for (int d = 0; d < LOGN16; d++) r |= ((i >> (4 * d)) & 15) << (4 * (LOGN16 - 1 - d));
    return r;
  endfunction

  task automatic run(logic inv);
    int cyc;
    @(negedge clk);
    start = 1; inverse = inv;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != LOGN16 * DEPTH) begin
      failures++;
      $display("busy time %0d, expected %0d", cyc, LOGN16 * DEPTH);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] w;
    foreach (row_wdata[t]) row_wdata[t] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    w = rpow(64'hDC92_18A8_6D10_F3A3, 65536 / N);
    for (int trial = 0; trial < 3; trial++) begin
      foreach (x[i]) x[i] = (trial == 0 && i < 4) ? RP - 1 : 64'({$urandom, $urandom} % RP);
      for (int r = 0; r < DEPTH; r++) begin
        @(negedge clk);
        row_we = 1; row_idx = (LOGN-4)'(r);
        for (int t = 0; t < RADIX; t++) row_wdata[t] = x[16 * r + t];
      end
      @(negedge clk);
      row_we = 0;
      foreach (X[k]) begin
        X[k] = 0;
        for (int n = 0; n < N; n++) X[k] = radd(X[k], rmul(x[n], rpow(w, longint'((n * k) % N))));
      end
      run(1'b0);
      for (int r = 0; r < DEPTH; r++) begin
        row_idx = (LOGN-4)'(r);
        #1;
        for (int t = 0; t < RADIX; t++) check(row_rdata[t], X[digit_rev(16 * r + t)], "forward");
      end
      run(1'b1);
      for (int r = 0; r < DEPTH; r++) begin
        row_idx = (LOGN-4)'(r);
        #1;
        for (int t = 0; t < RADIX; t++) check(row_rdata[t], rmul(x[16 * r + t], 64'(N)), "inverse");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
