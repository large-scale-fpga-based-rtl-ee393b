// tb_pa_top_full: one complete privacy-amplification job with every parameter of pa_top at
// its default (GAMMA = 756839, 65536-point NTT): n=2 key blocks (the second padded to
// GAMMA-5000 bits), m=1 DM3H block and an l'=1000-bit MH tail, i.e. 5 big products.
// A source model answers key and seed requests with rows (random one-in-four stall
// cycles); the first, non-reload request of key block 0 returns the all-ones block,
// which must be requested again with the reload flag. Operands are sparse (random low and
// high digits plus scattered random bits) so that the schoolbook reference stays cheap;
// the NTT still mixes every point and the high digits exercise the modular fold.
// The key bits are compared with K = y_1 || z from a bit-level reference. Mechanisms
// counted, each must occur: reload, source stall, padding, accumulation over several
// blocks, DM3H block output, MH tail.
module tb_pa_top_full;
  import pa_pkg::*;
  import pa_ref_pkg::*;

  localparam int G = 756839;
  localparam int LOGN16 = 4;
  localparam bit SPARSE = 1;
  localparam int MAXCYC = 3000000;

  localparam int Q = G / 24;
  localparam int ROWS = (Q + 1 + 15) / 16;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  logic start = 0, busy, done;
  logic [31:0] n_blocks = 0, m_blocks = 0, l_rem = 0, last_bits = 0;
  logic x_req, x_req_reload, s_req, x_valid, s_valid;
  logic [31:0] x_req_idx, s_req_idx;
  seed_kind_e s_req_kind;
  digit_t x_row [RADIX];
  digit_t s_row [RADIX];
  logic key_valid, key_last;
  digit_t key_digit;
  logic [4:0] key_nbits;

  pa_top dut (.*);

  always #5 clk = ~clk;

  // ---- job data ----
  bits_t xs [$];
  bits_t as [$];
  bits_t sb, sc;
  bits_t ones_blk;

  function automatic bits_t gen_block();
    bits_t r;
    if (!SPARSE) return rand_bits(G);
    r = zeros(G);
    for (int i = 0; i < 240; i++) r[i] = 1'($urandom);
    for (int i = G - 240; i < G; i++) r[i] = 1'($urandom);
    for (int i = 0; i < 16; i++) r[$urandom % G] = 1'b1;
    return r;
  endfunction

  // ---- source model ----
  typedef digit_t row_t [RADIX];
  row_t xq [$];
  row_t sq [$];
  int n_reload = 0, n_stall = 0;

  function automatic void push_rows(ref row_t q [$], input bits_t v);
    for (int r = 0; r < ROWS; r++) begin
      row_t row;
      for (int t = 0; t < RADIX; t++) row[t] = get_digit(v, 16 * r + t);
      q.push_back(row);
    end
  endfunction

  always @(posedge clk) begin
    if (x_req) begin
      if (x_req_reload) n_reload++;
      if (x_req_idx == 0 && !x_req_reload && xs.size() > 1) push_rows(xq, ones_blk);
      else push_rows(xq, xs[x_req_idx]);
    end
    if (s_req) begin
      unique case (s_req_kind)
        SEED_A: push_rows(sq, as[s_req_idx]);
        SEED_B: push_rows(sq, sb);
        SEED_C: push_rows(sq, sc);
        default: ;
      endcase
    end
  end

  logic show_x, show_s;
  initial begin
    show_x = 0; show_s = 0;
    forever begin
      @(negedge clk);
      if (show_x) void'(xq.pop_front());
      if (show_s) void'(sq.pop_front());
      show_x = 0; show_s = 0;
      if (($urandom % 4) == 0 && (xq.size() > 0 || sq.size() > 0)) n_stall++;
      else if (xq.size() > 0 && sq.size() > 0) begin show_x = 1; show_s = 1; end
      else if (xq.size() > 0) show_x = 1;
      else if (sq.size() > 0) show_s = 1;
      x_valid = show_x;
      s_valid = show_s;
      for (int t = 0; t < RADIX; t++) begin
        x_row[t] = show_x ? xq[0][t] : '0;
        s_row[t] = show_s ? sq[0][t] : '0;
      end
    end
  end

  // ---- key collection ----
  bit kbits [$];
  int n_last = 0;
  always @(posedge clk) if (key_valid) begin
    for (int b = 0; b < int'(key_nbits); b++) kbits.push_back(key_digit[b]);
    if (key_last) n_last++;
  end

  int n_pad = 0, n_multi = 0, n_dm3h = 0, n_mh = 0, n_notail = 0;

  task automatic run_job(int n, int m, int lrem, int lastb);
    bits_t y [];

    int cyc, total;
    xs.delete(); as.delete();
    for (int j = 0; j < n; j++) begin
      bits_t v;
      v = gen_block();
      if (j == n - 1) for (int i = lastb; i < G; i++) v[i] = 0;
      xs.push_back(v);
    end
    for (int k = 0; k < n + m; k++) as.push_back(gen_block());
    sb = gen_block(); sc = gen_block();
    if (lastb < G) n_pad++;
    if (n > 1) n_multi++;
    n_dm3h += m;
    if (lrem > 0) n_mh++; else n_notail++;
    // reference
    y = new[m + 1];
    for (int i = 0; i <= m; i++) begin
      bits_t s;
      s = zeros(G);
      for (int j = 0; j < n; j++) s = add_ea(s, mod_mersenne(big_mul(as[j + i], xs[j]), G), G);
      y[i] = mod_mersenne(s, G);
    end
    kbits.delete();
    n_last = 0;
    @(negedge clk);
    n_blocks = n; m_blocks = m; l_rem = lrem; last_bits = lastb;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    $display("job n=%0d m=%0d l'=%0d: %0d cycles", n, m, lrem, cyc);
    total = m * G + lrem;
    checks++;
    if (kbits.size() != total) begin
      failures++;
      $display("key length %0d expected %0d", kbits.size(), total);
    end
    checks++;
    if (total > 0 && n_last != 1) begin failures++; $display("key_last seen %0d times", n_last); end
    begin
      int pos;
      bits_t z;
      pos = 0;
      for (int i = 0; i < m; i++) begin
        int bad;
        bad = 0;
        for (int b = 0; b < G; b++) if (pos + b >= kbits.size() || kbits[pos + b] != y[i][b]) bad++;
        checks++;
        if (bad != 0) begin failures++; $display("y block %0d: %0d bits differ", i, bad); for (int q = 0; q < 48; q++) $write("%0d", kbits[pos + q]); $display(""); for (int q = 0; q < 48; q++) $write("%0d", y[i][q]); $display(""); end
        pos += G;
      end
      if (lrem > 0) begin
        int bad;
        z = mh_ref(y[m], sb, sc, G, lrem);
        bad = 0;
        for (int b = 0; b < lrem; b++) if (pos + b >= kbits.size() || kbits[pos + b] != z[b]) bad++;
        checks++;
        if (bad != 0) begin failures++; $display("MH tail: %0d bits differ", bad); end
      end
    end
  endtask

  initial begin
    repeat (MAXCYC) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ones_blk = new[G];
    foreach (ones_blk[i]) ones_blk[i] = 1'b1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_job(2, 1, 1000, G - 5000);
    $display("mechanisms: reload=%0d stall=%0d pad=%0d multi=%0d dm3h=%0d mh=%0d notail=%0d",
             n_reload, n_stall, n_pad, n_multi, n_dm3h, n_mh, n_notail);
    checks++; if (n_reload == 0) failures++;
    checks++; if (n_stall == 0) failures++;
    checks++; if (n_pad == 0) failures++;
    checks++; if (n_multi == 0) failures++;
    checks++; if (n_dm3h == 0) failures++;
    checks++; if (n_mh == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
