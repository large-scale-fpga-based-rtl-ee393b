// tb_ntt_addr_map: for a 4096-point map (3 digits) checks that every butterfly group of
// every digit position and every row lands in 16 distinct banks, that (bank, address)
// is a one-to-one placement of all points, and that the bank equals the digit sum mod 16.
module tb_ntt_addr_map;
  import pa_pkg::*;

  localparam int LOGN16 = 3;
  localparam int LOGN = 4 * LOGN16;
  localparam int N = 1 << LOGN;
  int checks = 0, failures = 0;
  logic [LOGN-1:0] idx [RADIX];
  logic [3:0] bank [RADIX];
  logic [LOGN-5:0] addr [RADIX];
  bit used [RADIX][N/RADIX];

  ntt_addr_map #(.LOGN16(LOGN16)) dut (.idx(idx), .bank(bank), .addr(addr));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // groups of each digit position
    for (int d = 0; d < LOGN16; d++) begin
      for (int g = 0; g < N / RADIX; g++) begin
        logic [RADIX-1:0] hit;
        int lo, hi;
        lo = g % (1 << (4 * d));
        hi = g >> (4 * d);
        for (int t = 0; t < RADIX; t++) idx[t] = LOGN'((hi << (4 * d + 4)) | (t << (4 * d)) | lo);
        #1;
        hit = '0;
        for (int t = 0; t < RADIX; t++) begin
          int s;
          s = 0;
          for (int q = 0; q < LOGN16; q++) s += (int'(idx[t]) >> (4 * q)) & 15;
          hit[bank[t]] = 1'b1;
          checks++;
          if (int'(bank[t]) != s % 16) failures++;
          if (d == 0) begin
            checks++;
            if (used[bank[t]][addr[t]]) failures++;
            used[bank[t]][addr[t]] = 1'b1;
          end
        end
        checks++;
        if (hit != '1) begin
          failures++;
          if (failures < 5) $display("conflict d=%0d g=%0d", d, g);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
