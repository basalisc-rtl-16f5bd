// tb_ntt_unit: self-checking test of one NTT unit.
// Streams CHUNKS back-to-back chunks of random coefficients through the unit
// with random pre- and post-multiply twiddles, and compares every output with
// a direct O(RADIX^2) reference transform computed here:
//   y[i] = x[i]*pre[i]/R,  X[k] = sum_n y[n] w^(nk),
//   out[p] = X[bitrev(p)] * post[bitrev(p)] / R  (post stage enabled),
// where w is a primitive RADIX-th root of unity mod q and R = 2^34.
// Also checks the latency (LOG+2 cycles) and one chunk per cycle throughput.
module tb_ntt_unit;
  import basalisc_pkg::*;
  localparam int unsigned RADIX  = 256;
  localparam int unsigned LOG    = $clog2(RADIX);
  localparam int unsigned CHUNKS = 6;
  localparam longint unsigned Q  = 64'd998244353;   // 119*2^23+1, generator 3

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic   in_valid, in_post_en, out_valid;
  coeff_t in_data [RADIX], pre_tw [RADIX], bfly_tw [RADIX/2], post_tw [RADIX], out_data [RADIX];
  coeff_t in_q;
  int checks = 0, failures = 0, cycle = 0;

  ntt_unit #(.RADIX(RADIX)) dut (.*);

  function automatic longint unsigned powmod(longint unsigned b, longint unsigned e);
    longint unsigned r = 1;
    b = b % Q;
    while (e != 0) begin
      if (e[0]) r = (r * b) % Q;
      b = (b * b) % Q;
      e = e >> 1;
    end
    return r;
  endfunction

  longint unsigned RINV, w;
  function automatic longint unsigned mont(longint unsigned x, longint unsigned y);
    return (((x * y) % Q) * RINV) % Q;
  endfunction
  function automatic longint unsigned to_mont(longint unsigned x);
    return (((x << 17) % Q) << 17) % Q;
  endfunction

  coeff_t xs [CHUNKS][RADIX];
  logic   pe [CHUNKS];
  int     in_cycle [CHUNKS];
  int     n_out = 0;

  int n_in = 0;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && in_valid) begin in_cycle[n_in] = cycle; n_in++; end
  end

  initial begin
    #40000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      longint unsigned y [RADIX];
      int c;
      c = n_out;
      for (int i = 0; i < RADIX; i++) y[i] = (i == 0) ? xs[c][0] : mont(xs[c][i], pre_tw[i]);
      for (int p = 0; p < RADIX; p++) begin
        longint unsigned k, acc, e;
        k = bit_rev(16'(p), LOG);
        acc = 0;
        for (int n = 0; n < RADIX; n++) begin
          e = powmod(w, (longint'(n) * k) % RADIX);
          acc = (acc + (y[n] * e) % Q) % Q;
        end
        if (pe[c] && p != 0) acc = mont(acc, post_tw[k]);
        checks++;
        if (out_data[p] != coeff_t'(acc)) begin
          failures++;
          if (failures < 8) $display("FAIL chunk %0d pos %0d got %0d exp %0d", c, p, out_data[p], acc);
        end
      end
      checks++;
      if (cycle - in_cycle[c] != LOG + 2) begin
        failures++;
        $display("FAIL latency %0d", cycle - in_cycle[c]);
      end
      n_out++;
    end
  end

  initial begin
    RINV = powmod(2, Q - 1 - 34);
    w    = powmod(3, (Q - 1) / RADIX);
    in_q = coeff_t'(Q);
    in_valid = 0; in_post_en = 0;
    for (int i = 0; i < RADIX; i++) begin
      in_data[i] = '0;
      pre_tw[i]  = coeff_t'($urandom() % Q);
      post_tw[i] = coeff_t'($urandom() % Q);
    end
    for (int j = 0; j < RADIX/2; j++) bfly_tw[j] = coeff_t'(to_mont(powmod(w, j)));
    for (int c = 0; c < CHUNKS; c++) begin
      pe[c] = (c % 2 == 0);
      for (int i = 0; i < RADIX; i++) xs[c][i] = coeff_t'($urandom() % Q);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int c = 0; c < CHUNKS; c++) begin
      in_valid <= 1; in_data <= xs[c]; in_post_en <= pe[c];
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (LOG + 6) @(posedge clk);
    checks++;
    if (n_out != CHUNKS) begin failures++; $display("FAIL got %0d chunks", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
