// tb_ntt_pe: end-to-end test of the NTT PE on a complete negacyclic NTT.
// With RADIX = R the PE computes an N = R*R point negacyclic NTT in two
// passes of R chunks.  The testbench loads the twiddle tables (pass-1 and
// pass-2 pre-multiply vectors, post-multiply seeds), runs pass 1 over the
// columns and pass 2 over the rows of its own R x R matrix of intermediate
// results (playing the part of the CTB transposition), and compares with a
// direct reference X[k] = sum_n x[n] psi^((2k+1)n) mod q.  Checks the latency
// of every chunk and that all units were used.
module tb_ntt_pe;
  import basalisc_pkg::*;
  localparam int unsigned R   = 16;
  localparam int unsigned LOG = $clog2(R);
  localparam int unsigned N   = R * R;
  localparam int unsigned NU  = 4;
  localparam longint unsigned Q = 64'd998244353;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic tw_wr_en, tw_wr_seed, sel_en, in_valid, in_post_en, out_valid;
  logic [7:0] tw_wr_set, sel_set, in_idx;
  coeff_t tw_wr_data [R], in_data [R], out_data [R], in_q;
  logic [$clog2(NU+1)-1:0] out_unit;
  int checks = 0, failures = 0, cycle = 0;

  ntt_pe #(.RADIX(R), .NUM_UNITS(NU), .SETS(4)) dut (.*);

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
  function automatic longint unsigned to_mont(longint unsigned x);
    return (((x << 17) % Q) << 17) % Q;
  endfunction

  longint unsigned psi;
  coeff_t x [N], A [R][R], X [N];
  int out_cnt = 0, in_cnt = 0;
  int stamp [2*R];
  int unit_seen [NU];

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && in_valid) begin stamp[in_cnt] = cycle; in_cnt++; end
    if (rst_n && out_valid) begin
      checks++;
      if (cycle - stamp[out_cnt] != LOG + 2) begin
        failures++; $display("FAIL latency %0d", cycle - stamp[out_cnt]);
      end
      unit_seen[out_unit]++;
      if (out_cnt < R) A[out_cnt] = out_data;                  // pass 1, column n2
      else for (int p = 0; p < R; p++)                         // pass 2, row p1
        X[bit_rev(16'(out_cnt - R), LOG) + R * bit_rev(16'(p), LOG)] = out_data[p];
      out_cnt++;
    end
  end

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_vec(logic seed, logic [7:0] set);
    tw_wr_en = 1; tw_wr_seed = seed; tw_wr_set = set;
    for (int i = 0; i < R; i++) tw_wr_data[i] = v[i];
    @(negedge clk);
    tw_wr_en = 0;
  endtask

  coeff_t v [R];
  initial begin
    psi = powmod(3, (Q - 1) / (2 * N));
    in_q = coeff_t'(Q);
    tw_wr_en = 0; sel_en = 0; in_valid = 0; in_post_en = 0; in_idx = 0;
    tw_wr_seed = 0; tw_wr_set = 0; sel_set = 0;
    for (int i = 0; i < R; i++) begin tw_wr_data[i] = 0; in_data[i] = 0; end
    for (int i = 0; i < N; i++) x[i] = coeff_t'($urandom() % Q);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // twiddle set 1 (sel_set {1, pass})
    for (int i = 0; i < R; i++) v[i] = coeff_t'(to_mont(powmod(psi, R * i)));
    write_vec(0, 8'd2);
    for (int i = 0; i < R; i++) v[i] = coeff_t'(to_mont(powmod(psi, i)));
    write_vec(0, 8'd3);
    for (int i = 0; i < R; i++) v[i] = coeff_t'(to_mont(powmod(psi, 2 * i)));
    write_vec(1, 8'd2);
    // pass 1: columns
    sel_en = 1; sel_set = 8'd2;
    @(negedge clk);
    sel_en = 0;
    for (int n2 = 0; n2 < R; n2++) begin
      for (int n1 = 0; n1 < R; n1++) v[n1] = x[R * n1 + n2];
      in_valid = 1;
      for (int i = 0; i < R; i++) in_data[i] = v[i]; in_idx = 8'(n2); in_post_en = 1;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (LOG + 4) @(negedge clk);
    // pass 2: rows of the intermediate matrix (row p holds k1 = bitrev(p))
    sel_en = 1; sel_set = 8'd3;
    @(negedge clk);
    sel_en = 0;
    for (int p = 0; p < R; p++) begin
      for (int n2 = 0; n2 < R; n2++) v[n2] = A[n2][p];
      in_valid = 1;
      for (int i = 0; i < R; i++) in_data[i] = v[i]; in_idx = 8'(p); in_post_en = 0;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (LOG + 4) @(negedge clk);
    for (int k = 0; k < N; k++) begin
      longint unsigned acc;
      acc = 0;
      for (int n = 0; n < N; n++)
        acc = (acc + (longint'(x[n]) * powmod(psi, ((2 * k + 1) * n) % (2 * N))) % Q) % Q;
      checks++;
      if (X[k] != coeff_t'(acc)) begin
        failures++;
        if (failures < 8) $display("FAIL X[%0d] got %0d exp %0d", k, X[k], acc);
      end
    end
    for (int u = 0; u < NU; u++) begin
      checks++;
      if (unit_seen[u] == 0) begin failures++; $display("FAIL unit %0d unused", u); end
    end
    checks++;
    if (out_cnt != 2 * R) begin failures++; $display("FAIL %0d chunks out", out_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
