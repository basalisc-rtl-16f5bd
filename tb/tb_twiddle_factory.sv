// tb_twiddle_factory: self-checking test of the twiddle factor factory.
// Loads random pre-multiply vectors and seed rows into two twiddle sets,
// then (1) selects each set/pass and checks pre_tw and the butterfly
// twiddles (even entries of the pass-1 vector), (2) streams seed reads to
// every unit and checks that post_tw[u][j] = seed^j (Montgomery powers)
// appears exactly 1+LOG cycles after the request.
module tb_twiddle_factory;
  import basalisc_pkg::*;
  localparam int unsigned R   = 16;
  localparam int unsigned LOG = $clog2(R);
  localparam int unsigned NU  = 4;
  localparam longint unsigned Q = 64'd998244353;

  logic clk = 0;
  always #1 clk = ~clk;

  logic wr_en, wr_seed, sel_en, seed_en;
  logic [7:0] wr_set, sel_set, seed_set, seed_idx;
  logic [$clog2(NU+1)-1:0] seed_unit;
  coeff_t wr_data [R], pre_tw [R], bfly_tw [R/2], post_tw [NU][R], seed_q;
  int checks = 0, failures = 0;

  twiddle_factory #(.RADIX(R), .NUM_UNITS(NU), .SETS(4)) dut (.*);

  longint unsigned RINV;
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
  function automatic longint unsigned mont(longint unsigned x, longint unsigned y);
    return (((x * y) % Q) * RINV) % Q;
  endfunction

  coeff_t pre_v [4][R];     // [set*2+pass]
  coeff_t seed_v [2][R];

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pipeline of expected seed requests
  logic       req_v   [LOG+2];
  coeff_t     req_s   [LOG+2];
  int         req_u   [LOG+2];
  always @(posedge clk) begin
    for (int k = LOG + 1; k > 0; k--) begin
      req_v[k] = req_v[k-1]; req_s[k] = req_s[k-1]; req_u[k] = req_u[k-1];
    end
    req_v[0] = seed_en;
    req_s[0] = seed_v[seed_set[1]][seed_idx[3:0]];
    req_u[0] = int'(seed_unit);
    if (req_v[LOG+1]) begin
      longint unsigned e;
      e = req_s[LOG+1];
      for (int j = 1; j < R; j++) begin
        checks++;
        if (post_tw[req_u[LOG+1]][j] != coeff_t'(e)) begin
          failures++;
          if (failures < 8) $display("FAIL unit %0d power %0d got %0d exp %0d",
                                     req_u[LOG+1], j, post_tw[req_u[LOG+1]][j], e);
        end
        e = mont(e, req_s[LOG+1]);
      end
    end
  end

  initial begin
    RINV = powmod(2, Q - 1 - 34);
    for (int k = 0; k < LOG + 2; k++) req_v[k] = 0;
    wr_en = 0; sel_en = 0; seed_en = 0; wr_seed = 0; wr_set = 0; sel_set = 0;
    seed_set = 0; seed_idx = 0; seed_unit = 0; seed_q = coeff_t'(Q);
    for (int i = 0; i < R; i++) wr_data[i] = 0;
    for (int s = 0; s < 4; s++) for (int i = 0; i < R; i++) pre_v[s][i] = coeff_t'($urandom() % Q);
    for (int s = 0; s < 2; s++) for (int i = 0; i < R; i++) seed_v[s][i] = coeff_t'($urandom() % Q);
    @(posedge clk);
    for (int s = 0; s < 4; s++) begin
      wr_en <= 1; wr_seed <= 0; wr_set <= 8'(s);
      for (int i = 0; i < R; i++) wr_data[i] <= pre_v[s][i];
      @(posedge clk);
    end
    for (int s = 0; s < 2; s++) begin
      wr_en <= 1; wr_seed <= 1; wr_set <= 8'(2 * s);
      for (int i = 0; i < R; i++) wr_data[i] <= seed_v[s][i];
      @(posedge clk);
    end
    wr_en <= 0;
    for (int s = 0; s < 4; s++) begin
      sel_en <= 1; sel_set <= 8'(s);
      @(posedge clk);
      sel_en <= 0;
      @(posedge clk);
      for (int i = 0; i < R; i++) begin
        checks++;
        if (pre_tw[i] != pre_v[s][i]) begin failures++; $display("FAIL pre set %0d i %0d", s, i); end
      end
      for (int j = 0; j < R / 2; j++) begin
        checks++;
        if (bfly_tw[j] != pre_v[s & 2][2*j]) begin failures++; $display("FAIL bfly set %0d j %0d", s, j); end
      end
    end
    for (int k = 0; k < 24; k++) begin
      seed_en <= 1; seed_set <= 8'((k % 2) * 2); seed_idx <= 8'($urandom() % R);
      seed_unit <= ($clog2(NU+1))'(k % NU);
      @(posedge clk);
    end
    seed_en <= 0;
    repeat (LOG + 4) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
