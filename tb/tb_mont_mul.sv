// tb_mont_mul: self-checking test of the Montgomery multiplier.
// Drives random operands for several NTT-friendly primes (q = 1 mod 2^17)
// plus corner operands (0, 1, q-1) and checks y < q and
// y * 2^34 = a * b (mod q), with the reference done in 64-bit integers.
module tb_mont_mul;
  logic [31:0] a, b, q, y;
  int checks = 0, failures = 0;

  mont_mul dut (.a(a), .b(b), .q(q), .y(y));

  function automatic longint unsigned mulmod(longint unsigned x, longint unsigned z,
                                             longint unsigned m);
    // x, z < m < 2^32 so the product fits in 64 bits
    return (x * z) % m;
  endfunction

  task automatic check_one(logic [31:0] qa, logic [31:0] aa, logic [31:0] bb);
    longint unsigned lhs, rhs;
    q = qa; a = aa; b = bb;
    #1;
    lhs = ((longint'(y) << 17) % q);
    lhs = (lhs << 17) % q;
    rhs = mulmod(aa, bb, qa);
    checks++;
    if (y >= q || lhs != rhs) begin
      failures++;
      if (failures < 10)
        $display("FAIL q=%0d a=%0d b=%0d y=%0d", qa, aa, bb, y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] primes [5];
    primes = '{32'd998244353, 32'd3221225473, 32'd469762049, 32'd2013265921, 32'd4293918721};
    foreach (primes[p]) begin
      check_one(primes[p], 0, 0);
      check_one(primes[p], 1, 1);
      check_one(primes[p], primes[p] - 1, primes[p] - 1);
      check_one(primes[p], primes[p] - 1, 1);
      for (int i = 0; i < 2000; i++)
        check_one(primes[p], $urandom() % primes[p], $urandom() % primes[p]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
