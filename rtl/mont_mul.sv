// mont_mul: Montgomery modular multiplier for NTT-friendly primes.
//
// Computes y = a * b * 2^-34 mod q for a, b < q, combinationally.  The
// modulus must satisfy q = 1 (mod 2^17): bits 16:1 are zero and bit 0 is one,
// the restriction the paper places on its multipliers to save area and power.
// Because of it, -q^-1 = -1 (mod 2^17), so each of the two 17-bit reduction
// digits needs no multiplication to find the quotient digit m (it is simply
// -T mod 2^17), and m*q reduces to m*(q >> 17) shifted, plus m.  Only the
// upper FIX..W-1 bits of q enter a multiplier (17 x 15 bits per digit).
//
// The paper names the multiplier style (Montgomery, after Mert et al.) and
// the fixed bits; the digit width of 17 and R = 2^34 are this design's
// choice.  The output is fully reduced (< q).  Timing: purely
// combinational; callers register the result.
module mont_mul #(
  parameter int unsigned W   = 32,  // operand width
  parameter int unsigned FIX = 17   // fixed low bits of q (q = 1 mod 2^FIX)
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] q,
  output logic [W-1:0] y
);
  localparam int unsigned NDIG = (W + FIX - 1) / FIX;   // reduction digits
  localparam int unsigned TW   = 2 * W + 2;             // working width

  logic [TW-1:0]    t [NDIG+1];
  logic [W-FIX-1:0] qhi;

  assign qhi = q[W-1:FIX];

  always_comb begin
    logic [FIX-1:0] m;
    logic [TW-1:0]  tr;
    t[0] = TW'(a) * TW'(b);
    for (int unsigned d = 0; d < NDIG; d++) begin
      // m = -T mod 2^FIX ; (T + m*q) / 2^FIX = T/2^FIX + (T_lo != 0) + m*qhi
      m    = FIX'(0) - t[d][FIX-1:0];
      t[d+1] = (t[d] >> FIX) + TW'(t[d][FIX-1:0] != '0) + TW'(m) * TW'(qhi);
    end
    tr = t[NDIG];
    if (tr >= TW'(q)) tr = tr - TW'(q);
    y = tr[W-1:0];
  end
endmodule
