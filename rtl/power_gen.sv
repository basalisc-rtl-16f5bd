// power_gen: twiddle power generator of the twiddle factor factory.
//
// Expands a seed w (Montgomery form) into its powers w^1 .. w^(RADIX-1) with
// RADIX-2 multipliers arranged in log2(RADIX) layers: layer L computes
// w^j = w^(2^(L-1)) * w^(j - 2^(L-1)) for 2^(L-1) < j <= 2^L, and passes the
// lower powers on through registers.  Every multiplier produces a distinct
// output, so 255 powers cost 254 multipliers, as in the paper.  The modulus
// travels with the seed.
//
// Timing: one seed per cycle, each layer registered, pw[] is valid LOG cycles
// after seed/q were presented.  pw[0] is not produced (reads as 0).
module power_gen
  import basalisc_pkg::*;
#(
  parameter int unsigned RADIX = 256
) (
  input  logic   clk,
  input  coeff_t seed,
  input  coeff_t q,
  output coeff_t pw [RADIX]
);
  localparam int unsigned LOG = $clog2(RADIX);

  coeff_t p  [LOG+1][RADIX];
  coeff_t qs [LOG+1];

  always_comb begin
    for (int j = 0; j < RADIX; j++) p[0][j] = '0;
    p[0][1] = seed;
    qs[0]   = q;
  end

  for (genvar L = 1; L <= LOG; L++) begin : g_layer
    localparam int unsigned HALF = 1 << (L - 1);
    coeff_t nx [RADIX];
    for (genvar j = 0; j < RADIX; j++) begin : g_pw
      if (j >= 1 && j <= HALF) begin : g_pass
        assign nx[j] = p[L-1][j];
      end else if (j > HALF && j <= 2 * HALF) begin : g_mul
        mont_mul u_mul (.a(p[L-1][HALF]), .b(p[L-1][j-HALF]), .q(qs[L-1]), .y(nx[j]));
      end else begin : g_none
        assign nx[j] = '0;
      end
    end
    always_ff @(posedge clk) begin
      p[L]  <= nx;
      qs[L] <= qs[L-1];
    end
  end

  assign pw = p[LOG];
endmodule
