// twiddle_factory: twiddle factor storage and generation for the NTT PE.
//
// Holds, per twiddle set (one residue modulus and one direction):
//   * two pre-multiply vectors of RADIX twiddles, one per NTT pass
//     (2*sqrt(N) words instead of N): pass 1 holds psi^(N2*n1) = w_512^n1,
//     pass 2 holds psi^n2, where psi is a primitive 2N-th root of unity;
//   * RADIX post-multiply seeds w_N^k, one per chunk k of pass 1.
// The butterfly twiddles w_256^j are the even entries of the pass-1 vector,
// so they are routed from the same storage instead of being stored again.
// A power generator per NTT unit expands the chunk's seed into the RADIX-1
// post-multiply twiddles (see power_gen).  All values in Montgomery form.
//
// Set numbering (this design's choice): sel_set = {set, pass}, where set
// selects the residue/direction and pass = 0 for pass 1, 1 for pass 2.
//
// Ports and timing:
//   wr_*    write one whole vector (RADIX words): wr_seed = 0 writes the
//           pre-multiply vector of pass wr_set[0] of set wr_set[7:1]; wr_seed = 1
//           writes the RADIX seeds of set wr_set[7:1].
//   sel_*   latch pre_tw/bfly_tw for set sel_set; they appear the next cycle
//           and hold until the next sel_en.
//   seed_*  read the seed of chunk seed_idx of set seed_set[7:1] for unit
//           seed_unit; post_tw[seed_unit] is valid 1+LOG cycles later.
//           seed_set[0] (the pass bit) is not used: seeds exist for pass 1
//           only.  Set bits above log2(SETS) are unused when SETS < 128.
//
// Follows the paper: shared pre-multiply vectors, butterfly twiddles taken
// from the pass-1 vector, one seed per chunk and a multiplier-layer power
// generator.  This design's choices: the set numbering, flip-flop memories
// without reset, and loading by whole vectors.
module twiddle_factory
  import basalisc_pkg::*;
#(
  parameter int unsigned RADIX     = 256,
  parameter int unsigned NUM_UNITS = 4,
  parameter int unsigned SETS      = 112   // 56 residues x {forward, inverse}
) (
  input  logic         clk,
  input  logic         wr_en,
  input  logic         wr_seed,
  input  logic [7:0]   wr_set,
  input  coeff_t       wr_data [RADIX],
  input  logic         sel_en,
  input  logic [7:0]   sel_set,
  output coeff_t       pre_tw  [RADIX],
  output coeff_t       bfly_tw [RADIX/2],
  input  logic         seed_en,
  input  logic [7:0]   seed_set,
  input  logic [7:0]   seed_idx,
  input  logic [$clog2(NUM_UNITS+1)-1:0] seed_unit,
  input  coeff_t       seed_q,
  output coeff_t       post_tw [NUM_UNITS][RADIX]
);
  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned IDX_W = $clog2(RADIX);

  coeff_t pre_mem  [SETS][2][RADIX];
  coeff_t seed_mem [SETS][RADIX];

  logic [SET_W-1:0] wset, sset, dset;
  assign wset = wr_set[SET_W:1];
  assign sset = sel_set[SET_W:1];
  assign dset = seed_set[SET_W:1];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      if (wr_seed) seed_mem[wset] <= wr_data;
      else         pre_mem[wset][wr_set[0]] <= wr_data;
    end
  end

  // pre-multiply and butterfly twiddle registers
  always_ff @(posedge clk) begin
    if (sel_en) begin
      pre_tw <= pre_mem[sset][sel_set[0]];
      for (int j = 0; j < RADIX / 2; j++) bfly_tw[j] <= pre_mem[sset][0][2*j];
    end
  end

  // seed registers and power generators, one per NTT unit
  coeff_t seed_r [NUM_UNITS];
  coeff_t q_r    [NUM_UNITS];
  always_ff @(posedge clk) begin
    for (int u = 0; u < NUM_UNITS; u++)
      if (seed_en && int'(seed_unit) == u) begin
        seed_r[u] <= seed_mem[dset][seed_idx[IDX_W-1:0]];
        q_r[u]    <= seed_q;
      end
  end

  for (genvar u = 0; u < NUM_UNITS; u++) begin : g_gen
    power_gen #(.RADIX(RADIX)) u_pg (.clk(clk), .seed(seed_r[u]), .q(q_r[u]), .pw(post_tw[u]));
  end
endmodule
