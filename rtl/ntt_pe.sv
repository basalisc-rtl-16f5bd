// ntt_pe: the NTT processing element.
//
// NUM_UNITS pipelined NTT units (see ntt_unit) share one twiddle factory.
// Each accepted chunk is one iteration of an NTT pass: RADIX coefficients in
// natural order, the chunk number idx (which selects the post-multiply seed
// w_N^idx), the modulus, the twiddle set and post_en (1 in pass 1, 0 in
// pass 2).  Chunks are handed to the units in round-robin order; all units
// have the same latency, so results leave in the order chunks arrived.
//
// A full N = RADIX^2 negacyclic NTT is two passes of RADIX chunks each:
// pass 1 takes the columns (n2 fixed) and pass 2 the rows of the RADIX x RADIX
// matrix; the transposition between them is done by the conflict-free CTB.
//
// Timing: one chunk per cycle in; out_valid/out_data appear LAT = LOG+2
// cycles later.  sel_en/sel_set must be given at least one cycle before the
// first chunk of a pass and the set held for the whole pass.  Paper: four
// units of 256 points at 2 GHz take 1024 coefficients per 2 GHz cycle; in
// this single-clock model the PE accepts one 256-coefficient chunk per cycle.
module ntt_pe
  import basalisc_pkg::*;
#(
  parameter int unsigned RADIX     = 256,
  parameter int unsigned NUM_UNITS = 4,
  parameter int unsigned SETS      = 112
) (
  input  logic       clk,
  input  logic       rst_n,
  // twiddle table load (one vector per cycle)
  input  logic       tw_wr_en,
  input  logic       tw_wr_seed,
  input  logic [7:0] tw_wr_set,
  input  coeff_t     tw_wr_data [RADIX],
  // twiddle set select for the coming pass
  input  logic       sel_en,
  input  logic [7:0] sel_set,
  // chunk input
  input  logic       in_valid,
  input  coeff_t     in_data [RADIX],
  input  coeff_t     in_q,
  input  logic       in_post_en,
  input  logic [7:0] in_idx,
  // chunk output
  output logic       out_valid,
  output coeff_t     out_data [RADIX],
  output logic [$clog2(NUM_UNITS+1)-1:0] out_unit
);
  localparam int unsigned UW = $clog2(NUM_UNITS + 1);

  coeff_t pre_tw  [RADIX];
  coeff_t bfly_tw [RADIX/2];
  coeff_t post_tw [NUM_UNITS][RADIX];
  logic [UW-1:0] rr;
  logic [7:0]    cur_set;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr      <= '0;
      cur_set <= '0;
    end else begin
      if (sel_en) cur_set <= sel_set;
      if (in_valid) rr <= (rr == UW'(NUM_UNITS - 1)) ? '0 : rr + 1'b1;
    end
  end

  twiddle_factory #(.RADIX(RADIX), .NUM_UNITS(NUM_UNITS), .SETS(SETS)) u_tf (
    .clk(clk),
    .wr_en(tw_wr_en), .wr_seed(tw_wr_seed), .wr_set(tw_wr_set), .wr_data(tw_wr_data),
    .sel_en(sel_en), .sel_set(sel_set), .pre_tw(pre_tw), .bfly_tw(bfly_tw),
    .seed_en(in_valid), .seed_set(cur_set), .seed_idx(in_idx), .seed_unit(rr),
    .seed_q(in_q), .post_tw(post_tw)
  );

  logic   u_valid [NUM_UNITS];
  coeff_t u_data  [NUM_UNITS][RADIX];

  for (genvar u = 0; u < NUM_UNITS; u++) begin : g_unit
    ntt_unit #(.RADIX(RADIX)) u_ntt (
      .clk(clk), .rst_n(rst_n),
      .in_valid(in_valid && rr == UW'(u)), .in_data(in_data), .in_q(in_q),
      .in_post_en(in_post_en), .pre_tw(pre_tw), .bfly_tw(bfly_tw),
      .post_tw(post_tw[u]), .out_valid(u_valid[u]), .out_data(u_data[u])
    );
  end

  // at most one unit finishes per cycle
  always_comb begin
    out_valid = 1'b0;
    out_unit  = '0;
    out_data  = u_data[0];
    for (int u = 0; u < NUM_UNITS; u++)
      if (u_valid[u]) begin
        out_valid = 1'b1;
        out_unit  = UW'(u);
        out_data  = u_data[u];
      end
  end

  // rule: the round-robin hand-out never lets two units finish together
  always @(posedge clk or negedge rst_n) begin
    int n;
    n = 0;
    for (int u = 0; u < NUM_UNITS; u++) n += int'(u_valid[u]);
    if (rst_n) assert (n <= 1) else $error("ntt_pe: two units finished in the same cycle");
  end
endmodule
