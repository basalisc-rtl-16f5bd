// ntt_unit: one pipelined radix-RADIX NTT unit ("3-stage" unit of the NTT PE).
//
// The three arithmetic stages of the paper's unit, for a chunk of RADIX
// coefficients that enters in one cycle:
//   1. pre-multiply: x[i] *= pre_tw[i] for i >= 1 (RADIX-1 multipliers);
//   2. a RADIX-point decimation-in-frequency NTT, log2(RADIX) radix-2 layers;
//      a butterfly whose twiddle is w^0 = 1 has no multiplier, only a
//      register, so a 256-point NTT needs 1024 - 255 = 769 multipliers;
//   3. post-multiply: out[p] *= post_tw[bitrev(p)] for p >= 1 when post_en
//      (RADIX-1 multipliers), i.e. the inter-pass twiddle w_N^(n2*k1).
// The DIF flow leaves the output in bit-reversed order: out[p] = X[bitrev(p)].
// Layer s uses butterfly twiddle bfly_tw[(i mod h) << s] = w_RADIX^(...),
// h = RADIX >> (s+1).  All twiddles are in Montgomery form (x * 2^34 mod q).
//
// Interface: in_valid/in_data/in_q/in_post_en are taken every cycle; the
// modulus and post_en travel down the pipe with the data.  pre_tw and bfly_tw
// must be held stable while a chunk is in flight (they are constant for a
// whole pass).  post_tw is sampled when the chunk reaches the post stage,
// LOG+1 cycles after it entered.  Latency: LOG+2 cycles, one chunk per cycle.
// The paper's unit has 40 pipeline stages for 2 GHz; this one registers once
// per arithmetic layer (10 stages at RADIX = 256), a choice of this design.
module ntt_unit
  import basalisc_pkg::*;
#(
  parameter int unsigned RADIX = 256
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  coeff_t in_data  [RADIX],
  input  coeff_t in_q,
  input  logic   in_post_en,
  input  coeff_t pre_tw   [RADIX],
  input  coeff_t bfly_tw  [RADIX/2],
  input  coeff_t post_tw  [RADIX],
  output logic   out_valid,
  output coeff_t out_data [RADIX]
);
  localparam int unsigned LOG = $clog2(RADIX);

  // st[0]: after pre-multiply, st[s+1]: after butterfly layer s, st[LOG+1]: out
  coeff_t st [LOG+2][RADIX];
  coeff_t qs [LOG+2];
  logic   vs [LOG+2];
  logic   ps [LOG+2];

  // ------------------------------------------------------------ pre-multiply
  coeff_t pre_nx [RADIX];
  assign pre_nx[0] = in_data[0];
  for (genvar i = 1; i < RADIX; i++) begin : g_pre
    mont_mul u_mul (.a(in_data[i]), .b(pre_tw[i]), .q(in_q), .y(pre_nx[i]));
  end

  always_ff @(posedge clk) begin
    st[0] <= pre_nx;
    qs[0] <= in_q;
    ps[0] <= in_post_en;
  end

  // --------------------------------------------------------- DIF butterflies
  for (genvar s = 0; s < LOG; s++) begin : g_layer
    localparam int unsigned H = RADIX >> (s + 1);
    coeff_t nx [RADIX];
    for (genvar i = 0; i < RADIX; i++) begin : g_bf
      if ((i & H) == 0) begin : g_top
        localparam int unsigned E = (i % H) << s;   // twiddle exponent
        coeff_t diff;
        assign nx[i] = mod_add(st[s][i], st[s][i+H], qs[s]);
        assign diff  = mod_sub(st[s][i], st[s][i+H], qs[s]);
        if (E == 0) begin : g_one
          assign nx[i+H] = diff;                    // w^0: register only
        end else begin : g_mul
          mont_mul u_mul (.a(diff), .b(bfly_tw[E]), .q(qs[s]), .y(nx[i+H]));
        end
      end
    end
    always_ff @(posedge clk) begin
      st[s+1] <= nx;
      qs[s+1] <= qs[s];
      ps[s+1] <= ps[s];
    end
  end

  // ----------------------------------------------------------- post-multiply
  coeff_t post_nx [RADIX];
  assign post_nx[0] = st[LOG][0];
  for (genvar p = 1; p < RADIX; p++) begin : g_post
    localparam int unsigned K = 32'(bit_rev(16'(p), LOG));
    coeff_t prod;
    mont_mul u_mul (.a(st[LOG][p]), .b(post_tw[K]), .q(qs[LOG]), .y(prod));
    assign post_nx[p] = ps[LOG] ? prod : st[LOG][p];
  end

  always_ff @(posedge clk) begin
    st[LOG+1] <= post_nx;
    qs[LOG+1] <= qs[LOG];
    ps[LOG+1] <= ps[LOG];
  end

  // ------------------------------------------------------------ valid chain
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < LOG + 2; k++) vs[k] <= 1'b0;
    end else begin
      vs[0] <= in_valid;
      for (int k = 1; k < LOG + 2; k++) vs[k] <= vs[k-1];
    end
  end

  assign out_valid = vs[LOG+1];
  assign out_data  = st[LOG+1];

endmodule
