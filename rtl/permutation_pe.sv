// permutation_pe: on-the-fly permutation unit between the CTB and the PEs.
//
// Moves element i of an N-element input array to output position
//   dest(i) = ((a*i + b) mod N) xor c,   a odd,
// which covers both the conflict-free CTB layout (a = 1, b = 0: bank order
// <-> natural order of row or column c) and the ring automorphisms.  With
// GENERAL = 0 the unit is the Read Permutation PE, which only implements
// i -> i xor c (a and b are ignored and taken as 1 and 0).
//
// Structure, as in the paper: a configuration portion computes each input's
// routing pattern from a, b and c and attaches it to the data word; the
// data portion is an Omega network of log2(N) stages, each a perfect
// shuffle followed by N/2 2x2 switch nodes.  A switch node forwards a word
// to its upper or lower output according to the least significant pattern
// bit and strips that bit, so the payload shrinks by one bit per stage.  The
// pattern is the destination address bit-reversed, i.e. destination-tag
// routing MSB first.  Omega networks pass the maps a*i+b with odd a without
// blocking (Lawrie's p-ordered vectors), and xor c flips the same routing
// bit of every word at a stage, so it adds no conflicts; an assertion
// checks that no switch receives two words for the same output.
//
// Timing: the network is combinational; out_data/out_valid are registered,
// latency 1 cycle, one array per cycle.
module permutation_pe
  import basalisc_pkg::*;
#(
  parameter int unsigned N       = 256,
  parameter bit          GENERAL = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  coeff_t               in_data [N],
  input  logic [$clog2(N)-1:0] a,
  input  logic [$clog2(N)-1:0] b,
  input  logic [$clog2(N)-1:0] c,
  output logic                 out_valid,
  output coeff_t               out_data [N],
  output logic                 conflict      // a switch was asked for one output twice
);
  localparam int unsigned LOG = $clog2(N);

  typedef struct packed {
    logic [LOG-1:0] tag;
    coeff_t         data;
  } payload_t;

  payload_t first [N];
  logic     sw_conflict [LOG];
  coeff_t   net_out [N];

  // configuration portion: attach routing pattern to each word
  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [LOG-1:0] dest;
      logic [LOG-1:0] ea, eb;
      ea   = GENERAL ? a : LOG'(1);
      eb   = GENERAL ? b : '0;
      dest = LOG'(ea * LOG'(i) + eb) ^ c;
      first[i].tag  = LOG'(bit_rev(16'(dest), LOG));
      first[i].data = in_data[i];
    end
  end

  // data portion: LOG x (perfect shuffle + N/2 switch nodes)
  // each stage has its own arrays so that no array spans two stages
  for (genvar s = 0; s < LOG; s++) begin : g_stage
    payload_t din [N], shuf [N], dout [N];
    if (s == 0) begin : g_in
      assign din = first;
    end else begin : g_in
      assign din = g_stage[s-1].dout;
    end
    always_comb begin
      // perfect shuffle: position i goes to i rotated left by one bit
      for (int i = 0; i < N; i++) begin
        logic [LOG-1:0] pi;
        pi = LOG'(i);
        shuf[{pi[LOG-2:0], pi[LOG-1]}] = din[i];
      end
    end
    always_comb begin
      sw_conflict[s] = 1'b0;
      for (int k = 0; k < N / 2; k++) begin
        payload_t up, lo;
        logic     up_sel, lo_sel;
        up = shuf[2*k];
        lo = shuf[2*k+1];
        up_sel = up.tag[0];
        lo_sel = lo.tag[0];
        if (up_sel == lo_sel) sw_conflict[s] = 1'b1;
        up.tag = up.tag >> 1;
        lo.tag = lo.tag >> 1;
        // straight when the upper word wants the upper output, else crossed
        dout[2*k]   = up_sel ? lo : up;
        dout[2*k+1] = up_sel ? up : lo;
      end
    end
  end

  always_comb
    for (int i = 0; i < N; i++) net_out[i] = g_stage[LOG-1].dout[i].data;

  logic any_conflict;
  always_comb begin
    any_conflict = 1'b0;
    for (int s = 0; s < LOG; s++) any_conflict |= sw_conflict[s];
  end

  always_ff @(posedge clk) out_data <= net_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      conflict  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      conflict  <= in_valid && any_conflict;
    end
  end

  // rule: a valid permutation never blocks in the network
  always @(posedge clk or negedge rst_n)
    if (rst_n && in_valid) assert (!any_conflict)
      else $error("permutation_pe: blocked permutation a=%0d b=%0d c=%0d", a, b, c);
endmodule
