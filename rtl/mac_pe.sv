// mac_pe: the Multiply-Accumulate processing element.
//
// LANES identical lanes, one per coefficient of a chunk.  Per lane, following
// the paper's MAC PE diagram:
//   X = x_rf ? RF[rs1] : b          (b: 32-bit constant broadcast to all lanes)
//   Y = y_rf ? RF[rs2] : a          (a: chunk coming from the CTB)
//   P = p_zero ? 0 : X
//   Q = q_prod ? mont(X, Y) : Y     (Montgomery product X*Y*2^-34 mod q)
//   result = P + Q | Q - P | ACC + Q | ACC - Q     (alu, all mod q)
// The result is stored in the accumulator register, which drives acc_out
// (towards the CTB), and, when rf_we, in register-file entry rd.
// Typical uses: chunk times/plus constant at full rate; chunk times chunk at
// half rate (first chunk parked in the RF, second read from the CTB); RF-only
// kernels; multiply-accumulate ACC += X*Y every cycle (the inner loop of fast
// base extension in hybrid key switching).
//
// Sizes from the paper: 2048 lanes, a 16-entry RF (16 x 2048 x 32 bit =
// 128 kB) and one accumulator (2048 x 32 bit = 8 kB).  The operand encoding
// is this design's own.  Timing: one operation per cycle when in_valid; the
// accumulator and RF are written at the next clock edge (latency 1).  RF
// reads are combinational, so an entry written in one cycle can be read by
// the operation of the next.  The paper runs this unit asynchronously at up
// to 1.6 GHz; here it shares the core clock.
module mac_pe
  import basalisc_pkg::*;
#(
  parameter int unsigned LANES    = 2048,
  parameter int unsigned RF_DEPTH = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  mac_ctrl_t ctrl,
  input  coeff_t    a [LANES],
  input  coeff_t    b,
  input  coeff_t    q,
  output logic      out_valid,
  output coeff_t    acc_out [LANES]
);
  coeff_t rf  [RF_DEPTH][LANES];
  coeff_t acc [LANES];
  coeff_t res [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    coeff_t x, y, p, qv, prod;
    assign x = ctrl.x_rf ? rf[ctrl.rs1][l] : b;
    assign y = ctrl.y_rf ? rf[ctrl.rs2][l] : a[l];
    mont_mul u_mul (.a(x), .b(y), .q(q), .y(prod));
    assign p  = ctrl.p_zero ? '0 : x;
    assign qv = ctrl.q_prod ? prod : y;
    always_comb begin
      unique case (ctrl.alu)
        ALU_ADD:    res[l] = mod_add(p, qv, q);
        ALU_SUB:    res[l] = mod_sub(qv, p, q);
        ALU_ACC:    res[l] = mod_add(acc[l], qv, q);
        ALU_ACCSUB: res[l] = mod_sub(acc[l], qv, q);
        default:    res[l] = '0;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      acc <= res;
      if (ctrl.rf_we) rf[ctrl.rd] <= res;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  assign acc_out = acc;
endmodule
