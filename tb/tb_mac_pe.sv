// tb_mac_pe: self-checking test of the MAC PE against a lane-by-lane model.
// Phase 1 fills all 16 RF entries from the CTB input, phase 2 runs random
// operations (every operand source, every ALU function, RF writes), phase 3
// runs a fast-base-extension style kernel: 12 chunks parked in the RF, then
// weighted sums ACC += w_i * RF[i] issued back to back, one multiply and one
// accumulate per cycle.  Every result, the latency (1 cycle) and the rate of
// the kernel are checked.
module tb_mac_pe;
  import basalisc_pkg::*;
  localparam int unsigned L = 2048;
  localparam longint unsigned Q = 64'd3221225473;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic in_valid, out_valid;
  mac_ctrl_t ctrl;
  coeff_t a [L], acc_out [L], b, q;
  int checks = 0, failures = 0;

  mac_pe #(.LANES(L)) dut (.*);

  longint unsigned RINV;
  coeff_t rf_m [16][L], acc_m [L], exp_v [L];

  function automatic longint unsigned powmod(longint unsigned bb, longint unsigned e);
    longint unsigned r = 1;
    bb = bb % Q;
    while (e != 0) begin
      if (e[0]) r = (r * bb) % Q;
      bb = (bb * bb) % Q;
      e = e >> 1;
    end
    return r;
  endfunction

  // model one operation on all lanes
  task automatic model(mac_ctrl_t c, coeff_t bb);
    for (int l = 0; l < L; l++) begin
      longint unsigned x, y, p, qq, r;
      x = c.x_rf ? rf_m[c.rs1][l] : bb;
      y = c.y_rf ? rf_m[c.rs2][l] : a[l];
      p = c.p_zero ? 0 : x;
      qq = c.q_prod ? (((x * y) % Q) * RINV) % Q : y;
      case (c.alu)
        ALU_ADD:    r = (p + qq) % Q;
        ALU_SUB:    r = (qq + Q - p) % Q;
        ALU_ACC:    r = (acc_m[l] + qq) % Q;
        default:    r = (acc_m[l] + Q - qq) % Q;
      endcase
      exp_v[l] = coeff_t'(r);
    end
    acc_m = exp_v;
    if (c.rf_we) rf_m[c.rd] = exp_v;
  endtask

  task automatic issue(mac_ctrl_t c, coeff_t bb, bit chk);
    ctrl = c; b = bb; in_valid = 1;
    model(c, bb);
    @(negedge clk);
    in_valid = 0;
    if (chk) begin
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid"); end
      for (int l = 0; l < L; l++) begin
        checks++;
        if (acc_out[l] != exp_v[l]) begin
          failures++;
          if (failures < 8) $display("FAIL lane %0d alu %0d got %0d exp %0d", l, c.alu, acc_out[l], exp_v[l]);
        end
      end
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mac_ctrl_t c;
    int t0, kcycles;
    RINV = powmod(2, Q - 1 - 34);
    q = coeff_t'(Q); in_valid = 0; b = 0; ctrl = '0;
    for (int l = 0; l < L; l++) a[l] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // phase 1: RF[i] = a (through P = 0, Q = Y)
    for (int i = 0; i < 16; i++) begin
      for (int l = 0; l < L; l++) a[l] = coeff_t'($urandom() % Q);
      c = '{x_rf: 0, y_rf: 0, p_zero: 1, q_prod: 0, alu: ALU_ADD, rs1: 0, rs2: 0, rd: 4'(i), rf_we: 1};
      issue(c, 0, 1);
    end
    // phase 2: random operations
    for (int t = 0; t < 150; t++) begin
      for (int l = 0; l < L; l++) a[l] = coeff_t'($urandom() % Q);
      c = '{x_rf: 1'($urandom()), y_rf: 1'($urandom()), p_zero: 1'($urandom()),
            q_prod: 1'($urandom()), alu: alu_op_e'($urandom()), rs1: 4'($urandom()),
            rs2: 4'($urandom()), rd: 4'($urandom()), rf_we: 1'($urandom())};
      issue(c, coeff_t'($urandom() % Q), 1);
    end
    // phase 3: 12 residues in RF, 4 weighted sums of 12 terms each
    for (int i = 0; i < 12; i++) begin
      for (int l = 0; l < L; l++) a[l] = coeff_t'($urandom() % Q);
      c = '{x_rf: 0, y_rf: 0, p_zero: 1, q_prod: 0, alu: ALU_ADD, rs1: 0, rs2: 0, rd: 4'(i), rf_we: 1};
      issue(c, 0, 0);
    end
    t0 = $time;
    for (int j = 0; j < 4; j++)
      for (int i = 0; i < 12; i++) begin
        c = '{x_rf: 0, y_rf: 1, p_zero: 1, q_prod: 1, alu: (i == 0) ? ALU_ADD : ALU_ACC,
              rs1: 0, rs2: 4'(i), rd: 4'(12 + j), rf_we: (i == 11)};
        issue(c, coeff_t'($urandom() % Q), i == 11);
      end
    kcycles = ($time - t0) / 2;
    checks++;
    if (kcycles != 48) begin failures++; $display("FAIL kernel took %0d cycles", kcycles); end
    for (int j = 0; j < 4; j++)
      for (int l = 0; l < L; l += 97) begin
        checks++;
        if (dut.rf[12 + j][l] != rf_m[12 + j][l]) begin failures++; $display("FAIL rf %0d", 12 + j); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
