// tb_permutation_pe: self-checking test of the Permutation PE.
// A general instance gets random odd a, random b and c; a read instance
// (GENERAL = 0) gets random c with random a, b that it must ignore.  Each
// output array is compared with out[((a*i+b) mod N) xor c] = in[i], the
// one-cycle latency is checked, and no switch may report a conflict.  The
// first vector is the 4-bank example of the paper's layout figure scaled up:
// bank order of column 1 mapped back to natural order.
module tb_permutation_pe;
  import basalisc_pkg::*;
  localparam int unsigned N   = 256;
  localparam int unsigned LOG = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic   g_in_valid, g_out_valid, g_conf, r_out_valid, r_conf;
  coeff_t in_data [N], g_out [N], r_out [N];
  logic [LOG-1:0] a, b, c;
  int checks = 0, failures = 0;

  permutation_pe #(.N(N), .GENERAL(1'b1)) u_gen (
    .clk, .rst_n, .in_valid(g_in_valid), .in_data, .a, .b, .c,
    .out_valid(g_out_valid), .out_data(g_out), .conflict(g_conf));
  permutation_pe #(.N(N), .GENERAL(1'b0)) u_rd (
    .clk, .rst_n, .in_valid(g_in_valid), .in_data, .a, .b, .c,
    .out_valid(r_out_valid), .out_data(r_out), .conflict(r_conf));

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    g_in_valid = 0; a = 1; b = 0; c = 0;
    for (int i = 0; i < N; i++) in_data[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) in_data[i] = $urandom();
      a = LOG'($urandom()) | 1'b1;
      b = LOG'($urandom());
      c = (t == 0) ? LOG'(1) : LOG'($urandom());
      if (t == 0) begin a = 1; b = 0; end
      g_in_valid = 1;
      @(negedge clk);
      g_in_valid = 0;
      checks++;
      if (!g_out_valid || !r_out_valid || g_conf || r_conf) begin
        failures++; $display("FAIL valid/conflict at vector %0d", t);
      end
      for (int i = 0; i < N; i++) begin
        logic [LOG-1:0] dg, dr;
        dg = LOG'(a * LOG'(i) + b) ^ c;
        dr = LOG'(i) ^ c;
        checks += 2;
        if (g_out[dg] != in_data[i]) begin
          failures++;
          if (failures < 8) $display("FAIL general a=%0d b=%0d c=%0d i=%0d", a, b, c, i);
        end
        if (r_out[dr] != in_data[i]) begin
          failures++;
          if (failures < 8) $display("FAIL read c=%0d i=%0d", c, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
