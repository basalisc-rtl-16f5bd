// tb_ctb: self-checking test of the ciphertext buffer.  A model holds each
// page as a matrix.  Random row and column writes (converted to bank order:
// lane b carries natural position b xor idx) are followed by random row and
// column reads, so data written as rows is read back as columns and the
// reverse, which is the transposition the NTT needs.  Read latency is one
// cycle; rdata is checked against the model the cycle after the read.
module tb_ctb;
  import basalisc_pkg::*;
  localparam int unsigned B = 16, P = 4;

  logic clk = 0;
  always #1 clk = ~clk;

  logic en, we, col;
  logic [1:0] page;
  logic [3:0] idx;
  coeff_t wdata [B], rdata [B];
  int checks = 0, failures = 0;

  ctb #(.BANKS(B), .PAGES(P)) dut (.*);

  coeff_t m [P][B][B];

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; col = 0; page = 0; idx = 0;
    for (int b = 0; b < B; b++) wdata[b] = 0;
    @(negedge clk);
    // fill every page with rows
    for (int p = 0; p < P; p++)
      for (int r = 0; r < B; r++) begin
        en = 1; we = 1; col = 0; page = 2'(p); idx = 4'(r);
        for (int b = 0; b < B; b++) begin
          m[p][r][b ^ r] = $urandom();
          wdata[b] = m[p][r][b ^ r];
        end
        @(negedge clk);
      end
    for (int t = 0; t < 2000; t++) begin
      logic c;
      int p, i;
      c = 1'($urandom()); p = $urandom_range(P - 1); i = $urandom_range(B - 1);
      en = 1; col = c; page = 2'(p); idx = 4'(i);
      we = ($urandom_range(3) == 0);
      if (we) begin
        for (int b = 0; b < B; b++) begin
          wdata[b] = $urandom();
          if (c) m[p][b ^ i][i] = wdata[b];
          else   m[p][i][b ^ i] = wdata[b];
        end
        @(negedge clk);
      end else begin
        @(negedge clk);
        en = 0;
        for (int b = 0; b < B; b++) begin
          coeff_t e;
          e = c ? m[p][b ^ i][i] : m[p][i][b ^ i];
          checks++;
          if (rdata[b] !== e) begin
            failures++;
            if (failures < 8) $display("FAIL col=%0d page=%0d idx=%0d bank=%0d got %h exp %h", c, p, i, b, rdata[b], e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
