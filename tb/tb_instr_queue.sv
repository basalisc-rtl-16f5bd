// tb_instr_queue: self-checking test of the instruction queue (DEPTH 8).
// A host model writes random instructions in AXI4 bursts of random length
// with random valid gaps and random B readiness; a consumer pops with random
// ready.  Checked: instructions come out in order and unchanged, wready is
// low exactly when the queue is full, level never exceeds DEPTH, every burst
// gets one OKAY response carrying its AWID.
module tb_instr_queue;
  import basalisc_pkg::*;
  localparam int unsigned D = 8;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic [3:0]   s_awid, s_bid;
  logic [31:0]  s_awaddr;
  logic [7:0]   s_awlen;
  logic         s_awvalid, s_awready, s_wlast, s_wvalid, s_wready, s_bvalid, s_bready;
  logic [127:0] s_wdata;
  logic [1:0]   s_bresp;
  logic         out_valid, out_ready;
  instr_t       out_instr;
  logic [3:0]   level;
  int checks = 0, failures = 0;

  instr_queue #(.DEPTH(D)) dut (.*);

  logic [127:0] sent [$];
  int n_sent = 0, n_got = 0, n_resp = 0;
  localparam int TOTAL = 600;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consumer and monitors
  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (level > D) begin failures++; $display("FAIL level %0d", level); end
      checks++;
      if (s_wready && level == D) begin failures++; $display("FAIL wready while full"); end
      if (out_valid && out_ready) begin
        checks++;
        if (sent.size() == 0 || 128'(out_instr) != sent[0]) begin
          failures++;
          if (failures < 8) $display("FAIL instr %0d", n_got);
        end
        if (sent.size() != 0) void'(sent.pop_front());
        n_got++;
      end
      if (s_wvalid && s_wready) sent.push_back(s_wdata);
    end
  end
  always @(negedge clk) out_ready = ($urandom_range(2) == 0);

  initial begin
    s_awvalid = 0; s_wvalid = 0; s_wlast = 0; s_bready = 0;
    s_awid = 0; s_awaddr = 0; s_awlen = 0; s_wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (n_sent < TOTAL) begin
      int len;
      logic [3:0] id;
      len = $urandom_range(16, 1);
      id = 4'($urandom());
      s_awvalid = 1; s_awid = id; s_awaddr = $urandom(); s_awlen = 8'(len - 1);
      do @(posedge clk); while (!s_awready);
      @(negedge clk);
      s_awvalid = 0;
      for (int k = 0; k < len; k++) begin
        while ($urandom_range(3) == 0) @(negedge clk);
        s_wvalid = 1; s_wlast = (k == len - 1);
        s_wdata = {$urandom(), $urandom(), $urandom(), $urandom()};
        s_wdata[127 -: 4] = 4'($urandom_range(9));
        do @(posedge clk); while (!s_wready);
        @(negedge clk);
        s_wvalid = 0;
        n_sent++;
      end
      while ($urandom_range(2) == 0) @(negedge clk);
      s_bready = 1;
      do @(posedge clk); while (!s_bvalid);
      checks++;
      if (s_bid != id || s_bresp != 2'b00) begin failures++; $display("FAIL B id %0d exp %0d", s_bid, id); end
      n_resp++;
      @(negedge clk);
      s_bready = 0;
    end
    while (n_got < n_sent) @(negedge clk);
    checks++;
    if (sent.size() != 0) begin failures++; $display("FAIL leftover"); end
    $display("sent %0d instructions in %0d bursts", n_sent, n_resp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
