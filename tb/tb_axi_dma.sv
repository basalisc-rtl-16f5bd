// tb_axi_dma: self-checking test of the DMA (16-word chunks, 128-bit AXI, so
// 4-beat bursts).  A behavioural AXI4 memory with random handshake delays
// serves the manager port.  Random load and store commands with random
// chunk numbers and tags are issued; loads are compared with the model
// memory (data and returned tag), stores are compared by reading the memory
// model afterwards.  Burst length, size, type and chunk addresses are
// checked on every AR and AW handshake, and busy must be high between a
// command and its completion.
module tb_axi_dma;
  import basalisc_pkg::*;
  localparam int unsigned L = 16, DW = 128, WPB = DW / 32, BEATS = L / WPB;
  localparam int unsigned NCH = 32;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic cmd_valid, cmd_ready, cmd_store, ld_valid, ld_ready, busy;
  logic [31:0] cmd_chunk;
  logic [16:0] cmd_tag, ld_tag;
  coeff_t cmd_data [L], ld_data [L];
  logic [39:0] m_araddr, m_awaddr;
  logic [7:0]  m_arlen, m_awlen;
  logic [2:0]  m_arsize, m_awsize;
  logic [1:0]  m_arburst, m_awburst;
  logic m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [DW-1:0] m_rdata, m_wdata;
  logic [DW/8-1:0] m_wstrb;
  int checks = 0, failures = 0;

  axi_dma #(.LANES(L), .DATA_W(DW)) dut (.*);

  coeff_t model [NCH][L];
  logic [DW-1:0] mem [NCH * BEATS];
  logic [39:0] rd_addr, wr_addr;
  int rd_left = 0;
  logic wr_open = 0;

  initial begin
    m_arready = 0; m_rvalid = 0; m_rlast = 0; m_rdata = '0;
    m_awready = 0; m_wready = 0; m_bvalid = 0;
  end

  always @(posedge clk) begin
    if (m_arvalid && m_arready) begin
      checks++;
      if (m_arlen != 8'(BEATS - 1) || m_arsize != 3'd4 || m_arburst != 2'b01 || m_araddr % (L * 4) != 0) begin
        failures++; $display("FAIL AR fields");
      end
      rd_addr <= m_araddr; rd_left <= int'(m_arlen) + 1;
    end
    if (m_rvalid && m_rready) begin rd_addr <= rd_addr + DW / 8; rd_left <= rd_left - 1; end
    if (m_awvalid && m_awready) begin
      checks++;
      if (m_awlen != 8'(BEATS - 1) || m_awsize != 3'd4 || m_awburst != 2'b01 || m_awaddr % (L * 4) != 0) begin
        failures++; $display("FAIL AW fields");
      end
      wr_addr <= m_awaddr; wr_open <= 1;
    end
    if (m_wvalid && m_wready) begin
      checks++;
      if (m_wstrb != '1) begin failures++; $display("FAIL wstrb"); end
      mem[wr_addr / (DW / 8)] = m_wdata;
      wr_addr <= wr_addr + DW / 8;
      if (m_wlast) wr_open <= 0;
    end
    if (m_bvalid && m_bready) m_bvalid <= 0;
    if (m_wvalid && m_wready && m_wlast) m_bvalid <= 1;
  end

  always @(negedge clk) begin
    m_arready = (rd_left == 0) && ($urandom_range(3) != 0);
    m_awready = !wr_open && !m_bvalid && ($urandom_range(3) != 0);
    m_wready  = wr_open && ($urandom_range(3) != 0);
    if (!(m_rvalid && !m_rready)) begin
      m_rvalid = (rd_left != 0) && ($urandom_range(2) != 0);
      m_rlast  = (rd_left == 1);
      m_rdata  = mem[rd_addr / (DW / 8)];
    end
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nl, ns;
    nl = 0; ns = 0;
    cmd_valid = 0; cmd_store = 0; cmd_chunk = 0; cmd_tag = 0; ld_ready = 0;
    for (int i = 0; i < L; i++) cmd_data[i] = 0;
    for (int k = 0; k < NCH; k++)
      for (int bt = 0; bt < BEATS; bt++) begin
        for (int j = 0; j < WPB; j++) model[k][bt * WPB + j] = $urandom();
        for (int j = 0; j < WPB; j++) mem[k * BEATS + bt][32*j +: 32] = model[k][bt * WPB + j];
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int k;
      logic st;
      logic [16:0] tag;
      k = $urandom_range(NCH - 1); st = 1'($urandom()); tag = 17'($urandom());
      while (!cmd_ready) @(negedge clk);
      cmd_valid = 1; cmd_store = st; cmd_chunk = 32'(k); cmd_tag = tag;
      if (st) for (int i = 0; i < L; i++) begin cmd_data[i] = $urandom(); model[k][i] = cmd_data[i]; end
      @(negedge clk);
      cmd_valid = 0;
      checks++;
      if (!busy) begin failures++; $display("FAIL not busy after command"); end
      if (st) begin
        while (busy) @(negedge clk);
        ns++;
      end else begin
        while (!ld_valid) @(negedge clk);
        while ($urandom_range(2) == 0) @(negedge clk);
        ld_ready = 1;
        checks++;
        if (ld_tag != tag) begin failures++; $display("FAIL tag"); end
        for (int i = 0; i < L; i++) begin
          checks++;
          if (ld_data[i] != model[k][i]) begin
            failures++;
            if (failures < 8) $display("FAIL load chunk %0d word %0d", k, i);
          end
        end
        @(negedge clk);
        ld_ready = 0;
        nl++;
      end
    end
    // stored data must be in memory
    for (int k = 0; k < NCH; k++)
      for (int i = 0; i < L; i++) begin
        checks++;
        if (mem[k * BEATS + i / WPB][32 * (i % WPB) +: 32] != model[k][i]) begin
          failures++;
          if (failures < 8) $display("FAIL memory chunk %0d word %0d", k, i);
        end
      end
    $display("%0d loads, %0d stores", nl, ns);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
