// tb_basalisc_core: end-to-end test of the FHE core with a small geometry
// (16-word chunks, so polynomials of N = 256 coefficients, 8 CTB pages).
//
// A behavioural AXI4 memory stands in for DRAM (random ready/valid delays on
// every channel).  A host model writes one program into the instruction
// queue over AXI in bursts of up to 16 instructions, back-pressured by the
// queue.  The program:
//   SETQ; LOAD two random polynomials x, y and three twiddle chunks; SYNC;
//   TWLD x3; SYNC; NTT pass 1 (columns of x); SYNC; NTT pass 2 (rows);
//   immediately MAC x + C*y row by row and PERM y rows with i -> 3i+5
//   (both collide with the NTT write-backs, so the TCU must stall);
//   STORE the three results; SYNC; HALT.
// Checked: the negacyclic NTT of x against a direct evaluation, the MAC and
// PERM results, and the event counters (instructions of each kind, DMA
// transfers, stall cycles, SYNC and DMA wait cycles).  Each mechanism count is
// printed.
module tb_basalisc_core;
  import basalisc_pkg::*;
  localparam int unsigned R = 16, LOG = 4, N = R * R, P = 8;
  localparam int unsigned DW = 128, WPB = DW / 32, BEATS = R / WPB;
  localparam int unsigned IQ_D = 64;     // instruction queue depth
  localparam int unsigned WD = 400000;   // watchdog, time units (2 per cycle)
  localparam int unsigned RM = R;        // rows run through MAC and PERM
  localparam int unsigned KSTEP = 1;     // NTT outputs checked: every KSTEP-th
  localparam longint unsigned Q = 64'd998244353;
  localparam longint unsigned C = 64'd123456789;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic [3:0]   s_awid, s_bid;
  logic [31:0]  s_awaddr;
  logic [7:0]   s_awlen, m_arlen, m_awlen;
  logic         s_awvalid, s_awready, s_wlast, s_wvalid, s_wready, s_bvalid, s_bready;
  logic [127:0] s_wdata;
  logic [1:0]   s_bresp, m_arburst, m_awburst;
  logic [39:0]  m_araddr, m_awaddr;
  logic [2:0]   m_arsize, m_awsize;
  logic         m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic         m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [DW-1:0]   m_rdata, m_wdata;
  logic [DW/8-1:0] m_wstrb;
  logic         halted, idle, perm_conflict;
  logic [$clog2(IQ_D+1)-1:0] iq_level;
  logic [31:0]  cnt_issued, cnt_stall, cnt_sync_wait, cnt_dma_wait, cnt_ntt, cnt_mac, cnt_perm,
                cnt_load, cnt_store, cnt_dma_wr;
  int checks = 0, failures = 0;

  basalisc_core #(.LANES(R), .PAGES(P), .SETS(4), .IQ_DEPTH(IQ_D), .AXI_DATA_W(DW)) dut (.*);

  // ------------------------------------------------------------ DRAM model
  logic [DW-1:0] dram [longint];
  logic [39:0] rd_addr, wr_addr;
  int rd_left = 0;
  logic wr_open = 0;

  initial begin
    m_arready = 0; m_rvalid = 0; m_rlast = 0; m_rdata = '0;
    m_awready = 0; m_wready = 0; m_bvalid = 0;
  end

  always @(posedge clk) begin
    // read channel
    if (m_arvalid && m_arready) begin rd_addr <= m_araddr; rd_left <= int'(m_arlen) + 1; end
    if (m_rvalid && m_rready) begin
      rd_addr <= rd_addr + DW / 8;
      rd_left <= rd_left - 1;
    end
    // write channel
    if (m_awvalid && m_awready) begin wr_addr <= m_awaddr; wr_open <= 1; end
    if (m_wvalid && m_wready) begin
      dram[longint'(wr_addr / (DW / 8))] = m_wdata;
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
      m_rdata  = dram.exists(longint'(rd_addr / (DW / 8))) ? dram[longint'(rd_addr / (DW / 8))] : '0;
    end
  end

  // ------------------------------------------------------------ helpers
  function automatic longint unsigned powmod(longint unsigned b, longint unsigned e);
    longint unsigned r = 1;
    b = b % Q;
    while (e != 0) begin
      if (e[0]) r = (r * b) % Q;
      b = (b * b) % Q;
      e = e >> 1;
    end
    return r;
  endfunction
  function automatic longint unsigned to_mont(longint unsigned x);
    return (((x << 17) % Q) << 17) % Q;
  endfunction

  // store a natural-order chunk destined for CTB row r of some page
  task automatic put_chunk(int k, coeff_t v [R], int r);
    for (int bt = 0; bt < BEATS; bt++) begin
      logic [DW-1:0] w;
      for (int j = 0; j < WPB; j++) w[32*j +: 32] = v[(bt * WPB + j) ^ r];
      dram[longint'(k * BEATS + bt)] = w;
    end
  endtask
  // read a stored chunk back into natural order (it came from row/col idx)
  task automatic get_chunk(int k, int idx, output coeff_t v [R]);
    for (int bt = 0; bt < BEATS; bt++)
      for (int j = 0; j < WPB; j++) begin
        logic [DW-1:0] w;
        w = dram.exists(longint'(k * BEATS + bt)) ? dram[longint'(k * BEATS + bt)] : '0;
        v[(bt * WPB + j) ^ idx] = w[32*j +: 32];
      end
  endtask

  function automatic instr_t mk(opcode_e op);
    instr_t i;
    i = '0;
    i.op = op;
    return i;
  endfunction
  function automatic ctb_addr_t ad(int page, int idx, bit col);
    ctb_addr_t a;
    a.page = 8'(page); a.idx = 8'(idx); a.col = col;
    return a;
  endfunction

  instr_t prog [$];

  task automatic load(int k, int page, int row);
    instr_t i;
    i = mk(OP_LOAD); i.imm = 32'(k); i.dst = ad(page, row, 0);
    prog.push_back(i);
  endtask
  task automatic store(int k, int page, int row);
    instr_t i;
    i = mk(OP_STORE); i.imm = 32'(k); i.src = ad(page, row, 0); i.rd_en = 1;
    prog.push_back(i);
  endtask

  // ------------------------------------------------------------ host
  task automatic host_write();
    int pos;
    pos = 0;
    while (pos < prog.size()) begin
      int len;
      len = $urandom_range(16, 1);
      if (pos + len > prog.size()) len = prog.size() - pos;
      s_awvalid = 1; s_awid = 4'(pos); s_awaddr = 32'(pos * 16); s_awlen = 8'(len - 1);
      do @(posedge clk); while (!s_awready);
      @(negedge clk);
      s_awvalid = 0;
      for (int k = 0; k < len; k++) begin
        s_wvalid = 1; s_wdata = 128'(prog[pos + k]); s_wlast = (k == len - 1);
        do @(posedge clk); while (!s_wready);
        @(negedge clk);
        s_wvalid = 0;
      end
      s_bready = 1;
      do @(posedge clk); while (!s_bvalid);
      @(negedge clk);
      s_bready = 0;
      pos += len;
    end
  endtask

  initial begin
    #(WD);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  coeff_t x [N], y [N], v [R], X [N];
  longint unsigned psi;
  instr_t in;
  int n_instr, exp_stores;

  initial begin
    s_awvalid = 0; s_wvalid = 0; s_wlast = 0; s_bready = 0;
    s_awid = 0; s_awaddr = 0; s_awlen = 0; s_wdata = 0;
    psi = powmod(3, (Q - 1) / (2 * N));
    for (int i = 0; i < N; i++) begin
      x[i] = coeff_t'($urandom() % Q);
      y[i] = coeff_t'($urandom() % Q);
    end
    // DRAM: chunks 0..R-1 = rows of x, R..2R-1 = rows of y, 2R..2R+2 = twiddles
    for (int r = 0; r < R; r++) begin
      for (int c = 0; c < R; c++) v[c] = x[R * r + c];
      put_chunk(r, v, r);
      for (int c = 0; c < R; c++) v[c] = y[R * r + c];
      put_chunk(R + r, v, r);
    end
    for (int i = 0; i < R; i++) v[i] = coeff_t'(to_mont(powmod(psi, R * i)));
    put_chunk(2 * R, v, 0);
    for (int i = 0; i < R; i++) v[i] = coeff_t'(to_mont(powmod(psi, i)));
    put_chunk(2 * R + 1, v, 1);
    for (int i = 0; i < R; i++) v[i] = coeff_t'(to_mont(powmod(psi, 2 * i)));
    put_chunk(2 * R + 2, v, 2);

    // ---- program
    in = mk(OP_SETQ); in.qidx = 6'd0; in.imm = coeff_t'(Q); prog.push_back(in);
    for (int r = 0; r < R; r++) load(r, 0, r);
    for (int r = 0; r < RM; r++) load(R + r, 1, r);
    for (int r = 0; r < 3; r++) load(2 * R + r, 4, r);
    prog.push_back(mk(OP_SYNC));
    in = mk(OP_TWLD); in.src = ad(4, 0, 0); in.tw_set = 8'd2; in.post_en = 0; prog.push_back(in);
    in = mk(OP_TWLD); in.src = ad(4, 1, 0); in.tw_set = 8'd3; in.post_en = 0; prog.push_back(in);
    in = mk(OP_TWLD); in.src = ad(4, 2, 0); in.tw_set = 8'd2; in.post_en = 1; prog.push_back(in);
    prog.push_back(mk(OP_SYNC));
    for (int c = 0; c < R; c++) begin
      in = mk(OP_NTT); in.rd_en = 1; in.wr_en = 1; in.src = ad(0, c, 1); in.dst = ad(2, c, 1);
      in.tw_set = 8'd2; in.post_en = 1; prog.push_back(in);
    end
    prog.push_back(mk(OP_SYNC));
    for (int r = 0; r < R; r++) begin
      in = mk(OP_NTT); in.rd_en = 1; in.wr_en = 1; in.src = ad(2, r, 0); in.dst = ad(3, r, 0);
      in.tw_set = 8'd3; in.post_en = 0; prog.push_back(in);
    end
    for (int r = 0; r < RM; r++) begin
      in = mk(OP_MAC); in.rd_en = 1; in.src = ad(0, r, 0);
      in.mac = '{x_rf: 0, y_rf: 0, p_zero: 1, q_prod: 0, alu: ALU_ADD, rs1: 0, rs2: 0, rd: 0, rf_we: 0};
      prog.push_back(in);
      in = mk(OP_MAC); in.rd_en = 1; in.wr_en = 1; in.src = ad(1, r, 0); in.dst = ad(6, r, 0);
      in.imm = coeff_t'(C);
      in.mac = '{x_rf: 0, y_rf: 0, p_zero: 1, q_prod: 1, alu: ALU_ACC, rs1: 0, rs2: 0, rd: 0, rf_we: 0};
      prog.push_back(in);
      in = mk(OP_PERM); in.src = ad(1, r, 0); in.dst = ad(5, r, 0); in.pa = 8'd3; in.pb = 8'd5;
      in.rd_en = 1; in.wr_en = 1;
      prog.push_back(in);
    end
    prog.push_back(mk(OP_SYNC));
    for (int r = 0; r < R; r++) store(4 * R + r, 3, r);
    for (int r = 0; r < RM; r++) begin store(5 * R + r, 5, r); store(6 * R + r, 6, r); end
    prog.push_back(mk(OP_SYNC));
    prog.push_back(mk(OP_HALT));
    n_instr = prog.size();
    exp_stores = R + 2 * RM;

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    host_write();
    while (!idle) @(negedge clk);

    // ---- NTT result
    for (int p = 0; p < R; p++) begin
      get_chunk(4 * R + p, p, v);
      for (int j = 0; j < R; j++) X[bit_rev(16'(p), LOG) + R * bit_rev(16'(j), LOG)] = v[j];
    end
    for (int k = 0; k < N; k += KSTEP) begin
      longint unsigned acc, w, step;
      acc = 0; w = 1;
      step = powmod(psi, 2 * k + 1);
      for (int n = 0; n < N; n++) begin
        acc = (acc + (longint'(x[n]) * w) % Q) % Q;
        w = (w * step) % Q;
      end
      checks++;
      if (X[k] != coeff_t'(acc)) begin
        failures++;
        if (failures < 8) $display("FAIL NTT X[%0d] got %0d exp %0d", k, X[k], acc);
      end
    end
    // ---- PERM and MAC results
    begin
      longint unsigned rinv;
      rinv = powmod(2, Q - 1 - 34);
      for (int r = 0; r < RM; r++) begin
        get_chunk(5 * R + r, r, v);
        for (int i = 0; i < R; i++) begin
          checks++;
          if (v[(3 * i + 5) % R] != y[R * r + i]) begin
            failures++;
            if (failures < 8) $display("FAIL PERM row %0d i %0d", r, i);
          end
        end
        get_chunk(6 * R + r, r, v);
        for (int i = 0; i < R; i++) begin
          longint unsigned e;
          e = (longint'(x[R * r + i]) + ((C * longint'(y[R * r + i])) % Q) * rinv) % Q;
          checks++;
          if (v[i] != coeff_t'(e)) begin
            failures++;
            if (failures < 8) $display("FAIL MAC row %0d i %0d got %0d exp %0d", r, i, v[i], e);
          end
        end
      end
    end
    // ---- mechanisms
    $display("mechanism issued=%0d stall_cycles=%0d sync_wait_cycles=%0d dma_wait_cycles=%0d ntt=%0d mac=%0d perm=%0d load=%0d store=%0d dma_ctb_writes=%0d",
             cnt_issued, cnt_stall, cnt_sync_wait, cnt_dma_wait, cnt_ntt, cnt_mac, cnt_perm, cnt_load, cnt_store, cnt_dma_wr);
    checks += 10;
    if (cnt_issued != 32'(n_instr)) begin failures++; $display("FAIL issued %0d of %0d", cnt_issued, n_instr); end
    if (cnt_ntt != 2 * R)  begin failures++; $display("FAIL ntt count"); end
    if (cnt_mac != 2 * RM) begin failures++; $display("FAIL mac count"); end
    if (cnt_perm != RM)    begin failures++; $display("FAIL perm count"); end
    if (cnt_load != R + RM + 3) begin failures++; $display("FAIL load count"); end
    if (cnt_store != 32'(exp_stores)) begin failures++; $display("FAIL store count"); end
    if (cnt_dma_wr != R + RM + 3) begin failures++; $display("FAIL dma write count"); end
    if (cnt_stall == 0)     begin failures++; $display("FAIL no write-slot stall seen"); end
    if (cnt_sync_wait == 0) begin failures++; $display("FAIL no SYNC wait seen"); end
    if (cnt_dma_wait == 0)  begin failures++; $display("FAIL no DMA wait seen"); end
    checks++;
    if (perm_conflict !== 1'b0) begin failures++; $display("FAIL permutation conflict"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
