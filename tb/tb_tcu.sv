// tb_tcu: self-checking test of the traffic control unit on its own.
// A random stream of NOP, SETQ, MAC (random read/write enables), NTT, PERM,
// TWLD, LOAD, STORE and SYNC instructions is offered with random gaps, then
// HALT.  A DMA model answers commands after random delays.  For every
// instruction the TCU issues, the test predicts the cycle and contents of
// each consequence and checks it:
//   CTB read in the issue cycle with the source address;
//   read permutation valid one cycle later with c = source index;
//   MAC / NTT / twiddle-write strobes two cycles later, with the modulus
//   from the model moduli table, NTT twiddle select one cycle later;
//   CTB write-back exactly 3 (PERM), 4 (MAC) or 3+NTT_LAT (NTT) cycles later
//   at the destination, with the write permutation set one cycle before;
//   DMA load and store commands, DMA data written when the load completes;
//   SYNC issues only when nothing is outstanding; no CTB write is lost or
//   unexpected; the event counters match.
module tb_tcu;
  import basalisc_pkg::*;
  localparam int unsigned LAT = 10;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic iq_valid, iq_ready;
  instr_t iq_instr;
  logic ctb_en, ctb_we, ctb_col, ctb_wsel, rp_valid, mac_valid, ntt_sel_en, ntt_valid, ntt_post_en;
  logic [7:0] ctb_page, ctb_idx, rp_c, ntt_sel_set, ntt_idx, tw_wr_set, wp_a, wp_b, wp_c;
  mac_ctrl_t mac_ctrl;
  coeff_t mac_b, pe_q;
  logic tw_wr_en, tw_wr_seed, wp_valid;
  logic [1:0] wp_src;
  logic dma_cmd_valid, dma_cmd_store, dma_cmd_ready, dma_busy, dma_ld_valid, dma_ld_ready;
  logic [31:0] dma_cmd_chunk;
  ctb_addr_t dma_cmd_tag, dma_ld_tag;
  logic halted, idle;
  logic [31:0] cnt_issued, cnt_stall, cnt_sync_wait, cnt_dma_wait, cnt_ntt, cnt_mac, cnt_perm, cnt_load, cnt_store, cnt_dma_wr;
  int checks = 0, failures = 0;

  tcu #(.NTT_LAT(LAT)) dut (.*);

  typedef struct { bit v; ctb_addr_t dst; logic [7:0] a, b; logic [1:0] src; } wb_e;
  localparam int MAXC = 20000;
  wb_e    exp_wb  [MAXC];
  bit     exp_rp  [MAXC];
  logic [7:0] exp_rpc [MAXC];
  instr_t exp_s2  [MAXC];
  bit     exp_s2v [MAXC];
  coeff_t moduli  [64];
  int cycle = 0, n_ntt = 0, n_mac = 0, n_perm = 0, n_load = 0, n_store = 0, n_dma_wr = 0, n_issued = 0;
  int outstanding = 0;

  // DMA model
  int dma_state = 0, dma_delay = 0;  // 0 idle, 1 load wait, 2 load done, 3 store
  ctb_addr_t dma_tag_q;
  bit store_pending = 0;
  ctb_addr_t store_src;
  assign dma_cmd_ready = (dma_state == 0);
  assign dma_busy      = (dma_state != 0);
  assign dma_ld_valid  = (dma_state == 2);
  assign dma_ld_tag    = dma_tag_q;

  function automatic void chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL cycle %0d: %s", cycle, msg);
    end
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      instr_t in;
      in = iq_instr;
      // ---- expectations due this cycle
      chk(rp_valid == exp_rp[cycle], "rp_valid");
      if (exp_rp[cycle]) chk(rp_c == exp_rpc[cycle], "rp_c");
      chk(mac_valid == (exp_s2v[cycle] && exp_s2[cycle].op == OP_MAC), "mac_valid");
      chk(ntt_valid == (exp_s2v[cycle] && exp_s2[cycle].op == OP_NTT), "ntt_valid");
      chk(tw_wr_en  == (exp_s2v[cycle] && exp_s2[cycle].op == OP_TWLD), "tw_wr_en");
      if (mac_valid) begin
        chk(mac_ctrl == exp_s2[cycle].mac && mac_b == exp_s2[cycle].imm, "mac ctrl");
        chk(pe_q == moduli[exp_s2[cycle].qidx], "mac modulus");
      end
      if (ntt_valid) chk(ntt_idx == exp_s2[cycle].src.idx && ntt_post_en == exp_s2[cycle].post_en &&
                         pe_q == moduli[exp_s2[cycle].qidx], "ntt fields");
      if (tw_wr_en) chk(tw_wr_set == exp_s2[cycle].tw_set && tw_wr_seed == exp_s2[cycle].post_en, "twld fields");
      chk(wp_valid == exp_wb[cycle + 1].v, "wp_valid");
      if (wp_valid && exp_wb[cycle + 1].v)
        chk(wp_c == exp_wb[cycle + 1].dst.idx && wp_a == exp_wb[cycle + 1].a &&
            wp_b == exp_wb[cycle + 1].b && wp_src == exp_wb[cycle + 1].src, "write permutation settings");
      if (exp_wb[cycle].v) begin
        chk(ctb_en && ctb_we && !ctb_wsel, "write-back missing");
        chk(ctb_col == exp_wb[cycle].dst.col && ctb_page == exp_wb[cycle].dst.page &&
            ctb_idx == exp_wb[cycle].dst.idx, "write-back address");
        outstanding--;
      end else if (ctb_en && ctb_we && !ctb_wsel) chk(0, "unexpected write-back");
      if (ctb_en && ctb_we && ctb_wsel) begin
        chk(dma_ld_valid && dma_ld_ready, "DMA write without completion");
        chk({ctb_page, ctb_idx, ctb_col} == dma_tag_q, "DMA write address");
        n_dma_wr++;
      end
      if (dma_ld_valid && dma_ld_ready) chk(ctb_en && ctb_we && ctb_wsel, "DMA completion without write");
      // store command one cycle after issue
      chk(dma_cmd_valid == (store_pending || (iq_valid && iq_ready && in.op == OP_LOAD)), "dma_cmd_valid");
      if (store_pending) chk(dma_cmd_store && dma_cmd_tag == store_src, "store command");
      store_pending = 0;
      // ---- issue
      if (iq_valid && iq_ready) begin
        int off;
        bit rd, wb;
        n_issued++;
        off = 0; rd = 0; wb = 0;
        case (in.op)
          OP_MAC:   begin rd = in.rd_en; wb = in.wr_en; off = 4; n_mac++; end
          OP_NTT:   begin rd = 1; wb = in.wr_en; off = 3 + LAT; n_ntt++; end
          OP_PERM:  begin rd = 1; wb = 1; off = 3; n_perm++; end
          OP_TWLD:  rd = 1;
          OP_STORE: begin rd = 1; store_pending = 1; store_src = in.src; n_store++; end
          OP_LOAD:  begin
            chk(dma_cmd_chunk == in.imm && dma_cmd_tag == in.dst && !dma_cmd_store, "load command");
            n_load++;
          end
          OP_SYNC:  chk(outstanding == 0 && dma_state == 0, "SYNC issued with work outstanding");
          OP_SETQ:  moduli[in.qidx] = in.imm;
          default: ;
        endcase
        if (rd) chk(ctb_en && !ctb_we && ctb_col == in.src.col && ctb_page == in.src.page &&
                    ctb_idx == in.src.idx, "source read");
        // the read permutation runs for every chunk-path instruction
        if (in.op inside {OP_MAC, OP_NTT, OP_PERM, OP_TWLD, OP_STORE}) begin
          exp_rp[cycle + 1] = 1; exp_rpc[cycle + 1] = in.src.idx;
        end
        if (in.op inside {OP_MAC, OP_NTT, OP_TWLD, OP_PERM}) begin
          exp_s2v[cycle + 2] = 1; exp_s2[cycle + 2] = in;
        end
        if (wb) begin
          exp_wb[cycle + off] = '{v: 1, dst: in.dst, a: (in.op == OP_PERM) ? in.pa : 8'd1,
                                  b: (in.op == OP_PERM) ? in.pb : 8'd0,
                                  src: (in.op == OP_MAC) ? 2'd0 : (in.op == OP_NTT) ? 2'd1 : 2'd2};
          outstanding++;
        end
      end
      chk(ntt_sel_en == (cycle >= 1 && exp_s2v[cycle + 1] && exp_s2[cycle + 1].op == OP_NTT), "ntt_sel_en");
      // ---- DMA model
      case (dma_state)
        0: if (dma_cmd_valid) begin
             if (dma_cmd_store) begin dma_state <= 3; dma_delay <= $urandom_range(12, 2); end
             else begin dma_state <= 1; dma_delay <= $urandom_range(12, 2); dma_tag_q <= dma_cmd_tag; end
           end
        1: if (dma_delay == 0) dma_state <= 2; else dma_delay <= dma_delay - 1;
        2: if (dma_ld_ready) dma_state <= 0;
        3: if (dma_delay == 0) dma_state <= 0; else dma_delay <= dma_delay - 1;
        default: ;
      endcase
      cycle++;
    end
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic instr_t rand_instr();
    instr_t i;
    int k;
    i = instr_t'({$urandom(), $urandom(), $urandom(), $urandom()});
    i.qidx = 6'($urandom_range(3));
    k = $urandom_range(99);
    if (k < 5) i.op = OP_NOP;
    else if (k < 10) i.op = OP_SETQ;
    else if (k < 40) i.op = OP_MAC;
    else if (k < 60) i.op = OP_NTT;
    else if (k < 75) i.op = OP_PERM;
    else if (k < 80) i.op = OP_TWLD;
    else if (k < 87) i.op = OP_LOAD;
    else if (k < 94) i.op = OP_STORE;
    else i.op = OP_SYNC;
    return i;
  endfunction

  initial begin
    instr_t i;
    iq_valid = 0; iq_instr = '0;
    for (int k = 0; k < MAXC; k++) begin exp_wb[k].v = 0; exp_rp[k] = 0; exp_s2v[k] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int q = 0; q < 4; q++) begin
      i = '0; i.op = OP_SETQ; i.qidx = 6'(q); i.imm = $urandom();
      iq_valid = 1; iq_instr = i;
      @(negedge clk);
    end
    iq_valid = 0;
    for (int n = 0; n < 1500; n++) begin
      i = (n == 1499) ? instr_t'({OP_HALT, 124'b0}) : rand_instr();
      while ($urandom_range(4) == 0) begin iq_valid = 0; @(negedge clk); end
      iq_valid = 1; iq_instr = i;
      @(posedge clk);
      while (!iq_ready) @(posedge clk);
      @(negedge clk);
    end
    iq_valid = 0;
    while (!idle) @(negedge clk);
    repeat (2) @(negedge clk);
    chk(outstanding == 0, "writes outstanding at idle");
    chk(halted, "halted");
    chk(cnt_issued == 32'(n_issued) && cnt_ntt == 32'(n_ntt) && cnt_mac == 32'(n_mac) &&
        cnt_perm == 32'(n_perm) && cnt_load == 32'(n_load) && cnt_store == 32'(n_store) &&
        cnt_dma_wr == 32'(n_dma_wr), "counters");
    chk(cnt_stall != 0 && cnt_sync_wait != 0 && cnt_dma_wait != 0, "stalls, SYNC and DMA waits occurred");
    $display("issued %0d in %0d cycles: ntt %0d mac %0d perm %0d load %0d store %0d, stall %0d sync wait %0d dma wait %0d",
             cnt_issued, cycle, cnt_ntt, cnt_mac, cnt_perm, cnt_load, cnt_store, cnt_stall, cnt_sync_wait, cnt_dma_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
