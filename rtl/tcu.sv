// tcu: the traffic control unit.  Decodes micro-instructions, issues them to
// the processing elements and the DMA, and schedules the single CTB port.
//
// What it does: pops one instruction per cycle from the instruction queue
// when it can be issued, reads the source chunk from the CTB, steers it
// through the read permutation PE into the MAC PE, the NTT PE, the write
// permutation PE or the twiddle factory, and writes results back into the
// CTB.  It also keeps the moduli table (SETQ), starts DMA transfers (LOAD,
// STORE), waits for all outstanding work on SYNC and stops on HALT.
//
// How: every operation has a fixed latency, so the CTB write of an issued
// instruction lands in a known future cycle.  A reservation shift register
// res[k] ("the CTB port writes k cycles from now") holds the destination and
// write-permutation settings of every pending write.  An instruction issues
// only if the port is free now (when it reads the CTB) and its write slot is
// free; otherwise it waits and the stall counter counts the cycle.  Cycles
// spent waiting for the DMA (LOAD/STORE while a transfer is running) and
// for SYNC are counted separately.  Port
// priority per cycle: a reserved write-back, then a finished DMA load, then
// the read of a newly issued instruction.  Chunk timing after issue in cycle
// t (CTB read in t):
//   t+1  CTB read data -> read permutation PE (c = src.idx) ; store data to DMA
//   t+2  natural-order chunk -> MAC PE, NTT PE, write permutation PE or
//        twiddle factory (TWLD)
//   PERM : write permutation PE in t+2, CTB write t+3
//   MAC  : result t+3, write permutation PE in t+3, CTB write t+4
//   NTT  : result t+2+NTT_LAT, write permutation PE then, CTB write t+3+NTT_LAT
// Data hazards between instructions on the same chunk are not checked; the
// program separates dependent instructions with SYNC (the paper's compiler
// schedules instructions statically).  The NTT PE takes the twiddle set of
// each NTT instruction one cycle before its data (sel_en at t+1), so a
// program must SYNC before switching twiddle set or pass.
//
// Interface: instruction valid/ready from the queue; CTB control (the top
// selects write data with ctb_wsel: 0 = write permutation PE, 1 = DMA);
// per-PE valid and settings as listed above; DMA command/ completion
// handshake; status and event counters.
//
// Only the fields each stage needs are read from the stage-2 copy of the
// instruction (op, modulus index, MAC control, immediate, twiddle fields,
// source index); the rest of that register is unused by design.
//
// Paper versus this design: the paper gives the TCU's role (decode,
// issue to PEs, manage on-chip memory traffic, one instruction queue) but not
// its design; the reservation scheme, priorities, instruction fields and
// counters are this design's.
module tcu
  import basalisc_pkg::*;
#(
  parameter int unsigned NTT_LAT = 10,   // NTT PE latency (LOG+2 at radix 256)
  parameter int unsigned QDEPTH  = 64    // moduli table entries
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction queue
  input  logic        iq_valid,
  input  instr_t      iq_instr,
  output logic        iq_ready,
  // CTB port
  output logic        ctb_en,
  output logic        ctb_we,
  output logic        ctb_col,
  output logic [7:0]  ctb_page,
  output logic [7:0]  ctb_idx,
  output logic        ctb_wsel,
  // read permutation PE (input side, t+1)
  output logic        rp_valid,
  output logic [7:0]  rp_c,
  // stage t+2 consumers
  output logic        mac_valid,
  output mac_ctrl_t   mac_ctrl,
  output coeff_t      mac_b,
  output coeff_t      pe_q,
  output logic        ntt_sel_en,
  output logic [7:0]  ntt_sel_set,
  output logic        ntt_valid,
  output logic        ntt_post_en,
  output logic [7:0]  ntt_idx,
  output logic        tw_wr_en,
  output logic        tw_wr_seed,
  output logic [7:0]  tw_wr_set,
  // write permutation PE (input side)
  output logic        wp_valid,
  output logic [1:0]  wp_src,     // 0 = MAC PE, 1 = NTT PE, 2 = read permutation PE
  output logic [7:0]  wp_a,
  output logic [7:0]  wp_b,
  output logic [7:0]  wp_c,
  // DMA
  output logic        dma_cmd_valid,
  output logic        dma_cmd_store,
  output logic [31:0] dma_cmd_chunk,
  output ctb_addr_t   dma_cmd_tag,
  input  logic        dma_cmd_ready,
  input  logic        dma_busy,
  input  logic        dma_ld_valid,
  input  ctb_addr_t   dma_ld_tag,
  output logic        dma_ld_ready,
  // status and counters
  output logic        halted,
  output logic        idle,
  output logic [31:0] cnt_issued,
  output logic [31:0] cnt_stall,
  output logic [31:0] cnt_sync_wait,
  output logic [31:0] cnt_dma_wait,
  output logic [31:0] cnt_ntt,
  output logic [31:0] cnt_mac,
  output logic [31:0] cnt_perm,
  output logic [31:0] cnt_load,
  output logic [31:0] cnt_store,
  output logic [31:0] cnt_dma_wr
);
  localparam int unsigned OFF_PERM = 3;
  localparam int unsigned OFF_MAC  = 4;
  localparam int unsigned OFF_NTT  = NTT_LAT + 3;
  localparam int unsigned D        = OFF_NTT + 1;

  typedef struct packed {
    logic       v;
    ctb_addr_t  dst;
    logic [7:0] a;
    logic [7:0] b;
    logic [1:0] src;
  } wb_t;

  wb_t    res   [D];
  coeff_t moduli [QDEPTH];
  logic   s1_v, s2_v;
  instr_t s1, s2;

  // ------------------------------------------------------------ issue logic
  instr_t in;
  logic   uses_rd, uses_wb, can, issue, sync_wait, dma_wait, dma_wr;
  int unsigned off;
  logic [1:0]  src_sel;
  logic        res_busy;

  assign in = iq_instr;

  always_comb begin
    res_busy = 1'b0;
    for (int k = 0; k < D; k++) res_busy |= res[k].v;
  end

  assign dma_wr = !res[0].v && dma_ld_valid;

  always_comb begin
    uses_rd = 1'b0; uses_wb = 1'b0; off = 0; src_sel = 2'd0;
    can = 1'b1; sync_wait = 1'b0; dma_wait = 1'b0;
    unique case (in.op)
      OP_MAC:   begin uses_rd = in.rd_en; uses_wb = in.wr_en; off = OFF_MAC; src_sel = 2'd0; end
      OP_NTT:   begin uses_rd = 1'b1; uses_wb = in.wr_en; off = OFF_NTT; src_sel = 2'd1; end
      OP_PERM:  begin uses_rd = 1'b1; uses_wb = 1'b1; off = OFF_PERM; src_sel = 2'd2; end
      OP_TWLD:  uses_rd = 1'b1;
      OP_STORE: begin uses_rd = 1'b1; dma_wait = !dma_cmd_ready || (s1_v && s1.op == OP_STORE); end
      OP_LOAD:  dma_wait = !dma_cmd_ready || (s1_v && s1.op == OP_STORE);
      OP_SYNC:  begin
        can = !res_busy && !s1_v && !s2_v && !dma_busy && !dma_ld_valid;
        sync_wait = !can;
      end
      default: ;
    endcase
    if (dma_wait) can = 1'b0;
    if (uses_rd && (res[0].v || dma_wr)) can = 1'b0;
    if (uses_wb && res[off].v) can = 1'b0;
  end

  assign issue    = iq_valid && !halted && can;
  assign iq_ready = issue;

  // ------------------------------------------------------------ CTB port
  always_comb begin
    ctb_en = 1'b0; ctb_we = 1'b0; ctb_wsel = 1'b0;
    ctb_col = 1'b0; ctb_page = '0; ctb_idx = '0;
    if (res[0].v) begin
      ctb_en = 1'b1; ctb_we = 1'b1;
      ctb_col = res[0].dst.col; ctb_page = res[0].dst.page; ctb_idx = res[0].dst.idx;
    end else if (dma_wr) begin
      ctb_en = 1'b1; ctb_we = 1'b1; ctb_wsel = 1'b1;
      ctb_col = dma_ld_tag.col; ctb_page = dma_ld_tag.page; ctb_idx = dma_ld_tag.idx;
    end else if (issue && uses_rd) begin
      ctb_en = 1'b1;
      ctb_col = in.src.col; ctb_page = in.src.page; ctb_idx = in.src.idx;
    end
  end
  assign dma_ld_ready = dma_wr;

  // ------------------------------------------------------------ DMA
  // LOAD: command at issue.  STORE: command one cycle later with CTB data.
  always_comb begin
    dma_cmd_valid = 1'b0; dma_cmd_store = 1'b0; dma_cmd_chunk = '0; dma_cmd_tag = '0;
    if (s1_v && s1.op == OP_STORE) begin
      dma_cmd_valid = 1'b1; dma_cmd_store = 1'b1; dma_cmd_chunk = s1.imm; dma_cmd_tag = s1.src;
    end else if (issue && in.op == OP_LOAD) begin
      dma_cmd_valid = 1'b1; dma_cmd_chunk = in.imm; dma_cmd_tag = in.dst;
    end
  end

  // ------------------------------------------------------------ stage outputs
  assign rp_valid    = s1_v;
  assign rp_c        = s1.src.idx;
  assign ntt_sel_en  = s1_v && s1.op == OP_NTT;
  assign ntt_sel_set = s1.tw_set;

  assign mac_valid   = s2_v && s2.op == OP_MAC;
  assign mac_ctrl    = s2.mac;
  assign mac_b       = s2.imm;
  assign pe_q        = moduli[s2.qidx];
  assign ntt_valid   = s2_v && s2.op == OP_NTT;
  assign ntt_post_en = s2.post_en;
  assign ntt_idx     = s2.src.idx;
  assign tw_wr_en    = s2_v && s2.op == OP_TWLD;
  assign tw_wr_seed  = s2.post_en;
  assign tw_wr_set   = s2.tw_set;

  assign wp_valid = res[1].v;
  assign wp_src   = res[1].src;
  assign wp_a     = res[1].a;
  assign wp_b     = res[1].b;
  assign wp_c     = res[1].dst.idx;

  assign idle = halted && !res_busy && !s1_v && !s2_v && !dma_busy && !dma_ld_valid;

  // ------------------------------------------------------------ state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < D; k++) res[k] <= '0;
      s1_v <= 1'b0; s2_v <= 1'b0; s1 <= '0; s2 <= '0;
      halted <= 1'b0;
      cnt_issued <= '0; cnt_stall <= '0; cnt_sync_wait <= '0; cnt_dma_wait <= '0;
      cnt_ntt <= '0; cnt_mac <= '0; cnt_perm <= '0;
      cnt_load <= '0; cnt_store <= '0; cnt_dma_wr <= '0;
    end else begin
      for (int k = 0; k < D - 1; k++) res[k] <= res[k+1];
      res[D-1] <= '0;
      if (issue && uses_wb) begin
        res[off-1] <= '{v: 1'b1, dst: in.dst,
                        a: (in.op == OP_PERM) ? in.pa : 8'd1,
                        b: (in.op == OP_PERM) ? in.pb : 8'd0,
                        src: src_sel};
      end
      s1_v <= issue && in.op inside {OP_MAC, OP_NTT, OP_PERM, OP_TWLD, OP_STORE};
      s1   <= in;
      s2_v <= s1_v && s1.op != OP_STORE;
      s2   <= s1;
      if (issue && in.op == OP_HALT) halted <= 1'b1;
      if (issue) cnt_issued <= cnt_issued + 1;
      if (iq_valid && !halted && !can && !sync_wait && !dma_wait) cnt_stall <= cnt_stall + 1;
      if (iq_valid && !halted && dma_wait) cnt_dma_wait <= cnt_dma_wait + 1;
      if (iq_valid && !halted && sync_wait) cnt_sync_wait <= cnt_sync_wait + 1;
      if (issue && in.op == OP_NTT)   cnt_ntt   <= cnt_ntt + 1;
      if (issue && in.op == OP_MAC)   cnt_mac   <= cnt_mac + 1;
      if (issue && in.op == OP_PERM)  cnt_perm  <= cnt_perm + 1;
      if (issue && in.op == OP_LOAD)  cnt_load  <= cnt_load + 1;
      if (issue && in.op == OP_STORE) cnt_store <= cnt_store + 1;
      if (dma_wr) cnt_dma_wr <= cnt_dma_wr + 1;
    end
  end

  always_ff @(posedge clk) begin
    if (issue && in.op == OP_SETQ) moduli[in.qidx] <= in.imm;
  end

  // rule: a write-back slot is never reserved twice
  always @(posedge clk or negedge rst_n) begin
    if (rst_n && issue && uses_wb) assert (!res[off].v) else $error("tcu: write slot reserved twice");
  end
endmodule
