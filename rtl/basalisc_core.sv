// basalisc_core: the BASALISC FHE core.
//
// What it does: executes batches of micro-instructions for BGV arithmetic on
// residue polynomials of N = LANES^2 coefficients held in an on-chip
// ciphertext buffer: negacyclic NTT passes, multiply-accumulate kernels
// (ciphertext add/multiply, key switching, base extension), automorphism
// permutations, and transfers to and from distant memory.
//
// How: the host writes instructions into the instruction queue (AXI4
// subordinate).  The traffic control unit issues them in order and schedules
// the single CTB port.  A chunk (one row or column of a page, LANES words) is
// read from the CTB in bank order, put into natural order by the read
// permutation PE (i -> i xor idx), processed by the MAC PE or the NTT PE (or
// passed through for PERM), mapped back to bank order by the write
// permutation PE (i -> ((a*i + b) mod LANES) xor idx) and written to the CTB.
// TWLD instructions copy a CTB chunk into the NTT twiddle factory.  The DMA
// moves chunks between DRAM (AXI4 manager, 512 bits) and the CTB.
//
// Interface: clock and active-low reset; instruction AXI4 write subordinate;
// DMA AXI4 manager (read and write channels); status (halted, idle) and
// event counters (issued, stalls, SYNC and DMA wait cycles, NTT, MAC, PERM, LOAD,
// STORE, DMA writes into the CTB).  Latencies after issue in cycle t: PERM
// writes back in t+3, MAC in t+4, NTT in t+3+NTT latency (see tcu).
//
// Paper versus this design: the block structure (instruction queue, TCU,
// CTB, read/write permutation PEs, NTT PE with four units and a twiddle
// factory, MAC PE, DMA) follows the paper's architecture figure.  The paper
// runs the NTT PE at 2 GHz and the rest at 1 GHz and moves eight chunks per
// CTB access; this design has one clock and moves one chunk per cycle, so
// the MAC PE has LANES lanes (paper 2048).  The NTT PE's unit number output
// (ntt_unit_id) is left unused; the high bits of the TCU's 8-bit page,
// index and permutation fields are unused when PAGES or LANES are below 256.  The RISC-V CPU, DDR/PCIe
// controllers, interconnect and JTAG are outside the core.
module basalisc_core
  import basalisc_pkg::*;
#(
  parameter int unsigned LANES     = 256,   // sqrt(N), chunk size, CTB banks
  parameter int unsigned PAGES     = 256,   // CTB pages of LANES^2 words (64 MB at defaults)
  parameter int unsigned NUM_UNITS = 4,     // NTT units
  parameter int unsigned SETS      = 112,   // twiddle sets
  parameter int unsigned RF_DEPTH  = 16,    // MAC register file entries
  parameter int unsigned IQ_DEPTH  = 1024,  // instruction queue entries
  parameter int unsigned IQ_DATA_W = 128,
  parameter int unsigned ID_W      = 4,
  parameter int unsigned AXI_DATA_W = 512,
  parameter int unsigned AXI_ADDR_W = 40
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // instruction queue, AXI4 write subordinate
  input  logic [ID_W-1:0]         s_awid,
  input  logic [31:0]             s_awaddr,
  input  logic [7:0]              s_awlen,
  input  logic                    s_awvalid,
  output logic                    s_awready,
  input  logic [IQ_DATA_W-1:0]    s_wdata,
  input  logic                    s_wlast,
  input  logic                    s_wvalid,
  output logic                    s_wready,
  output logic [ID_W-1:0]         s_bid,
  output logic [1:0]              s_bresp,
  output logic                    s_bvalid,
  input  logic                    s_bready,
  // DMA, AXI4 manager
  output logic [AXI_ADDR_W-1:0]   m_araddr,
  output logic [7:0]              m_arlen,
  output logic [2:0]              m_arsize,
  output logic [1:0]              m_arburst,
  output logic                    m_arvalid,
  input  logic                    m_arready,
  input  logic [AXI_DATA_W-1:0]   m_rdata,
  input  logic                    m_rlast,
  input  logic                    m_rvalid,
  output logic                    m_rready,
  output logic [AXI_ADDR_W-1:0]   m_awaddr,
  output logic [7:0]              m_awlen,
  output logic [2:0]              m_awsize,
  output logic [1:0]              m_awburst,
  output logic                    m_awvalid,
  input  logic                    m_awready,
  output logic [AXI_DATA_W-1:0]   m_wdata,
  output logic [AXI_DATA_W/8-1:0] m_wstrb,
  output logic                    m_wlast,
  output logic                    m_wvalid,
  input  logic                    m_wready,
  input  logic                    m_bvalid,
  output logic                    m_bready,
  // status
  output logic                    halted,
  output logic                    idle,
  output logic                    perm_conflict,
  output logic [$clog2(IQ_DEPTH+1)-1:0] iq_level,
  output logic [31:0]             cnt_issued,
  output logic [31:0]             cnt_stall,
  output logic [31:0]             cnt_sync_wait,
  output logic [31:0]             cnt_dma_wait,
  output logic [31:0]             cnt_ntt,
  output logic [31:0]             cnt_mac,
  output logic [31:0]             cnt_perm,
  output logic [31:0]             cnt_load,
  output logic [31:0]             cnt_store,
  output logic [31:0]             cnt_dma_wr
);
  localparam int unsigned LOG     = $clog2(LANES);
  localparam int unsigned PW      = $clog2(PAGES);
  localparam int unsigned NTT_LAT = LOG + 2;

  // ------------------------------------------------------------ queue
  logic   iq_valid, iq_ready;
  instr_t iq_instr;

  instr_queue #(.DEPTH(IQ_DEPTH), .DATA_W(IQ_DATA_W), .ID_W(ID_W)) u_iq (
    .clk, .rst_n,
    .s_awid, .s_awaddr, .s_awlen, .s_awvalid, .s_awready,
    .s_wdata, .s_wlast, .s_wvalid, .s_wready,
    .s_bid, .s_bresp, .s_bvalid, .s_bready,
    .out_valid(iq_valid), .out_instr(iq_instr), .out_ready(iq_ready), .level(iq_level)
  );

  // ------------------------------------------------------------ TCU
  logic        ctb_en, ctb_we, ctb_col, ctb_wsel;
  logic [7:0]  ctb_page, ctb_idx;
  logic        rp_valid;
  logic [7:0]  rp_c;
  logic        mac_valid;
  mac_ctrl_t   mac_ctrl;
  coeff_t      mac_b, pe_q;
  logic        ntt_sel_en, ntt_valid, ntt_post_en;
  logic [7:0]  ntt_sel_set, ntt_idx;
  logic        tw_wr_en, tw_wr_seed;
  logic [7:0]  tw_wr_set;
  logic        wp_valid;
  logic [1:0]  wp_src;
  logic [7:0]  wp_a, wp_b, wp_c;
  logic        dma_cmd_valid, dma_cmd_store, dma_cmd_ready, dma_busy;
  logic [31:0] dma_cmd_chunk;
  ctb_addr_t   dma_cmd_tag, dma_ld_tag;
  logic        dma_ld_valid, dma_ld_ready;

  tcu #(.NTT_LAT(NTT_LAT)) u_tcu (
    .clk, .rst_n,
    .iq_valid, .iq_instr, .iq_ready,
    .ctb_en, .ctb_we, .ctb_col, .ctb_page, .ctb_idx, .ctb_wsel,
    .rp_valid, .rp_c,
    .mac_valid, .mac_ctrl, .mac_b, .pe_q,
    .ntt_sel_en, .ntt_sel_set, .ntt_valid, .ntt_post_en, .ntt_idx,
    .tw_wr_en, .tw_wr_seed, .tw_wr_set,
    .wp_valid, .wp_src, .wp_a, .wp_b, .wp_c,
    .dma_cmd_valid, .dma_cmd_store, .dma_cmd_chunk, .dma_cmd_tag, .dma_cmd_ready,
    .dma_busy, .dma_ld_valid, .dma_ld_tag, .dma_ld_ready,
    .halted, .idle,
    .cnt_issued, .cnt_stall, .cnt_sync_wait, .cnt_dma_wait, .cnt_ntt, .cnt_mac, .cnt_perm,
    .cnt_load, .cnt_store, .cnt_dma_wr
  );

  // ------------------------------------------------------------ datapath
  coeff_t ctb_wdata [LANES], ctb_rdata [LANES];
  coeff_t rp_out    [LANES], wp_in [LANES], wp_out [LANES];
  coeff_t mac_out   [LANES], ntt_out [LANES], dma_ld_data [LANES];
  logic   rp_out_valid, wp_out_valid, mac_out_valid, ntt_out_valid;
  logic   rp_conflict, wp_conflict;
  logic [$clog2(NUM_UNITS+1)-1:0] ntt_unit_id;

  ctb #(.BANKS(LANES), .PAGES(PAGES)) u_ctb (
    .clk, .en(ctb_en), .we(ctb_we), .col(ctb_col),
    .page(ctb_page[PW-1:0]), .idx(ctb_idx[LOG-1:0]),
    .wdata(ctb_wdata), .rdata(ctb_rdata)
  );

  permutation_pe #(.N(LANES), .GENERAL(1'b0)) u_read_perm (
    .clk, .rst_n, .in_valid(rp_valid), .in_data(ctb_rdata),
    .a(LOG'(1)), .b('0), .c(rp_c[LOG-1:0]),
    .out_valid(rp_out_valid), .out_data(rp_out), .conflict(rp_conflict)
  );

  mac_pe #(.LANES(LANES), .RF_DEPTH(RF_DEPTH)) u_mac (
    .clk, .rst_n, .in_valid(mac_valid), .ctrl(mac_ctrl),
    .a(rp_out), .b(mac_b), .q(pe_q),
    .out_valid(mac_out_valid), .acc_out(mac_out)
  );

  ntt_pe #(.RADIX(LANES), .NUM_UNITS(NUM_UNITS), .SETS(SETS)) u_ntt (
    .clk, .rst_n,
    .tw_wr_en, .tw_wr_seed, .tw_wr_set, .tw_wr_data(rp_out),
    .sel_en(ntt_sel_en), .sel_set(ntt_sel_set),
    .in_valid(ntt_valid), .in_data(rp_out), .in_q(pe_q),
    .in_post_en(ntt_post_en), .in_idx(ntt_idx),
    .out_valid(ntt_out_valid), .out_data(ntt_out), .out_unit(ntt_unit_id)
  );

  always_comb begin
    unique case (wp_src)
      2'd0:    wp_in = mac_out;
      2'd1:    wp_in = ntt_out;
      default: wp_in = rp_out;
    endcase
  end

  permutation_pe #(.N(LANES), .GENERAL(1'b1)) u_write_perm (
    .clk, .rst_n, .in_valid(wp_valid), .in_data(wp_in),
    .a(wp_a[LOG-1:0]), .b(wp_b[LOG-1:0]), .c(wp_c[LOG-1:0]),
    .out_valid(wp_out_valid), .out_data(wp_out), .conflict(wp_conflict)
  );

  assign ctb_wdata     = ctb_wsel ? dma_ld_data : wp_out;
  assign perm_conflict = rp_conflict || wp_conflict;

  // rule: the write permutation PE is only fed from a source whose result is
  // valid in that cycle, and every CTB write-back has a valid permuted chunk
  always @(posedge clk or negedge rst_n) begin
    if (rst_n && wp_valid)
      assert ((wp_src == 2'd0 && mac_out_valid) || (wp_src == 2'd1 && ntt_out_valid) ||
              (wp_src == 2'd2 && rp_out_valid))
        else $error("basalisc_core: write-back source not valid");
    if (rst_n && ctb_en && ctb_we && !ctb_wsel)
      assert (wp_out_valid) else $error("basalisc_core: CTB write-back without data");
  end

  axi_dma #(.LANES(LANES), .DATA_W(AXI_DATA_W), .ADDR_W(AXI_ADDR_W), .TAG_W($bits(ctb_addr_t))) u_dma (
    .clk, .rst_n,
    .cmd_valid(dma_cmd_valid), .cmd_ready(dma_cmd_ready), .cmd_store(dma_cmd_store),
    .cmd_chunk(dma_cmd_chunk), .cmd_tag(dma_cmd_tag), .cmd_data(ctb_rdata),
    .ld_valid(dma_ld_valid), .ld_tag(dma_ld_tag), .ld_data(dma_ld_data), .ld_ready(dma_ld_ready),
    .busy(dma_busy),
    .m_araddr, .m_arlen, .m_arsize, .m_arburst, .m_arvalid, .m_arready,
    .m_rdata, .m_rlast, .m_rvalid, .m_rready,
    .m_awaddr, .m_awlen, .m_awsize, .m_awburst, .m_awvalid, .m_awready,
    .m_wdata, .m_wstrb, .m_wlast, .m_wvalid, .m_wready, .m_bvalid, .m_bready
  );
endmodule
