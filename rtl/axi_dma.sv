// axi_dma: moves chunks between distant memory (DRAM, reached over a 512-bit
// AXI4 manager port) and the ciphertext buffer.
//
// What it does: a load command reads one chunk (LANES 32-bit words) from
// distant memory and hands it to the TCU, which writes it into the CTB; a
// store command takes one chunk read from the CTB and writes it to distant
// memory.  Chunks are kept in CTB bank order in DRAM, so no permutation is
// needed on the way in or out.
//
// How: one command at a time.  Chunk number k lives at byte address
// BASE + k * LANES * 4.  A chunk is one INCR burst of BEATS = LANES*32/DATA_W
// beats of full width (arsize/awsize = log2(DATA_W/8)); beat n carries words
// n*WPB .. n*WPB+WPB-1, word j of a beat in bits [32j +: 32].
//
// Interface and timing: command side valid/ready (cmd_ready = idle).  Loads
// finish with ld_valid/ld_tag/ld_data held until ld_ready; cmd_tag is
// returned unchanged as ld_tag (the TCU puts the CTB destination there).
// Stores take cmd_data with the command and finish when B arrives.  busy is
// high from command acceptance until the load is taken or B is received.
// Read and write responses are not checked for errors.
//
// Paper versus this design: the paper names an AXI DMA with a 512-bit AXI4
// manager to the DDR4 memory; the single outstanding burst, the chunk
// address map and the bank-order data layout are this design's choices.
module axi_dma
  import basalisc_pkg::*;
#(
  parameter int unsigned LANES  = 256,
  parameter int unsigned DATA_W = 512,
  parameter int unsigned ADDR_W = 40,
  parameter int unsigned TAG_W  = 17,
  parameter logic [ADDR_W-1:0] BASE = '0
) (
  input  logic                clk,
  input  logic                rst_n,
  // command
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  logic                cmd_store,
  input  logic [31:0]         cmd_chunk,
  input  logic [TAG_W-1:0]    cmd_tag,
  input  coeff_t              cmd_data [LANES],
  // load completion
  output logic                ld_valid,
  output logic [TAG_W-1:0]    ld_tag,
  output coeff_t              ld_data [LANES],
  input  logic                ld_ready,
  output logic                busy,
  // AXI4 manager, read
  output logic [ADDR_W-1:0]   m_araddr,
  output logic [7:0]          m_arlen,
  output logic [2:0]          m_arsize,
  output logic [1:0]          m_arburst,
  output logic                m_arvalid,
  input  logic                m_arready,
  input  logic [DATA_W-1:0]   m_rdata,
  input  logic                m_rlast,
  input  logic                m_rvalid,
  output logic                m_rready,
  // AXI4 manager, write
  output logic [ADDR_W-1:0]   m_awaddr,
  output logic [7:0]          m_awlen,
  output logic [2:0]          m_awsize,
  output logic [1:0]          m_awburst,
  output logic                m_awvalid,
  input  logic                m_awready,
  output logic [DATA_W-1:0]   m_wdata,
  output logic [DATA_W/8-1:0] m_wstrb,
  output logic                m_wlast,
  output logic                m_wvalid,
  input  logic                m_wready,
  input  logic                m_bvalid,
  output logic                m_bready
);
  localparam int unsigned WPB   = DATA_W / 32;
  localparam int unsigned BEATS = LANES / WPB;
  localparam int unsigned BW    = (BEATS > 1) ? $clog2(BEATS) : 1;
  localparam int unsigned CHUNK_BYTES = LANES * 4;

  typedef enum logic [2:0] {S_IDLE, S_AR, S_R, S_LD, S_AW, S_W, S_B} state_e;
  state_e st;
  logic [BW-1:0] beat;
  coeff_t buf_q [LANES];
  logic [ADDR_W-1:0] addr_q;

  assign cmd_ready = (st == S_IDLE);
  assign busy      = (st != S_IDLE);
  assign ld_valid  = (st == S_LD);
  assign ld_data   = buf_q;

  assign m_araddr  = addr_q;
  assign m_arlen   = 8'(BEATS - 1);
  assign m_arsize  = 3'($clog2(DATA_W / 8));
  assign m_arburst = 2'b01;
  assign m_arvalid = (st == S_AR);
  assign m_rready  = (st == S_R);
  assign m_awaddr  = addr_q;
  assign m_awlen   = 8'(BEATS - 1);
  assign m_awsize  = 3'($clog2(DATA_W / 8));
  assign m_awburst = 2'b01;
  assign m_awvalid = (st == S_AW);
  assign m_wvalid  = (st == S_W);
  assign m_wstrb   = '1;
  assign m_wlast   = (st == S_W) && (beat == BW'(BEATS - 1));
  assign m_bready  = (st == S_B);

  always_comb begin
    for (int j = 0; j < WPB; j++) m_wdata[32*j +: 32] = buf_q[int'(beat) * WPB + j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      beat   <= '0;
      addr_q <= '0;
      ld_tag <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (cmd_valid) begin
          addr_q <= BASE + ADDR_W'(cmd_chunk) * ADDR_W'(CHUNK_BYTES);
          ld_tag <= cmd_tag;
          beat   <= '0;
          st     <= cmd_store ? S_AW : S_AR;
        end
        S_AR: if (m_arready) st <= S_R;
        S_R:  if (m_rvalid) begin
          beat <= beat + 1'b1;
          if (m_rlast) st <= S_LD;
        end
        S_LD: if (ld_ready) st <= S_IDLE;
        S_AW: if (m_awready) st <= S_W;
        S_W:  if (m_wready) begin
          beat <= beat + 1'b1;
          if (m_wlast) st <= S_B;
        end
        S_B:  if (m_bvalid) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  // chunk buffer: filled by R beats or by a store command
  always_ff @(posedge clk) begin
    if (st == S_IDLE && cmd_valid && cmd_store) buf_q <= cmd_data;
    if (st == S_R && m_rvalid)
      for (int j = 0; j < WPB; j++) buf_q[int'(beat) * WPB + j] <= m_rdata[32*j +: 32];
  end
endmodule
