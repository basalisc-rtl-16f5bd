// instr_queue: the batch instruction queue in front of the traffic control
// unit.
//
// What it does: the host (over PCIe and the high-speed AXI fabric) writes
// micro-instructions into the queue through an AXI4 write-only subordinate
// port; the TCU pops them in order.
//
// How: AW is accepted whenever no burst is open; each W beat carries one
// instruction in its low INSTR_W bits and is pushed into a DEPTH-entry FIFO
// (wready is low while the FIFO is full, so the host is back-pressured).  The
// burst address and length are not used (s_awaddr, s_awlen are left
// unconnected inside): every write appends to the queue and the burst ends at
// wlast.  After the
// beat with wlast the port answers with one OKAY response on B.
//
// Interface and timing: standard AXI4 AW/W/B handshakes; pop side is
// valid/ready (out_valid, out_instr, out_ready) with the head visible
// combinationally from the FIFO memory.  level counts stored instructions.
//
// Paper versus this design: the paper names an instruction queue with an AXI
// subordinate port and gives its size as 128 to 1024 instructions per batch.
// The depth defaults to 1024; the AXI data width (128 bits, one instruction
// per beat) and the append-only address use are this design's choices.
module instr_queue
  import basalisc_pkg::*;
#(
  parameter int unsigned DEPTH   = 1024,
  parameter int unsigned DATA_W  = INSTR_W,
  parameter int unsigned ID_W    = 4,
  parameter int unsigned ADDR_W  = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // AXI4 write subordinate
  input  logic [ID_W-1:0]        s_awid,
  input  logic [ADDR_W-1:0]      s_awaddr,
  input  logic [7:0]             s_awlen,
  input  logic                   s_awvalid,
  output logic                   s_awready,
  input  logic [DATA_W-1:0]      s_wdata,
  input  logic                   s_wlast,
  input  logic                   s_wvalid,
  output logic                   s_wready,
  output logic [ID_W-1:0]        s_bid,
  output logic [1:0]             s_bresp,
  output logic                   s_bvalid,
  input  logic                   s_bready,
  // pop side
  output logic                   out_valid,
  output instr_t                 out_instr,
  input  logic                   out_ready,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned LW = $clog2(DEPTH + 1);

  instr_t mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic in_burst;
  logic push, pop;

  assign s_awready = !in_burst && !s_bvalid;
  assign s_wready  = in_burst && (level != LW'(DEPTH));
  assign s_bresp   = 2'b00;
  assign push      = s_wvalid && s_wready;
  assign out_valid = (level != '0);
  assign out_instr = mem[rp];
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= instr_t'(s_wdata[$bits(instr_t)-1:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; level <= '0;
      in_burst <= 1'b0; s_bvalid <= 1'b0; s_bid <= '0;
    end else begin
      if (s_awvalid && s_awready) begin
        in_burst <= 1'b1;
        s_bid    <= s_awid;
      end
      if (push) begin
        wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
        if (s_wlast) begin
          in_burst <= 1'b0;
          s_bvalid <= 1'b1;
        end
      end
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (pop) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      level <= level + LW'(push) - LW'(pop);
    end
  end
endmodule
