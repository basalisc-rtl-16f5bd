// ctb: the ciphertext buffer, a single-port banked scratchpad.
//
// What it does: holds PAGES residue polynomials ("pages") of BANKS x BANKS
// coefficients each, arranged as a BANKS x BANKS matrix, and gives access to
// one whole row or one whole column of a page per cycle without bank
// conflicts.
//
// How: element (row, col) of page p lives in bank (row xor col) at bank
// address {p, row}.  A row access r touches every bank once (bank b holds
// column b^r, address {p, r}); a column access c also touches every bank once
// (bank b holds row b^c, address {p, b^c}).  Data on wdata/rdata is in bank
// order: lane b is bank b.  The read/write permutation PEs with c = idx turn
// bank order into natural order and back (natural position = b xor idx, for
// both rows and columns).
//
// Interface and timing: one access per cycle (en, we, col, page, idx).  A
// read returns rdata one cycle later; a write stores wdata at the clock edge.
// Bank address per bank is combinational from (col, page, idx).
//
// Paper versus this design: the paper gives 64 MB of single-port SRAM in
// 256 banks with the xor layout and a 2048-coefficient-per-cycle port
// (8 chunks per access at 1 GHz).  This design keeps 256 banks x 2^16 words
// (64 MB) and the xor layout, but moves one 256-coefficient chunk per access.
// Memory contents are not reset.
module ctb
  import basalisc_pkg::*;
#(
  parameter int unsigned BANKS = 256,   // banks = chunk size = sqrt(N)
  parameter int unsigned PAGES = 256    // pages of BANKS*BANKS words per bank group
) (
  input  logic                      clk,
  input  logic                      en,
  input  logic                      we,
  input  logic                      col,
  input  logic [$clog2(PAGES)-1:0]  page,
  input  logic [$clog2(BANKS)-1:0]  idx,
  input  coeff_t                    wdata [BANKS],
  output coeff_t                    rdata [BANKS]
);
  localparam int unsigned LOG = $clog2(BANKS);
  localparam int unsigned PW  = $clog2(PAGES);
  localparam int unsigned DEPTH = PAGES * BANKS;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    coeff_t mem [DEPTH];
    logic [PW+LOG-1:0] addr;
    assign addr = {page, col ? (idx ^ LOG'(b)) : idx};
    always_ff @(posedge clk) begin
      if (en) begin
        if (we) mem[addr] <= wdata[b];
        else    rdata[b]  <= mem[addr];
      end
    end
  end
endmodule
