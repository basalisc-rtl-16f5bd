// basalisc_pkg: types, constants and arithmetic helpers shared by the
// BASALISC FHE core.
//
// Coefficients are 32-bit residues modulo an NTT-friendly prime q with
// q = 1 (mod 2^17), the restriction the multipliers are built for.  Every
// product in the datapath is a Montgomery product with R = 2^34 (two 17-bit
// reduction digits), so twiddle factors and MAC constants are supplied in
// Montgomery form (x*R mod q) by software.
//
// The micro-instruction word is this design's own encoding of the paper's
// micro-level ISA (NTT passes, MAC, loads/stores, automorphism permutation),
// one chunk (one row or column of a CTB page) per instruction.
package basalisc_pkg;

  localparam int unsigned W      = 32;   // coefficient width
  localparam int unsigned QIDX_W = 6;    // moduli table index width
  localparam int unsigned INSTR_W = 128; // micro-instruction width (instruction queue beat)

  typedef logic [W-1:0] coeff_t;

  // ---------------------------------------------------------------- opcodes
  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_SETQ  = 4'd1,  // moduli[qidx] <= imm
    OP_LOAD  = 4'd2,  // distant memory chunk imm -> CTB (dst page, dst idx, dst col)
    OP_STORE = 4'd3,  // CTB (src page, src idx, src col) -> distant memory chunk imm
    OP_MAC   = 4'd4,  // one chunk through the MAC PE
    OP_NTT   = 4'd5,  // one chunk through the NTT PE (one iteration of a pass)
    OP_PERM  = 4'd6,  // read chunk, permute (a*i+b) xor c, write chunk (automorphism)
    OP_SYNC  = 4'd7,  // wait until every issued instruction has written back
    OP_HALT  = 4'd8,  // stop fetching
    OP_TWLD  = 4'd9   // CTB chunk -> twiddle factory (post_en: 1 = seed row, 0 = pre vector)
  } opcode_e;

  // MAC PE adder/subtractor/accumulator function.  P is 0 or the X operand,
  // Q is the Y operand or the product X*Y (see mac_pe).
  typedef enum logic [1:0] {
    ALU_ADD    = 2'd0,  // r = P + Q
    ALU_SUB    = 2'd1,  // r = Q - P
    ALU_ACC    = 2'd2,  // r = ACC + Q
    ALU_ACCSUB = 2'd3   // r = ACC - Q
  } alu_op_e;

  typedef struct packed {
    logic          x_rf;    // X operand: 1 = RF[rs1], 0 = broadcast constant b (imm)
    logic          y_rf;    // Y operand: 1 = RF[rs2], 0 = CTB input a
    logic          p_zero;  // P = 0 instead of X
    logic          q_prod;  // Q = X*Y instead of Y
    alu_op_e       alu;
    logic [3:0]    rs1;
    logic [3:0]    rs2;
    logic [3:0]    rd;
    logic          rf_we;   // write the result into RF[rd]
  } mac_ctrl_t;             // 19 bits

  typedef struct packed {
    logic [7:0] page;       // CTB page (one residue polynomial of up to 2^16 words)
    logic [7:0] idx;        // row or column number inside the page
    logic       col;        // 1 = column access, 0 = row access
  } ctb_addr_t;             // 17 bits

  typedef struct packed {
    opcode_e            op;       //   4
    logic [QIDX_W-1:0]  qidx;     //   6
    logic               rd_en;    //   1 read src chunk from the CTB
    logic               wr_en;    //   1 write the result chunk to the CTB
    ctb_addr_t          src;      //  17
    ctb_addr_t          dst;      //  17
    mac_ctrl_t          mac;      //  19
    logic [7:0]         tw_set;   //   8 twiddle set (residue, direction, pass)
    logic               post_en;  //   1 NTT: apply post-multiply twiddles
    logic [7:0]         pa;       //   8 PERM: multiplier a (odd)
    logic [7:0]         pb;       //   8 PERM: offset b
    logic [W-1:0]       imm;      //  32 scalar / distant-memory chunk number
    logic [5:0]         rsvd;     //   6
  } instr_t;                      // 128

  // ------------------------------------------------------ modular helpers
  function automatic coeff_t mod_add(coeff_t a, coeff_t b, coeff_t q);
    logic [W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, q}) s = s - {1'b0, q};
    return s[W-1:0];
  endfunction

  function automatic coeff_t mod_sub(coeff_t a, coeff_t b, coeff_t q);
    logic [W:0] d;
    d = {1'b0, a} - {1'b0, b};
    if (a < b) d = d + {1'b0, q};
    return d[W-1:0];
  endfunction

  // Reverse the low `bits` bits of x (bits <= 16).
  function automatic logic [15:0] bit_rev(logic [15:0] x, int unsigned bits);
    logic [15:0] r;
    r = '0;
    for (int unsigned i = 0; i < 16; i++)
      if (i < bits) r[bits-1-i] = x[i];
    return r;
  endfunction

endpackage
