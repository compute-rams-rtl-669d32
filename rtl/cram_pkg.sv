// cram_pkg: types, constants and the 16-bit instruction encoding shared by
// the Compute RAM modules and their testbenches.
//
// Sizes follow the Compute RAM block: a 20 Kbit main array organised as 512
// rows x 40 bit-lines, a 256 x 16-bit instruction memory and a controller
// with 8 registers. The instruction encoding is this design's own; only the
// 16-bit width and the split into controller instructions and array
// instructions come from the architecture description.
//
// Encoding (bit 15 selects the class):
//   array      : 1 | aop[14:11] | pred[10:9] | rw[8:6] | ra[5:3] | rb[2:0]
//                rows are the low bits of registers ra, rb (read) and rw (write)
//   controller : 0 | cop[14:12] | fields below
//     NOP/END  : cop=0, bit 11 = 1 means END
//     SETINC   : cop=0, bit 10 = 1, mask[7:0]       row-pointer post-increment set
//     LDI      : cop=1, rd[11:9], imm9[8:0]       rd = zero-extended imm
//     ADDI     : cop=2, rd[11:9], imm9[8:0]       rd = rd + sign-extended imm
//     ALU      : cop=3, rd[11:9], rs[8:6], fn[2:0] rd = rd fn rs
//     LOOP     : cop=4, rc[11:9], len[7:0]        next len instrs, reg[rc] times
//     LOOPI    : cop=5, cnt[11:6], len[5:0]       next len instrs, cnt times
//     BNE      : cop=6, rs[11:9], rt[8:6], off[5:0]  if rs != rt: pc += off
//     BLT      : cop=7, rs[11:9], rt[8:6], off[5:0]  if rs <  rt: pc += off
//   Branch offsets are signed and relative to the branch's own address.
//   After an array instruction, each register that is in the SETINC mask and
//   that the instruction used as a row address is incremented by one (once,
//   even if named in two fields). START clears the mask.
package cram_pkg;

  localparam int unsigned INSTR_W = 16;
  localparam int unsigned NREGS   = 8;
  localparam int unsigned REG_W   = 16;

  // Array operations carried out by the logic peripherals of every column.
  typedef enum logic [3:0] {
    AOP_AND   = 4'd0,   // row <= A & B
    AOP_NOR   = 4'd1,   // row <= ~(A | B)     (NOT A when ra == rb)
    AOP_OR    = 4'd2,   // row <= A | B
    AOP_NAND  = 4'd3,   // row <= ~(A & B)
    AOP_XOR   = 4'd4,   // row <= A ^ B
    AOP_XNOR  = 4'd5,   // row <= ~(A ^ B)
    AOP_ADD   = 4'd6,   // row <= A ^ B ^ C, C <= carry out
    AOP_CLRC  = 4'd7,   // C <= 0
    AOP_SETC  = 4'd8,   // C <= 1
    AOP_TAG   = 4'd9,   // T <= A & B          (T <= A when ra == rb)
    AOP_WRC   = 4'd10,  // row <= C
    AOP_WRTAG = 4'd11,  // row <= T
    AOP_ZERO  = 4'd12,  // row <= 0
    AOP_ONE   = 4'd13,  // row <= 1
    AOP_TAGC  = 4'd14,  // T <= C
    AOP_RSVD  = 4'd15   // no effect
  } aop_e;

  // Predication condition chosen by the 4-to-1 mux in front of the write drivers.
  typedef enum logic [1:0] {
    PRED_ALWAYS = 2'd0,
    PRED_CARRY  = 2'd1,
    PRED_NCARRY = 2'd2,
    PRED_TAG    = 2'd3
  } pred_e;

  typedef enum logic [2:0] {
    COP_MISC  = 3'd0,
    COP_LDI   = 3'd1,
    COP_ADDI  = 3'd2,
    COP_ALU   = 3'd3,
    COP_LOOP  = 3'd4,
    COP_LOOPI = 3'd5,
    COP_BNE   = 3'd6,
    COP_BLT   = 3'd7
  } cop_e;

  typedef enum logic [2:0] {
    FN_ADD = 3'd0,
    FN_SUB = 3'd1,
    FN_AND = 3'd2,
    FN_OR  = 3'd3,
    FN_XOR = 3'd4,
    FN_MOV = 3'd5
  } alu_fn_e;

  // Storage-port geometry of the 20 Kbit array.
  typedef enum logic [1:0] {
    GEOM_512X40  = 2'd0,
    GEOM_1024X20 = 2'd1,
    GEOM_2048X10 = 2'd2
  } geom_e;

  // One array instruction as issued by the controller.
  typedef struct packed {
    logic        valid;
    aop_e        op;
    pred_e       pred;
    logic [15:0] row_a;
    logic [15:0] row_b;
    logic [15:0] row_w;
  } array_cmd_t;

  // Does the operation write a row (row_w used) / sense rows (row_a, row_b used)?
  function automatic logic aop_writes(aop_e op);
    return !(op inside {AOP_CLRC, AOP_SETC, AOP_TAG, AOP_TAGC, AOP_RSVD});
  endfunction
  function automatic logic aop_senses(aop_e op);
    return op inside {AOP_AND, AOP_NOR, AOP_OR, AOP_NAND, AOP_XOR, AOP_XNOR, AOP_ADD, AOP_TAG};
  endfunction

  // ---- Assembler helpers, used to build instruction sequences ----
  function automatic logic [15:0] i_arr(aop_e op, pred_e p, int rw, int ra, int rb);
    return {1'b1, op, p, 3'(rw), 3'(ra), 3'(rb)};
  endfunction
  function automatic logic [15:0] i_nop();
    return 16'h0000;
  endfunction
  function automatic logic [15:0] i_end();
    return {1'b0, COP_MISC, 1'b1, 11'd0};
  endfunction
  function automatic logic [15:0] i_setinc(logic [7:0] mask);
    return {1'b0, COP_MISC, 1'b0, 1'b1, 2'b00, mask};
  endfunction
  function automatic logic [15:0] i_ldi(int rd, int imm);
    return {1'b0, COP_LDI, 3'(rd), 9'(imm)};
  endfunction
  function automatic logic [15:0] i_addi(int rd, int imm);
    return {1'b0, COP_ADDI, 3'(rd), 9'(imm)};
  endfunction
  function automatic logic [15:0] i_alu(alu_fn_e fn, int rd, int rs);
    return {1'b0, COP_ALU, 3'(rd), 3'(rs), 3'd0, fn};
  endfunction
  function automatic logic [15:0] i_loop(int rc, int len);
    return {1'b0, COP_LOOP, 3'(rc), 1'b0, 8'(len)};
  endfunction
  function automatic logic [15:0] i_loopi(int cnt, int len);
    return {1'b0, COP_LOOPI, 6'(cnt), 6'(len)};
  endfunction
  function automatic logic [15:0] i_bne(int rs, int rt, int off);
    return {1'b0, COP_BNE, 3'(rs), 3'(rt), 6'(off)};
  endfunction
  function automatic logic [15:0] i_blt(int rs, int rt, int off);
    return {1'b0, COP_BLT, 3'(rs), 3'(rt), 6'(off)};
  endfunction

endpackage
