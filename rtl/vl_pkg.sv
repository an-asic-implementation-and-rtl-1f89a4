// vl_pkg: types and constants shared by the variable-length instruction
// front end (fetch stage, Depack_Q, depack stage, branch prediction).
//
// Short-instruction coding (first byte, MSB first):
//   1xxxxxxx  normal 32-bit instruction, passed to decode unchanged
//   010RRIII  LW     8 bit   R: 4-entry register table, I: 8-entry immediate table
//   011RRRII  ADDIU  8 bit   R: 8-entry register table, I: 4-entry immediate table
//   0010RRII  SLL    8 bit   R: 4 entries,  I: 4 shift amounts
//   0011RRII  SW     8 bit   R: 4 entries,  I: 4 entries
//   0001RRRR  ADDU   8 bit   R: 16 entries
//   00000RRR  BEQ    16 bit  second byte: 8-bit signed offset, R: 8 entries
//   00001RRR  BNE    16 bit  as BEQ, same register table
// The opcode prefixes follow the published coding table; the ADDU prefix
// (0001) and the split of the argument bits between the register and the
// immediate fields are this design's choice (the table prints ADDU with the
// SW prefix and gives no field widths). Table contents come from a program
// profile; the defaults below are example values.
package vl_pkg;

  typedef enum logic [2:0] {
    VL_NORMAL = 3'd0,
    VL_LW     = 3'd1,
    VL_ADDIU  = 3'd2,
    VL_SLL    = 3'd3,
    VL_SW     = 3'd4,
    VL_ADDU   = 3'd5,
    VL_BEQ    = 3'd6,
    VL_BNE    = 3'd7
  } vl_kind_e;

  // Standard MIPS-I opcode and function fields of the rebuilt instructions.
  localparam logic [5:0] MIPS_LW      = 6'h23;
  localparam logic [5:0] MIPS_SW      = 6'h2B;
  localparam logic [5:0] MIPS_ADDIU   = 6'h09;
  localparam logic [5:0] MIPS_BEQ     = 6'h04;
  localparam logic [5:0] MIPS_BNE     = 6'h05;
  localparam logic [5:0] MIPS_SPECIAL = 6'h00;
  localparam logic [5:0] FUNCT_SLL    = 6'h00;
  localparam logic [5:0] FUNCT_ADDU   = 6'h21;

  // Register Coding ROM: one table per opcode class, packed back to back.
  localparam int REG_ROM_DEPTH = 44;
  localparam int REG_ROM_AW    = 6;
  localparam int REG_BASE_LW    = 0;   // 4 entries
  localparam int REG_BASE_ADDIU = 4;   // 8 entries
  localparam int REG_BASE_SW    = 12;  // 4 entries
  localparam int REG_BASE_SLL   = 16;  // 4 entries
  localparam int REG_BASE_ADDU  = 20;  // 16 entries
  localparam int REG_BASE_BR    = 36;  // 8 entries, shared by BEQ and BNE

  // Immediate Value ROM.
  localparam int IMM_ROM_DEPTH = 20;
  localparam int IMM_ROM_AW    = 5;
  localparam int IMM_BASE_LW    = 0;   // 8 entries
  localparam int IMM_BASE_ADDIU = 8;   // 4 entries
  localparam int IMM_BASE_SW    = 12;  // 4 entries
  localparam int IMM_BASE_SLL   = 16;  // 4 entries (shift amounts)

  typedef struct packed {
    logic [4:0] rs;
    logic [4:0] rt;
    logic [4:0] rd;
  } regcomb_t;

  typedef regcomb_t   [REG_ROM_DEPTH-1:0]       reg_rom_t;
  typedef logic [IMM_ROM_DEPTH-1:0][15:0]        imm_rom_t;

  function automatic regcomb_t rc(logic [4:0] rs, logic [4:0] rt, logic [4:0] rd);
    regcomb_t r;
    r.rs = rs;
    r.rt = rt;
    r.rd = rd;
    return r;
  endfunction

  // Example register combinations (MIPS register numbers: 2-3 v0-v1,
  // 4-7 a0-a3, 16-17 s0-s1, 29 sp, 31 ra).
  function automatic reg_rom_t default_reg_rom();
    reg_rom_t t;
    // LW rt, imm(rs)
    t[0]  = rc(29, 31, 0);  t[1]  = rc(29, 16, 0);  t[2]  = rc(4, 2, 0);   t[3]  = rc(16, 2, 0);
    // ADDIU rt, rs, imm
    t[4]  = rc(29, 29, 0);  t[5]  = rc(2, 2, 0);    t[6]  = rc(16, 16, 0); t[7]  = rc(4, 4, 0);
    t[8]  = rc(0, 2, 0);    t[9]  = rc(0, 4, 0);    t[10] = rc(17, 17, 0); t[11] = rc(5, 5, 0);
    // SW rt, imm(rs)
    t[12] = rc(29, 31, 0);  t[13] = rc(29, 16, 0);  t[14] = rc(4, 2, 0);   t[15] = rc(29, 17, 0);
    // SLL rd, rt, sa (rs field zero)
    t[16] = rc(0, 2, 2);    t[17] = rc(0, 3, 2);    t[18] = rc(0, 4, 4);   t[19] = rc(0, 2, 3);
    // ADDU rd, rs, rt
    t[20] = rc(2, 3, 2);    t[21] = rc(4, 5, 2);    t[22] = rc(16, 0, 4);  t[23] = rc(0, 0, 0);
    t[24] = rc(2, 4, 3);    t[25] = rc(17, 0, 5);   t[26] = rc(2, 16, 2);  t[27] = rc(3, 2, 3);
    t[28] = rc(4, 0, 2);    t[29] = rc(16, 2, 16);  t[30] = rc(5, 6, 4);   t[31] = rc(29, 0, 30);
    t[32] = rc(2, 0, 4);    t[33] = rc(6, 7, 2);    t[34] = rc(16, 17, 2); t[35] = rc(3, 0, 6);
    // BEQ/BNE rs, rt, offset
    t[36] = rc(2, 0, 0);    t[37] = rc(3, 0, 0);    t[38] = rc(2, 3, 0);   t[39] = rc(4, 0, 0);
    t[40] = rc(16, 0, 0);   t[41] = rc(2, 4, 0);    t[42] = rc(5, 0, 0);   t[43] = rc(17, 0, 0);
    return t;
  endfunction

  function automatic imm_rom_t default_imm_rom();
    imm_rom_t t;
    // LW offsets
    t[0]  = 16'h0000; t[1]  = 16'h0004; t[2]  = 16'h0008; t[3]  = 16'h000C;
    t[4]  = 16'h0010; t[5]  = 16'h0014; t[6]  = 16'h0018; t[7]  = 16'hFFFC;
    // ADDIU immediates
    t[8]  = 16'h0001; t[9]  = 16'hFFFF; t[10] = 16'h0004; t[11] = 16'hFFE0;
    // SW offsets
    t[12] = 16'h0000; t[13] = 16'h0004; t[14] = 16'h0008; t[15] = 16'h0010;
    // SLL shift amounts (low five bits used)
    t[16] = 16'h0002; t[17] = 16'h0004; t[18] = 16'h0010; t[19] = 16'h0001;
    return t;
  endfunction

  // Contents of register D, the register between depack and decode.
  typedef struct packed {
    logic        valid;
    logic [31:0] instr;       // full-length instruction
    logic [31:0] pc;          // byte address of the instruction
    logic [2:0]  len;         // its length in memory: 1, 2 or 4 bytes
    logic        pred_taken;  // the front end redirected to a predicted target after it
  } dinstr_t;

endpackage
