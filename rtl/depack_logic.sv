// depack_logic: length decode and instruction rebuild of the depack stage.
//
// From the first of the four bytes at the read pointer it tells the
// instruction's kind and length (1, 2 or 4 bytes). This is the path the paper
// names as critical, so the length uses at most the five top bits. For a
// short instruction it forms the addresses of the Register Coding and
// Immediate Value ROMs (class base plus field) and builds the full MIPS-I
// instruction from the regenerated opcode, the ROM's registers and the ROM's
// (or, for BEQ/BNE, the inline sign-extended) immediate. A 32-bit instruction
// (first bit 1) passes unchanged. Opcode prefixes follow the paper's coding
// table; the field widths, the ADDU prefix and the MIPS encodings of the
// rebuilt words are this design's choices (see vl_pkg).
// Timing: purely combinational; the ROMs sit outside and are read in the
// same cycle.
module depack_logic
  import vl_pkg::*;
(
  input  logic [3:0][7:0]        bytes,     // ring bytes RP..RP+3
  output logic [REG_ROM_AW-1:0]  reg_addr,
  input  regcomb_t               reg_data,
  output logic [IMM_ROM_AW-1:0]  imm_addr,
  input  logic [15:0]            imm_data,
  output vl_kind_e               kind,
  output logic [2:0]             len,       // Length Information
  output logic [31:0]            instr
);
  logic [7:0] b0;
  assign b0 = bytes[0];

  // Kind and length from the first byte.
  always_comb begin
    if (b0[7])                    kind = VL_NORMAL;
    else if (b0[6:5] == 2'b10)    kind = VL_LW;
    else if (b0[6:5] == 2'b11)    kind = VL_ADDIU;
    else if (b0[6:4] == 3'b010)   kind = VL_SLL;
    else if (b0[6:4] == 3'b011)   kind = VL_SW;
    else if (b0[6:4] == 3'b001)   kind = VL_ADDU;
    else if (b0[3] == 1'b0)       kind = VL_BEQ;
    else                          kind = VL_BNE;

    unique case (kind)
      VL_NORMAL:      len = 3'd4;
      VL_BEQ, VL_BNE: len = 3'd2;
      default:        len = 3'd1;
    endcase
  end

  // Table addresses.
  always_comb begin
    reg_addr = '0;
    imm_addr = '0;
    unique case (kind)
      VL_LW: begin
        reg_addr = REG_ROM_AW'(REG_BASE_LW)    + REG_ROM_AW'(b0[4:3]);
        imm_addr = IMM_ROM_AW'(IMM_BASE_LW)    + IMM_ROM_AW'(b0[2:0]);
      end
      VL_ADDIU: begin
        reg_addr = REG_ROM_AW'(REG_BASE_ADDIU) + REG_ROM_AW'(b0[4:2]);
        imm_addr = IMM_ROM_AW'(IMM_BASE_ADDIU) + IMM_ROM_AW'(b0[1:0]);
      end
      VL_SLL: begin
        reg_addr = REG_ROM_AW'(REG_BASE_SLL)   + REG_ROM_AW'(b0[3:2]);
        imm_addr = IMM_ROM_AW'(IMM_BASE_SLL)   + IMM_ROM_AW'(b0[1:0]);
      end
      VL_SW: begin
        reg_addr = REG_ROM_AW'(REG_BASE_SW)    + REG_ROM_AW'(b0[3:2]);
        imm_addr = IMM_ROM_AW'(IMM_BASE_SW)    + IMM_ROM_AW'(b0[1:0]);
      end
      VL_ADDU:        reg_addr = REG_ROM_AW'(REG_BASE_ADDU) + REG_ROM_AW'(b0[3:0]);
      VL_BEQ, VL_BNE: reg_addr = REG_ROM_AW'(REG_BASE_BR)   + REG_ROM_AW'(b0[2:0]);
      default: ;
    endcase
  end

  // Rebuild the full-length instruction.
  always_comb begin
    unique case (kind)
      VL_NORMAL: instr = {bytes[0], bytes[1], bytes[2], bytes[3]};
      VL_LW:     instr = {MIPS_LW,    reg_data.rs, reg_data.rt, imm_data};
      VL_ADDIU:  instr = {MIPS_ADDIU, reg_data.rs, reg_data.rt, imm_data};
      VL_SW:     instr = {MIPS_SW,    reg_data.rs, reg_data.rt, imm_data};
      VL_SLL:    instr = {MIPS_SPECIAL, 5'd0, reg_data.rt, reg_data.rd,
                          imm_data[4:0], FUNCT_SLL};
      VL_ADDU:   instr = {MIPS_SPECIAL, reg_data.rs, reg_data.rt, reg_data.rd,
                          5'd0, FUNCT_ADDU};
      VL_BEQ:    instr = {MIPS_BEQ, reg_data.rs, reg_data.rt, {8{bytes[1][7]}}, bytes[1]};
      VL_BNE:    instr = {MIPS_BNE, reg_data.rs, reg_data.rt, {8{bytes[1][7]}}, bytes[1]};
      default:   instr = '0;
    endcase
  end
endmodule
