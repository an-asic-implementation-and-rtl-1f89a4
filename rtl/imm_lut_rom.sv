// imm_lut_rom: the Immediate Value Lookup ROM of the depack stage.
//
// Holds the 16-bit immediates (offsets, constants and, for SLL, shift
// amounts) that the immediate field of a short instruction points to. Like
// the register ROM, the per-class tables sit back to back and the contents,
// profile-derived in the paper and not published, default to example values
// that a CONTENTS override replaces. Addresses past the end read zero.
// Timing: asynchronous read, combinational from addr to data.
module imm_lut_rom
  import vl_pkg::*;
#(
  parameter imm_rom_t CONTENTS = default_imm_rom()
) (
  input  logic [IMM_ROM_AW-1:0] addr,
  output logic [15:0]           data
);
  always_comb begin
    if (int'(addr) < IMM_ROM_DEPTH) data = CONTENTS[addr];
    else                            data = '0;
  end
endmodule
