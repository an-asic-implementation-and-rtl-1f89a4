// reg_lut_rom: the Register Coding Lookup ROM of the depack stage.
//
// Holds the register combinations {rs, rt, rd} that the register field of a
// short instruction points to. The tables of all opcode classes are packed
// back to back (bases in vl_pkg); the depack logic adds the class base to the
// field. The paper builds the tables as a ROM filled from a program profile;
// the profile is not published, so CONTENTS defaults to example values and
// can be replaced per program. Addresses past the last entry read zero.
// Timing: asynchronous read, combinational from addr to data.
module reg_lut_rom
  import vl_pkg::*;
#(
  parameter reg_rom_t CONTENTS = default_reg_rom()
) (
  input  logic [REG_ROM_AW-1:0] addr,
  output regcomb_t              data
);
  always_comb begin
    if (int'(addr) < REG_ROM_DEPTH) data = CONTENTS[addr];
    else                            data = '0;
  end
endmodule
