// tb_imm_lut_rom: reads every address of the Immediate Value ROM with its
// default and with replaced contents; addresses past the end read zero.
module tb_imm_lut_rom;
  import vl_pkg::*;
  logic [IMM_ROM_AW-1:0] addr;
  logic [15:0] d_def, d_alt;
  imm_rom_t alt, ref_def;
  int checks = 0, failures = 0;

  function automatic imm_rom_t make_alt();
    imm_rom_t t;
    for (int i = 0; i < IMM_ROM_DEPTH; i++) t[i] = 16'((i * 40503 + 7) % 65536);
    return t;
  endfunction

  localparam imm_rom_t ALT = make_alt();

  imm_lut_rom dut_def (.addr, .data(d_def));
  imm_lut_rom #(.CONTENTS(ALT)) dut_alt (.addr, .data(d_alt));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alt = make_alt();
    ref_def = default_imm_rom();
    addr = 7;  #1; checks++; if (d_def !== 16'hFFFC) failures++;
    addr = 9;  #1; checks++; if (d_def !== 16'hFFFF) failures++;
    addr = 18; #1; checks++; if (d_def !== 16'h0010) failures++;
    for (int a = 0; a < (1 << IMM_ROM_AW); a++) begin
      addr = IMM_ROM_AW'(a);
      #1;
      checks += 2;
      if (a < IMM_ROM_DEPTH) begin
        if (d_def !== ref_def[a]) failures++;
        if (d_alt !== alt[a]) failures++;
      end else begin
        if (d_def !== '0) failures++;
        if (d_alt !== '0) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
