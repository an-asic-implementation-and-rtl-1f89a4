// tb_reg_lut_rom: reads every address of the Register Coding ROM, once with
// its default contents and once with replaced contents, and compares each
// entry with the table it was given; addresses past the end must read zero.
module tb_reg_lut_rom;
  import vl_pkg::*;
  logic [REG_ROM_AW-1:0] addr;
  regcomb_t d_def, d_alt;
  reg_rom_t alt, ref_def;
  int checks = 0, failures = 0;

  function automatic reg_rom_t make_alt();
    reg_rom_t t;
    for (int i = 0; i < REG_ROM_DEPTH; i++) t[i] = 15'((i * 1237 + 55) % 32768);
    return t;
  endfunction

  localparam reg_rom_t ALT = make_alt();

  reg_lut_rom dut_def (.addr, .data(d_def));
  reg_lut_rom #(.CONTENTS(ALT)) dut_alt (.addr, .data(d_alt));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alt = make_alt();
    ref_def = default_reg_rom();
    // a few entries written out by hand
    addr = 0;  #1; checks++; if (d_def !== {5'd29, 5'd31, 5'd0}) failures++;
    addr = 20; #1; checks++; if (d_def !== {5'd2, 5'd3, 5'd2}) failures++;
    addr = 43; #1; checks++; if (d_def !== {5'd17, 5'd0, 5'd0}) failures++;
    for (int a = 0; a < (1 << REG_ROM_AW); a++) begin
      addr = REG_ROM_AW'(a);
      #1;
      checks += 2;
      if (a < REG_ROM_DEPTH) begin
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
