// tb_depack_logic: drives every first byte (and random following bytes)
// into the depack logic, serves its ROM addresses from the package's default
// tables, and compares length and rebuilt instruction with a reference
// decoder written from the coding table (casez on the first byte).
module tb_depack_logic;
  import vl_pkg::*;
  logic [3:0][7:0]       bytes;
  logic [REG_ROM_AW-1:0] reg_addr;
  regcomb_t              reg_data;
  logic [IMM_ROM_AW-1:0] imm_addr;
  logic [15:0]           imm_data;
  vl_kind_e              kind;
  logic [2:0]            len;
  logic [31:0]           instr;
  int checks = 0, failures = 0;
  int n_kind [8];

  reg_rom_t RT;
  imm_rom_t IT;

  depack_logic dut (.*);

  always_comb reg_data = (int'(reg_addr) < REG_ROM_DEPTH) ? RT[reg_addr] : '0;
  always_comb imm_data = (int'(imm_addr) < IMM_ROM_DEPTH) ? IT[imm_addr] : '0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_of(input logic [3:0][7:0] b, output int el, output logic [31:0] ei);
    logic [7:0] f;
    regcomb_t r;
    f = b[0];
    casez (f)
      8'b1???????: begin el = 4; ei = {b[0], b[1], b[2], b[3]}; end
      8'b010?????: begin el = 1; r = RT[0 + f[4:3]];
                   ei = {6'b100011, r.rs, r.rt, IT[0 + f[2:0]]}; end
      8'b011?????: begin el = 1; r = RT[4 + f[4:2]];
                   ei = {6'b001001, r.rs, r.rt, IT[8 + f[1:0]]}; end
      8'b0010????: begin el = 1; r = RT[16 + f[3:2]];
                   ei = {6'b000000, 5'd0, r.rt, r.rd, IT[16 + f[1:0]][4:0], 6'b000000}; end
      8'b0011????: begin el = 1; r = RT[12 + f[3:2]];
                   ei = {6'b101011, r.rs, r.rt, IT[12 + f[1:0]]}; end
      8'b0001????: begin el = 1; r = RT[20 + f[3:0]];
                   ei = {6'b000000, r.rs, r.rt, r.rd, 5'd0, 6'b100001}; end
      8'b00000???: begin el = 2; r = RT[36 + f[2:0]];
                   ei = {6'b000100, r.rs, r.rt, {8{b[1][7]}}, b[1]}; end
      default:     begin el = 2; r = RT[36 + f[2:0]];
                   ei = {6'b000101, r.rs, r.rt, {8{b[1][7]}}, b[1]}; end
    endcase
  endtask

  initial begin
    int el;
    logic [31:0] ei;
    RT = default_reg_rom();
    IT = default_imm_rom();
    for (int rep = 0; rep < 8; rep++) begin
      for (int f = 0; f < 256; f++) begin
        bytes[0] = 8'(f);
        bytes[1] = 8'($urandom); bytes[2] = 8'($urandom); bytes[3] = 8'($urandom);
        #1;
        expect_of(bytes, el, ei);
        n_kind[kind]++;
        checks += 2;
        if (int'(len) != el) begin failures++; $display("len %h: %0d want %0d", bytes[0], len, el); end
        if (instr !== ei) begin failures++; $display("instr %h: %h want %h", bytes[0], instr, ei); end
      end
    end
    // spot checks with hand-assembled words
    bytes = '0; bytes[0] = 8'h5F;   // LW idx R=3 I=7: lw $2, -4($16)
    #1 checks++; if (instr !== 32'h8E02_FFFC) begin failures++; $display("lw spot %h", instr); end
    bytes = '0; bytes[0] = 8'h10;   // ADDU R=0: addu $2,$2,$3
    #1 checks++; if (instr !== 32'h0043_1021) begin failures++; $display("addu spot %h", instr); end
    bytes = '0; bytes[0] = 8'h0A; bytes[1] = 8'hFE;   // BNE R=2 (2,3) off -2
    #1 checks++; if (instr !== 32'h1443_FFFE) begin failures++; $display("bne spot %h", instr); end
    for (int k = 0; k < 8; k++) begin
      checks++;
      if (n_kind[k] == 0) begin failures++; $display("kind %0d never decoded", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
