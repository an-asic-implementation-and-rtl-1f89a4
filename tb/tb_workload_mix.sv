// tb_workload_mix: the profiled instruction mix as a straight-line stream.
//
// Instructions are drawn with the dynamic frequencies of the coding table
// (LW 10.40 %, ADDIU 4.53 %, SW 2.25 %, SLL 5.41 %, ADDU 21.93 %, BEQ 4.06 %,
// BNE 2.04 %, 32-bit otherwise) into an 8 KiB program. Branches are all
// resolved not taken, so the front end runs in sequence with an always-hit
// cache and no decode stall. The testbench checks that every instruction
// leaves register D in order and correctly rebuilt, that chunks are requested
// at consecutive addresses and each exactly once, that the mean length
// matches the mix (0.4452*1 + 0.0610*2 + 0.4938*4 = 2.54 bytes), and it
// reports cache reads per instruction against the one read per instruction
// of a fixed-length fetch stage.
module tb_workload_mix;
  import vl_pkg::*;
  localparam int MEM = 8192;
  localparam int RUN_BYTES = MEM - 64;

  logic clk = 0, rst_n = 0;
  logic [31:0] ic_addr, ic_data;
  logic ic_req, ic_ready, dec_stall;
  dinstr_t d_out;
  logic ex_redirect, ex_update, ex_taken;
  logic [31:0] ex_target, ex_pc, ex_branch_dest;

  vl_frontend dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0;
  logic [7:0] mem [MEM];

  initial begin
    #(MEM * 40);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cycle);
    end
  endtask

  function automatic int kind_len(logic [7:0] b);
    if (b[7]) return 4;
    if (b[7:4] == 4'b0000) return 2;
    return 1;
  endfunction

  function automatic logic [31:0] expand(int a);
    logic [7:0] f, b1;
    regcomb_t r;
    reg_rom_t RT;
    imm_rom_t IT;
    RT = default_reg_rom();
    IT = default_imm_rom();
    f = mem[a]; b1 = mem[a+1];
    casez (f)
      8'b1???????: return {f, b1, mem[a+2], mem[a+3]};
      8'b010?????: begin r = RT[0 + f[4:3]];  return {6'h23, r.rs, r.rt, IT[0 + f[2:0]]}; end
      8'b011?????: begin r = RT[4 + f[4:2]];  return {6'h09, r.rs, r.rt, IT[8 + f[1:0]]}; end
      8'b0010????: begin r = RT[16 + f[3:2]]; return {6'h00, 5'd0, r.rt, r.rd, IT[16 + f[1:0]][4:0], 6'h00}; end
      8'b0011????: begin r = RT[12 + f[3:2]]; return {6'h2B, r.rs, r.rt, IT[12 + f[1:0]]}; end
      8'b0001????: begin r = RT[20 + f[3:0]]; return {6'h00, r.rs, r.rt, r.rd, 5'd0, 6'h21}; end
      8'b00000???: begin r = RT[36 + f[2:0]]; return {6'h04, r.rs, r.rt, {8{b1[7]}}, b1}; end
      default:     begin r = RT[36 + f[2:0]]; return {6'h05, r.rs, r.rt, {8{b1[7]}}, b1}; end
    endcase
  endfunction

  always_comb begin
    int a;
    a = int'(ic_addr % MEM);
    ic_data = {mem[a], mem[(a+1) % MEM], mem[(a+2) % MEM], mem[(a+3) % MEM]};
  end

  // chunk requests
  int n_chunks = 0;
  logic [31:0] last_chunk = 32'hFFFF_FFFC;
  always @(posedge clk) if (rst_n) begin
    cycle <= cycle + 1;
    if (dut.we1 || dut.we2) begin
      n_chunks++;
      check("chunks fetched in sequence, each once", ic_addr == last_chunk + 32'd4);
      last_chunk = ic_addr;
    end
  end

  initial begin
    int a, n_instr, bytes_done, first_cycle, last_cycle;
    int n_kind [8];
    logic [31:0] exp_pc;
    ic_ready = 1; dec_stall = 0;
    ex_redirect = 0; ex_update = 0; ex_taken = 0;
    ex_target = 0; ex_pc = 0; ex_branch_dest = 0;
    // draw the program
    a = 0;
    while (a < MEM) begin
      int r, l;
      logic [7:0] f;
      r = $urandom % 10000;
      if      (r < 1040) f = {3'b010, 5'($urandom)};
      else if (r < 1493) f = {3'b011, 5'($urandom)};
      else if (r < 1718) f = {4'b0011, 4'($urandom)};
      else if (r < 2259) f = {4'b0010, 4'($urandom)};
      else if (r < 4452) f = {4'b0001, 4'($urandom)};
      else if (r < 4858) f = {5'b00000, 3'($urandom)};
      else if (r < 5062) f = {5'b00001, 3'($urandom)};
      else               f = {1'b1, 7'($urandom)};
      l = kind_len(f);
      if (a + l > MEM) begin f = 8'h10; l = 1; end
      mem[a] = f;
      for (int i = 1; i < l; i++) mem[a+i] = 8'($urandom);
      a += l;
    end
    exp_pc = 0; n_instr = 0; first_cycle = -1; last_cycle = 0;
    for (int k = 0; k < 8; k++) n_kind[k] = 0;
    #12 rst_n = 1;
    while (int'(exp_pc) < RUN_BYTES) begin
      @(posedge clk);
      if (d_out.valid) begin
        logic [7:0] f;
        f = mem[exp_pc];
        check("pc", d_out.pc == exp_pc);
        check("instruction", d_out.instr == expand(int'(exp_pc)));
        if (first_cycle < 0) first_cycle = cycle;
        last_cycle = cycle;
        if (f[7])                    n_kind[0]++;
        else if (f[6:5] == 2'b10)    n_kind[1]++;
        else if (f[6:5] == 2'b11)    n_kind[2]++;
        else if (f[6:4] == 3'b010)   n_kind[3]++;
        else if (f[6:4] == 3'b011)   n_kind[4]++;
        else if (f[6:4] == 3'b001)   n_kind[5]++;
        else if (f[3] == 1'b0)       n_kind[6]++;
        else                         n_kind[7]++;
        exp_pc = exp_pc + 32'(kind_len(f));
        n_instr++;
      end
    end
    bytes_done = int'(exp_pc);
    // Fetch runs at most two chunks ahead of the reader.
    check("cache reads match bytes consumed",
          n_chunks >= bytes_done / 4 && n_chunks <= (bytes_done + 3) / 4 + 2);
    check("mean length matches the mix",
          real'(bytes_done) / n_instr > 2.39 && real'(bytes_done) / n_instr < 2.69);
    check("rate above 1/2 instruction per cycle",
          2 * n_instr > (last_cycle - first_cycle + 1));
    for (int k = 0; k < 8; k++) check("every kind present", n_kind[k] > 0);
    $display("instructions=%0d bytes=%0d mean length=%0.3f", n_instr, bytes_done,
             real'(bytes_done) / n_instr);
    $display("cache reads=%0d (%0.3f per instruction; fixed-length fetch: 1.000)",
             n_chunks, real'(n_chunks) / n_instr);
    $display("cycles=%0d rate=%0.3f instructions per cycle", last_cycle - first_cycle + 1,
             real'(n_instr) / (last_cycle - first_cycle + 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
