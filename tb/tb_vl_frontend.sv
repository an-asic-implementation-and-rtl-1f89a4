// tb_vl_frontend: end-to-end test of the front end at its default
// parameters.
//
// The testbench generates a 4 KiB program whose static mix follows the
// profiled frequencies of the coding table (LW 10.4 %, ADDIU 4.5 %, SW 2.3 %,
// SLL 5.4 %, ADDU 21.9 %, BEQ 4.1 %, BNE 2.0 %, the rest 32-bit words with the
// top bit set). Branch offsets are chosen so that every target is the start
// of an instruction. An instruction-cache model returns chunks in the same
// cycle and misses in bursts; the decode stage stalls at random. The
// testbench also plays the execute stage: every instruction leaving register
// D must be the next one on the architectural path, with its PC, length and
// the rebuilt word computed by a reference decoder. Branches are resolved
// with a per-branch bias, train the branch target buffer, and a wrong
// prediction is answered with a redirect (the one wrong-path instruction
// that can be in D then is ignored). The first 256 bytes hold no branch and
// the first cycles have no miss or stall, to check the start-up latency
// (first instruction in D two cycles after reset) and the rate.
// Each mechanism of the design is counted and must occur.
module tb_vl_frontend;
  import vl_pkg::*;
  localparam int MEM   = 4096;
  localparam int NCYC  = 40000;
  localparam int QUIET = 80;      // cycles with no miss, stall or branch

  logic clk = 0, rst_n = 0;
  logic [31:0] ic_addr, ic_data;
  logic ic_req, ic_ready, dec_stall;
  dinstr_t d_out;
  logic ex_redirect, ex_update, ex_taken;
  logic [31:0] ex_target, ex_pc, ex_branch_dest;

  vl_frontend dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;

  initial begin
    #((NCYC + 2000) * 10);
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

  // ---------------- program ----------------
  logic [7:0] mem [MEM];
  bit         is_start [MEM];
  int         bias [MEM];          // taken probability (percent) of a branch

  function automatic int kind_len(logic [7:0] b);
    if (b[7]) return 4;
    if (b[7:4] == 4'b0000) return 2;
    return 1;
  endfunction

  task automatic gen_program();
    int a, r, l;
    logic [7:0] f;
    a = 0;
    while (a < MEM) begin
      r = $urandom % 1000;
      if      (r < 104) f = {3'b010, 5'($urandom)};              // LW
      else if (r < 149) f = {3'b011, 5'($urandom)};              // ADDIU
      else if (r < 172) f = {4'b0011, 4'($urandom)};             // SW
      else if (r < 226) f = {4'b0010, 4'($urandom)};             // SLL
      else if (r < 445) f = {4'b0001, 4'($urandom)};             // ADDU
      else if (r < 486) f = {5'b00000, 3'($urandom)};            // BEQ
      else if (r < 506) f = {5'b00001, 3'($urandom)};            // BNE
      else              f = {1'b1, 7'($urandom)};                // 32-bit
      l = kind_len(f);
      if (l == 2 && a < 256) f = {4'b0001, 4'($urandom)};        // no branch early
      l = kind_len(f);
      if (a + l > MEM) begin f = {4'b0001, 4'($urandom)}; l = 1; end
      is_start[a] = 1;
      mem[a] = f;
      for (int i = 1; i < l; i++) begin mem[a+i] = 8'($urandom); is_start[a+i] = 0; end
      a += l;
    end
    // branch offsets: every target starts an instruction
    for (int b = 0; b < MEM; b++) begin
      if (is_start[b] && kind_len(mem[b]) == 2) begin
        int t, tries;
        tries = 0;
        do begin
          t = b + 2 + int'($signed(8'($urandom)));
          tries++;
        end while (!(t >= 0 && t < MEM && is_start[t]) && tries < 1000);
        if (!(t >= 0 && t < MEM && is_start[t])) t = b + 2;   // offset 0
        mem[b+1] = 8'(t - (b + 2));
        case ($urandom % 4)
          0: bias[b] = 5;
          1: bias[b] = 50;
          default: bias[b] = 95;
        endcase
      end
    end
  endtask

  // Reference decoder, written from the coding table.
  function automatic logic [31:0] expand(int a);
    logic [7:0] f;
    regcomb_t r;
    reg_rom_t RT;
    imm_rom_t IT;
    logic [7:0] b1, b2, b3;
    RT = default_reg_rom();
    IT = default_imm_rom();
    f  = mem[a % MEM];
    b1 = mem[(a + 1) % MEM]; b2 = mem[(a + 2) % MEM]; b3 = mem[(a + 3) % MEM];
    casez (f)
      8'b1???????: return {f, b1, b2, b3};
      8'b010?????: begin r = RT[0 + f[4:3]];  return {6'h23, r.rs, r.rt, IT[0 + f[2:0]]}; end
      8'b011?????: begin r = RT[4 + f[4:2]];  return {6'h09, r.rs, r.rt, IT[8 + f[1:0]]}; end
      8'b0010????: begin r = RT[16 + f[3:2]]; return {6'h00, 5'd0, r.rt, r.rd, IT[16 + f[1:0]][4:0], 6'h00}; end
      8'b0011????: begin r = RT[12 + f[3:2]]; return {6'h2B, r.rs, r.rt, IT[12 + f[1:0]]}; end
      8'b0001????: begin r = RT[20 + f[3:0]]; return {6'h00, r.rs, r.rt, r.rd, 5'd0, 6'h21}; end
      8'b00000???: begin r = RT[36 + f[2:0]]; return {6'h04, r.rs, r.rt, {8{b1[7]}}, b1}; end
      default:     begin r = RT[36 + f[2:0]]; return {6'h05, r.rs, r.rt, {8{b1[7]}}, b1}; end
    endcase
  endfunction

  // ---------------- instruction cache model ----------------
  int miss_left = 0;
  always_comb begin
    int a;
    a = int'(ic_addr % MEM);
    ic_data = {mem[a], mem[(a+1) % MEM], mem[(a+2) % MEM], mem[(a+3) % MEM]};
  end

  // ---------------- counters ----------------
  int n_miss = 0, n_qfull = 0, n_starve = 0, n_cross = 0, n_wrap = 0;
  int n_pred = 0, n_mispred = 0, n_held = 0, n_decstall = 0, n_offset_tgt = 0;
  int n_retired = 0, n_quiet_valid = 0, first_valid = -1;
  int n_kind [8];

  always @(posedge clk) if (rst_n) begin
    cycle <= cycle + 1;
    if (ic_req && !ic_ready)                                   n_miss++;
    if (!dut.fetch_en && !dut.branch_ctrl)                     n_qfull++;
    if (!dut.issue && !dec_stall && !dut.branch_ctrl)          n_starve++;
    if (dut.issue && int'(dut.rp[1:0]) + int'(dut.len) > 4)    n_cross++;
    if (dut.issue && int'(dut.rp) + int'(dut.len) > 8)         n_wrap++;
    if (dut.pred_taken)                                        n_pred++;
    if (ex_redirect)                                           n_mispred++;
    if (dut.u_bpl.hit && !dut.issue && !ex_redirect)           n_held++;
    if (dec_stall)                                             n_decstall++;
    if (dut.branch_ctrl && dut.branch_target[1:0] != 2'b00)    n_offset_tgt++;
  end

  // ---------------- execute-stage model ----------------
  logic [31:0] exp_pc;
  bit          squash;

  initial begin
    ic_ready = 1; dec_stall = 0;
    ex_redirect = 0; ex_update = 0; ex_taken = 0;
    ex_target = 0; ex_pc = 0; ex_branch_dest = 0;
    gen_program();
    exp_pc = 0;
    squash = 0;
    #12 rst_n = 1;
    while (cycle < NCYC) begin
      @(posedge clk);
      // --- observe register D as decode takes it ---
      if (cycle < QUIET && d_out.valid) n_quiet_valid++;
      if (d_out.valid && first_valid < 0) first_valid = cycle;
      if (d_out.valid && !dec_stall && !squash) begin
        int a, l;
        logic [7:0] f;
        a = int'(exp_pc % MEM);
        f = mem[a];
        l = kind_len(f);
        check("pc", d_out.pc == exp_pc);
        check("length", int'(d_out.len) == l);
        check("instruction", d_out.instr == expand(a));
        if (d_out.pc != exp_pc && failures < 20)
          $display("  got pc %h want %h", d_out.pc, exp_pc);
        n_retired++;
        if (f[7])                    n_kind[0]++;
        else if (f[6:5] == 2'b10)    n_kind[1]++;
        else if (f[6:5] == 2'b11)    n_kind[2]++;
        else if (f[6:4] == 3'b010)   n_kind[3]++;
        else if (f[6:4] == 3'b011)   n_kind[4]++;
        else if (f[6:4] == 3'b001)   n_kind[5]++;
        else if (f[3] == 1'b0)       n_kind[6]++;
        else                         n_kind[7]++;
        if (l == 2) begin
          bit taken;
          logic [31:0] tgt, nxt;
          taken = ($urandom % 100) < bias[a];
          tgt   = exp_pc + 32'd2 + {{24{mem[(a+1) % MEM][7]}}, mem[(a+1) % MEM]};
          nxt   = taken ? tgt : exp_pc + 32'd2;
          ex_update      <= 1'b1;
          ex_pc          <= exp_pc;
          ex_taken       <= taken;
          ex_branch_dest <= tgt;
          if (d_out.pred_taken != taken) begin
            ex_redirect <= 1'b1;
            ex_target   <= nxt;
            squash      = 1;
          end else begin
            ex_redirect <= 1'b0;
          end
          exp_pc = nxt;
        end else begin
          check("no prediction on a non-branch", !d_out.pred_taken);
          ex_update   <= 1'b0;
          ex_redirect <= 1'b0;
          exp_pc = exp_pc + 32'(l);
        end
      end else begin
        if (squash && ex_redirect) squash = 0;   // redirect cycle is over
        ex_update   <= 1'b0;
        ex_redirect <= 1'b0;
      end
      // --- drive cache and decode for the next cycle ---
      if (cycle >= QUIET) begin
        if (miss_left > 0) miss_left--;
        else if ($urandom % 16 == 0) miss_left = 1 + $urandom % 6;
        ic_ready  <= (miss_left == 0);
        dec_stall <= ($urandom % 20) == 0;
      end
    end
    // start-up latency and rate with no miss or stall
    check("first instruction in D two cycles after reset", first_valid == 2);
    check("quiet-phase rate above 1/2 instruction per cycle",
          n_quiet_valid * 2 > (QUIET - 2));
    check("enough instructions retired", n_retired > NCYC / 4);
    for (int k = 0; k < 8; k++) check("every instruction kind retired", n_kind[k] > 0);
    check("cache miss stall",          n_miss > 0);
    check("queue full fetch stall",    n_qfull > 0);
    check("depack starved",            n_starve > 0);
    check("instruction across chunks", n_cross > 0);
    check("ring wrap B to A",          n_wrap > 0);
    check("predicted-taken redirect",  n_pred > 0);
    check("misprediction redirect",    n_mispred > 0);
    check("prediction held for an incomplete branch", n_held > 0);
    check("decode stall",              n_decstall > 0);
    check("target inside a chunk",     n_offset_tgt > 0);
    $display("retired=%0d cycles=%0d quiet_valid=%0d/%0d first=%0d", n_retired, cycle,
             n_quiet_valid, QUIET - 2, first_valid);
    $display("kinds normal=%0d lw=%0d addiu=%0d sll=%0d sw=%0d addu=%0d beq=%0d bne=%0d",
             n_kind[0], n_kind[1], n_kind[2], n_kind[3], n_kind[4], n_kind[5], n_kind[6], n_kind[7]);
    $display("miss=%0d qfull=%0d starve=%0d cross=%0d wrap=%0d pred=%0d mispred=%0d held=%0d decstall=%0d offset_tgt=%0d",
             n_miss, n_qfull, n_starve, n_cross, n_wrap, n_pred, n_mispred, n_held, n_decstall, n_offset_tgt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
