// vl_frontend: pipeline front end for a profiled variable-length ISA.
//
// The most frequent MIPS instructions are stored as 8- or 16-bit short forms
// whose fields index small argument tables; everything else stays 32 bits.
// The fetch stage reads 4-byte chunks from the instruction cache at the chunk
// counter (CC) into the two-register Depack_Q (A, B). The depack stage reads
// one instruction per cycle at the read pointer (register C), expands it
// through the Register Coding and Immediate Value ROMs and loads the full
// 32-bit instruction into register D for the unchanged decode stage. The
// branch prediction logic sees the depack PC and redirects both stages on a
// predicted-taken branch or an execute-stage misprediction. This wiring is
// the paper's top-level structure; the I-cache and the decode and execute
// stages are outside and reached through the ports.
// Interface: the cache is given ic_addr with ic_req and answers in the same
// cycle with ic_data, ic_ready low meaning a miss (fetch stalls). Register D
// is d_out; dec_stall holds it. The execute stage returns resolved branches
// on ex_update/ex_pc/ex_taken/ex_branch_dest and a misprediction on
// ex_redirect/ex_target, which empties D in the same cycle.
// Timing: a chunk accepted in cycle t can be depacked in t+1 and appears in
// D in t+2; a redirect in cycle t fetches the target chunk in t+1, so its
// first instruction reaches D in t+3. At most one instruction per cycle.
module vl_frontend
  import vl_pkg::*;
#(
  parameter logic [31:0] RESET_PC    = 32'h0,
  parameter int          BTB_ENTRIES = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction cache
  output logic [31:0] ic_addr,
  output logic        ic_req,
  input  logic [31:0] ic_data,
  input  logic        ic_ready,
  // decode stage
  input  logic        dec_stall,
  output dinstr_t     d_out,
  // execute stage
  input  logic        ex_redirect,
  input  logic [31:0] ex_target,
  input  logic        ex_update,
  input  logic [31:0] ex_pc,
  input  logic        ex_taken,
  input  logic [31:0] ex_branch_dest
);
  // branch prediction logic outputs
  logic        branch_ctrl, branch_reset, pred_taken;
  logic [31:0] branch_target;
  // fetch stage
  logic        fetch_en, we1, we2;
  logic [1:0]  q_full;
  // Depack_Q
  logic [31:0] reg_a, reg_b;
  // depack stage
  logic [2:0]              rp;
  logic                    write_bit, issue;
  logic [31:0]             dp_pc;
  logic [3:0][7:0]         bytes;
  logic [REG_ROM_AW-1:0]   reg_addr;
  logic [IMM_ROM_AW-1:0]   imm_addr;
  regcomb_t                reg_data;
  logic [15:0]             imm_data;
  vl_kind_e                kind;
  logic [2:0]              len;
  logic [31:0]             instr;
  dinstr_t                 d_in;

  // ---------------- fetch stage ----------------
  chunk_counter #(.RESET_PC(RESET_PC)) u_cc (
    .clk, .rst_n,
    .fetch_adv   (we1 || we2),
    .branch_ctrl,
    .branch_target,
    .chunk_addr  (ic_addr)
  );

  fetch_control_fsm u_fctl (
    .clk, .rst_n,
    .write_bit, .branch_ctrl, .ic_ready,
    .fetch_en, .we1, .we2, .q_full
  );
  assign ic_req = fetch_en;

  depack_q u_q (
    .clk, .rst_n,
    .chunk (ic_data), .we1, .we2,
    .reg_a, .reg_b
  );

  // ---------------- depack stage ----------------
  byte_select u_bsel (.reg_a, .reg_b, .rp, .bytes);

  depack_logic u_dl (
    .bytes, .reg_addr, .reg_data, .imm_addr, .imm_data,
    .kind, .len, .instr
  );

  reg_lut_rom u_reg_rom (.addr(reg_addr), .data(reg_data));
  imm_lut_rom u_imm_rom (.addr(imm_addr), .data(imm_data));

  read_control_fsm #(.RESET_PC(RESET_PC)) u_rctl (
    .clk, .rst_n,
    .len, .q_full,
    .stall (dec_stall),
    .branch_ctrl, .branch_target,
    .rp, .write_bit,
    .pc    (dp_pc),
    .issue
  );

  always_comb begin
    d_in            = '0;
    d_in.instr      = instr;
    d_in.pc         = dp_pc;
    d_in.len        = len;
    d_in.pred_taken = pred_taken;
  end

  dp_dec_reg u_d (
    .clk, .rst_n,
    .load  (issue),
    .flush (branch_reset),
    .stall (dec_stall),
    .din   (d_in),
    .dout  (d_out)
  );

  // Only 32-bit instructions are four bytes long.
  assert property (@(posedge clk) disable iff (!rst_n)
                   issue |-> ((kind == VL_NORMAL) == (len == 3'd4)));

  // ---------------- branch prediction ----------------
  branch_prediction_logic #(.ENTRIES(BTB_ENTRIES)) u_bpl (
    .clk, .rst_n,
    .pc (dp_pc), .dp_issue (issue),
    .ex_redirect, .ex_target,
    .ex_update, .ex_pc, .ex_taken, .ex_branch_dest,
    .branch_ctrl, .branch_target, .branch_reset, .pred_taken
  );
endmodule
