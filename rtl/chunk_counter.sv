// chunk_counter: the CC (chunk counter) register of the fetch stage.
//
// CC holds the word-aligned address of the next 32-bit chunk to fetch; it is
// the fetch stage's counterpart of a program counter. It loads CC+4 when a
// chunk has been written into the Depack_Q and the chunk part of the branch
// target (target with its two low bits cleared) when Branch Control is
// asserted; Branch Control wins. The +4 adder and the two-input mux follow
// the fetch-stage drawing; the gated clock of that drawing is written here as
// a register enable. The reset address RESET_PC is this design's choice.
// Timing: chunk_addr is a register output; a change of input takes effect in
// the next cycle.
module chunk_counter #(
  parameter logic [31:0] RESET_PC = 32'h0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        fetch_adv,      // a chunk was accepted this cycle
  input  logic        branch_ctrl,    // Branch Control
  input  logic [31:0] branch_target,  // byte-aligned target
  output logic [31:0] chunk_addr      // word-aligned chunk address
);
  logic [31:0] cc_q;
  logic [31:0] cc_d;

  always_comb begin
    cc_d = branch_ctrl ? {branch_target[31:2], 2'b00} : cc_q + 32'd4;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                        cc_q <= {RESET_PC[31:2], 2'b00};
    else if (fetch_adv || branch_ctrl) cc_q <= cc_d;
  end

  assign chunk_addr = cc_q;
endmodule
