// branch_prediction_logic: branch target buffer and redirect control.
//
// The paper gives this block's role, not its insides; this is the simplest
// version that fills it. A direct-mapped branch target buffer of ENTRIES
// entries with full tags is looked up with the byte PC of the next
// instruction to depack. On a hit, Branch Control is asserted with the stored
// target in the cycle the depack stage actually depacks that instruction
// (dp_issue), so a branch that crosses a chunk boundary is first completed by
// sequential fetch and only then followed, as the paper asks. A redirect from
// the execute stage (a misprediction) has priority: it asserts Branch Control
// with the execute stage's address and also Branch Reset, which empties
// register D. The execute stage's resolved branches train the buffer: a taken
// branch writes its entry, a not-taken one clears a matching entry.
// Timing: lookup and outputs are combinational from pc and the ex_* inputs;
// the buffer updates at the clock edge.
module branch_prediction_logic #(
  parameter int ENTRIES = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] pc,             // from depack
  input  logic        dp_issue,       // instruction at pc depacked now
  input  logic        ex_redirect,    // Branch Control From Exe Stage
  input  logic [31:0] ex_target,      // Branch Address
  input  logic        ex_update,      // a branch was resolved
  input  logic [31:0] ex_pc,          // its PC
  input  logic        ex_taken,       // its outcome
  input  logic [31:0] ex_branch_dest, // its taken target
  output logic        branch_ctrl,    // Branch Control
  output logic [31:0] branch_target,  // Branch Target Address
  output logic        branch_reset,   // Branch Reset
  output logic        pred_taken      // predicted-taken redirect now
);
  localparam int IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic [ENTRIES-1:0]       valid_q;
  logic [ENTRIES-1:0][31:0] tag_q;
  logic [ENTRIES-1:0][31:0] target_q;

  logic [IW-1:0] rd_idx, wr_idx;
  logic          hit;

  assign rd_idx = IW'(pc);
  assign wr_idx = IW'(ex_pc);
  assign hit    = valid_q[rd_idx] && (tag_q[rd_idx] == pc);

  always_comb begin
    branch_ctrl   = 1'b0;
    branch_reset  = 1'b0;
    pred_taken    = 1'b0;
    branch_target = target_q[rd_idx];
    if (ex_redirect) begin
      branch_ctrl   = 1'b1;
      branch_reset  = 1'b1;
      branch_target = ex_target;
    end else if (hit && dp_issue) begin
      branch_ctrl   = 1'b1;
      pred_taken    = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
    end else if (ex_update) begin
      if (ex_taken) begin
        valid_q[wr_idx] <= 1'b1;
      end else if (tag_q[wr_idx] == ex_pc) begin
        valid_q[wr_idx] <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (ex_update && ex_taken) begin
      tag_q[wr_idx]    <= ex_pc;
      target_q[wr_idx] <= ex_branch_dest;
    end
  end
endmodule
