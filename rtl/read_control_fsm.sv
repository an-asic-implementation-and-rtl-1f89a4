// read_control_fsm: the Read Control FSM, register C and the depack PC.
//
// Register C holds the 3-bit Read Pointer (RP) into the eight-byte Depack_Q;
// its MSB is the Write Bit returned to the fetch stage. A second register
// holds the byte PC of the next instruction to depack, which goes to the
// branch prediction logic. Each cycle the FSM counts the valid bytes from RP
// on (the rest of the register RP is in, plus the other register if it is
// full as well) and, if the instruction's Length Information fits and decode
// is not stalled, asserts Read Control (issue): register D is loaded and RP
// and PC advance by the length. On Branch Control, RP takes {0, two low bits
// of the target} (register A, byte offset within the chunk) and PC takes the
// target, as the paper describes. Counting valid bytes and the decode stall
// are this design's additions; so is RESET_PC.
// Timing: issue is combinational from the current RP, q_full, len and stall;
// rp and pc are register outputs.
module read_control_fsm #(
  parameter logic [31:0] RESET_PC = 32'h0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [2:0]  len,            // Length Information (1, 2 or 4)
  input  logic [1:0]  q_full,         // A / B hold unread bytes
  input  logic        stall,          // decode cannot take an instruction
  input  logic        branch_ctrl,    // Branch Control
  input  logic [31:0] branch_target,  // byte-aligned target
  output logic [2:0]  rp,             // Read Pointer (register C)
  output logic        write_bit,      // rp[2]
  output logic [31:0] pc,             // next instruction to depack
  output logic        issue           // Read Control
);
  logic [2:0]  rp_q;
  logic [31:0] pc_q;
  logic [3:0]  avail;    // valid bytes from RP on, 0..8

  always_comb begin
    logic here, other;
    here  = q_full[rp_q[2]];
    other = q_full[~rp_q[2]];
    avail = '0;
    if (here) avail = 4'd4 - 4'(rp_q[1:0]) + (other ? 4'd4 : 4'd0);
    issue = !stall && (avail >= 4'(len));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp_q <= {1'b0, RESET_PC[1:0]};
      pc_q <= RESET_PC;
    end else if (branch_ctrl) begin
      rp_q <= {1'b0, branch_target[1:0]};
      pc_q <= branch_target;
    end else if (issue) begin
      rp_q <= rp_q + len;
      pc_q <= pc_q + 32'(len);
    end
  end

  assign rp        = rp_q;
  assign write_bit = rp_q[2];
  assign pc        = pc_q;

  // The byte offset of the PC within its chunk is the read pointer's offset.
  assert property (@(posedge clk) disable iff (!rst_n) pc_q[1:0] == rp_q[1:0]);
  assert property (@(posedge clk) disable iff (!rst_n)
                   len == 3'd1 || len == 3'd2 || len == 3'd4);
endmodule
