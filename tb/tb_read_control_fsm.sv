// tb_read_control_fsm: random lengths, queue states, stalls and branches
// against a reference model of the read pointer and PC. The model counts the
// bytes present from the read pointer on and issues only when the whole
// instruction is present and decode is not stalled; a branch loads
// RP = {0, target[1:0]} and PC = target.
module tb_read_control_fsm;
  logic clk = 0, rst_n = 0;
  logic [2:0] len, rp;
  logic [1:0] q_full;
  logic stall, branch_ctrl, write_bit, issue;
  logic [31:0] branch_target, pc;
  int checks = 0, failures = 0;
  int n_issue = 0, n_starve = 0, n_stall = 0, n_cross = 0, n_branch = 0;

  read_control_fsm #(.RESET_PC(32'h0000_0102)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    logic [2:0] m_rp;
    logic [31:0] m_pc;
    int present, m_issue;
    len = 1; q_full = 0; stall = 0; branch_ctrl = 0; branch_target = 0;
    #12 rst_n = 1;
    m_rp = 3'd2; m_pc = 32'h102;
    check("reset rp", rp == 3'd2);
    check("reset pc", pc == 32'h102);
    repeat (4000) begin
      @(negedge clk);
      case ($urandom % 3)
        0: len = 3'd1;
        1: len = 3'd2;
        default: len = 3'd4;
      endcase
      q_full        = 2'($urandom);
      stall         = ($urandom % 8) == 0;
      branch_ctrl   = ($urandom % 16) == 0;
      branch_target = $urandom;
      #1;
      // bytes present: walk forward from rp through full registers
      present = 0;
      for (int i = 0; i < 8; i++) begin
        int reg_idx;
        reg_idx = ((int'(m_rp) + i) % 8) / 4;
        if (q_full[reg_idx] && (i < 4 || q_full[0] && q_full[1])) present++;
        else break;
      end
      m_issue = (!stall && present >= int'(len)) ? 1 : 0;
      check("issue", issue == m_issue[0]);
      check("rp", rp == m_rp);
      check("write_bit", write_bit == m_rp[2]);
      check("pc", pc == m_pc);
      if (m_issue != 0) n_issue++;
      if (!stall && present < int'(len)) n_starve++;
      if (stall) n_stall++;
      if (m_issue != 0 && int'(m_rp[1:0]) + int'(len) > 4) n_cross++;
      @(posedge clk);
      if (branch_ctrl) begin
        m_rp = {1'b0, branch_target[1:0]}; m_pc = branch_target; n_branch++;
      end else if (m_issue != 0) begin
        m_rp = m_rp + len; m_pc = m_pc + 32'(len);
      end
    end
    check("issues seen", n_issue > 0);
    check("starvation seen", n_starve > 0);
    check("chunk crossings seen", n_cross > 0);
    check("branches seen", n_branch > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
