// tb_branch_prediction_logic: trains the branch target buffer with random
// resolved branches and compares hits, targets and the redirect outputs with
// an associative-array model of a direct-mapped buffer with full tags. The
// execute-stage redirect must win over a prediction and assert Branch Reset;
// a prediction must wait for dp_issue.
module tb_branch_prediction_logic;
  localparam int E = 8;
  logic clk = 0, rst_n = 0;
  logic [31:0] pc, ex_target, ex_pc, ex_branch_dest, branch_target;
  logic dp_issue, ex_redirect, ex_update, ex_taken;
  logic branch_ctrl, branch_reset, pred_taken;
  int checks = 0, failures = 0;
  int n_pred = 0, n_held = 0, n_redir = 0, n_evict = 0;

  branch_prediction_logic #(.ENTRIES(E)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic        m_v [E];
  logic [31:0] m_tag [E];
  logic [31:0] m_tgt [E];

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [31:0] small_pc();
    return 32'h400 + ($urandom % 40);   // few PCs so that entries alias
  endfunction

  initial begin
    int idx;
    logic m_hit;
    pc = 0; dp_issue = 0; ex_redirect = 0; ex_target = 0; ex_update = 0;
    ex_pc = 0; ex_taken = 0; ex_branch_dest = 0;
    for (int i = 0; i < E; i++) m_v[i] = 0;
    #12 rst_n = 1;
    repeat (5000) begin
      @(negedge clk);
      pc             = small_pc();
      dp_issue       = $urandom % 4 != 0;
      ex_redirect    = $urandom % 10 == 0;
      ex_target      = $urandom;
      ex_update      = $urandom % 2 == 0;
      ex_pc          = small_pc();
      ex_taken       = $urandom % 3 != 0;
      ex_branch_dest = $urandom;
      #1;
      idx   = pc % E;
      m_hit = m_v[idx] && m_tag[idx] == pc;
      if (ex_redirect) begin
        check("redirect ctrl", branch_ctrl && branch_reset && !pred_taken);
        check("redirect target", branch_target == ex_target);
        n_redir++;
      end else if (m_hit && dp_issue) begin
        check("predict ctrl", branch_ctrl && !branch_reset && pred_taken);
        check("predict target", branch_target == m_tgt[idx]);
        n_pred++;
      end else begin
        check("idle", !branch_ctrl && !branch_reset && !pred_taken);
        if (m_hit) n_held++;
      end
      @(posedge clk);
      if (ex_update) begin
        idx = ex_pc % E;
        if (ex_taken) begin
          if (m_v[idx] && m_tag[idx] != ex_pc) n_evict++;
          m_v[idx] = 1; m_tag[idx] = ex_pc; m_tgt[idx] = ex_branch_dest;
        end else if (m_v[idx] && m_tag[idx] == ex_pc) m_v[idx] = 0;
      end
    end
    check("predictions seen", n_pred > 0);
    check("held predictions seen", n_held > 0);
    check("redirects seen", n_redir > 0);
    check("evictions seen", n_evict > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
