// tb_fetch_control_fsm: checks the Depack_Q management against a queue
// model. The testbench plays the depack stage: it moves its Write Bit to the
// other register only when the register it is in holds data. The model keeps
// the registers in write order; a register leaves the model one cycle after
// the Write Bit leaves it. Random cache misses and branches are applied.
// Directed checks cover reset (A first), the stall on a full queue and the
// return to A after a branch.
module tb_fetch_control_fsm;
  logic clk = 0, rst_n = 0;
  logic write_bit, branch_ctrl, ic_ready;
  logic fetch_en, we1, we2;
  logic [1:0] q_full;
  int checks = 0, failures = 0;

  fetch_control_fsm dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model
  logic [1:0] m_full;
  logic       m_next;
  logic       m_wbit;
  int n_full_stall = 0, n_release = 0;

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    logic [1:0] m_avail;
    write_bit = 0; branch_ctrl = 0; ic_ready = 1;
    #12 rst_n = 1;
    // directed: A then B then full
    #1;
    check("reset selects A", we1 && !we2 && fetch_en);
    @(negedge clk);
    check("then B", we2 && !we1);
    @(negedge clk);
    check("full queue stalls fetch", !fetch_en && !we1 && !we2 && q_full == 2'b11);
    // reader moves to B: A is freed and refilled
    write_bit = 1;
    #1 check("A freed when Write Bit leaves it", q_full == 2'b10 && we1);
    @(negedge clk);
    check("A refilled", q_full == 2'b11 && !fetch_en);
    // branch: everything empty, A selected afterwards
    branch_ctrl = 1;
    #1 check("no fetch in branch cycle", !fetch_en && !we1 && !we2);
    @(negedge clk);
    branch_ctrl = 0; write_bit = 0;
    #1 check("after branch A selected, queue empty", we1 && q_full == 2'b00);

    // random phase
    m_full = 2'b00; m_next = 1'b0; m_wbit = 1'b0;
    @(negedge clk);
    m_full = 2'b01; m_next = 1'b1;   // A written in the previous cycle
    repeat (3000) begin
      branch_ctrl = ($urandom % 20) == 0;
      ic_ready    = ($urandom % 4) != 0;
      // the reader may leave its register only if that register held data
      if (m_full[write_bit] && ($urandom % 3 == 0) && !branch_ctrl) write_bit = ~write_bit;
      #1;
      m_avail = m_full;
      if (write_bit != m_wbit) begin m_avail[m_wbit] = 1'b0; n_release++; end
      check("q_full", q_full == m_avail);
      check("fetch_en", fetch_en == (!branch_ctrl && !m_avail[m_next]));
      check("we1", we1 == (!branch_ctrl && !m_avail[m_next] && ic_ready && m_next == 1'b0));
      check("we2", we2 == (!branch_ctrl && !m_avail[m_next] && ic_ready && m_next == 1'b1));
      if (!branch_ctrl && m_avail[m_next]) n_full_stall++;
      @(negedge clk);
      if (branch_ctrl) begin
        m_full = 2'b00; m_next = 1'b0; m_wbit = 1'b0; write_bit = 1'b0;
      end else begin
        m_wbit = write_bit;
        m_full = m_avail;
        if (!m_avail[m_next] && ic_ready) begin
          m_full[m_next] = 1'b1;
          m_next = ~m_next;
        end
      end
    end
    check("full-queue stalls seen", n_full_stall > 0);
    check("releases seen", n_release > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
