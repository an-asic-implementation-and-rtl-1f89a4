// tb_chunk_counter: random test of the chunk counter against a reference
// model: CC+4 on an accepted chunk, the target's chunk on Branch Control
// (which wins), hold otherwise; the reset value is checked first.
module tb_chunk_counter;
  logic clk = 0, rst_n = 0;
  logic fetch_adv, branch_ctrl;
  logic [31:0] branch_target, chunk_addr, model;
  int checks = 0, failures = 0;

  chunk_counter #(.RESET_PC(32'h0000_1236)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fetch_adv = 0; branch_ctrl = 0; branch_target = 0;
    #12 rst_n = 1;
    checks++;
    if (chunk_addr !== 32'h0000_1234) begin failures++; $display("reset value %h", chunk_addr); end
    model = 32'h0000_1234;
    repeat (500) begin
      @(negedge clk);
      fetch_adv     = ($urandom % 3) != 0;
      branch_ctrl   = ($urandom % 8) == 0;
      branch_target = $urandom;
      @(posedge clk);
      if (branch_ctrl)    model = branch_target & 32'hFFFF_FFFC;
      else if (fetch_adv) model = model + 4;
      #1;
      checks++;
      if (chunk_addr !== model) begin
        failures++;
        $display("mismatch: got %h expected %h", chunk_addr, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
