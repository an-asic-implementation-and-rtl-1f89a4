// tb_depack_q: random writes into A and B; each register must take the chunk
// only when its own write enable is high and keep its value otherwise.
module tb_depack_q;
  logic clk = 0, rst_n = 0;
  logic [31:0] chunk, reg_a, reg_b, ma, mb;
  logic we1, we2;
  int checks = 0, failures = 0;

  depack_q dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chunk = 0; we1 = 0; we2 = 0;
    #12 rst_n = 1;
    checks++;
    if (reg_a !== 0 || reg_b !== 0) failures++;
    ma = 0; mb = 0;
    repeat (1000) begin
      @(negedge clk);
      chunk = $urandom;
      we1 = $urandom % 2;
      we2 = !we1 && ($urandom % 2);
      @(posedge clk);
      if (we1) ma = chunk;
      if (we2) mb = chunk;
      #1;
      checks++;
      if (reg_a !== ma || reg_b !== mb) begin
        failures++;
        $display("mismatch A %h/%h B %h/%h", reg_a, ma, reg_b, mb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
