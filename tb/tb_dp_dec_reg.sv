// tb_dp_dec_reg: random load, flush and stall against a model of register D:
// flush empties it, stall holds it, load captures the input and sets valid,
// otherwise it goes empty.
module tb_dp_dec_reg;
  import vl_pkg::*;
  logic clk = 0, rst_n = 0;
  logic load, flush, stall;
  dinstr_t din, dout, m;
  int checks = 0, failures = 0;

  dp_dec_reg dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; flush = 0; stall = 0; din = '0;
    #12 rst_n = 1;
    m = '0;
    checks++; if (dout.valid !== 1'b0) failures++;
    repeat (2000) begin
      @(negedge clk);
      load  = $urandom % 4 != 0;
      flush = $urandom % 8 == 0;
      stall = $urandom % 5 == 0;
      din.valid = $urandom % 2;
      din.instr = $urandom; din.pc = $urandom; din.len = 3'($urandom); din.pred_taken = $urandom % 2;
      @(posedge clk);
      if (flush) m.valid = 1'b0;
      else if (!stall) begin
        if (load) begin m = din; m.valid = 1'b1; end
        else m.valid = 1'b0;
      end
      #1;
      checks++;
      if (dout.valid !== m.valid || (m.valid && dout !== m)) begin
        failures++;
        $display("mismatch got %p want %p", dout, m);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
