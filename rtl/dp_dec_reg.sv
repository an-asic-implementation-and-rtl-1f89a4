// dp_dec_reg: register D between the depack and decode stages.
//
// Captures the rebuilt 32-bit instruction, with its PC, length and the
// predicted-taken flag, when Read Control (load) is high; the paper gates D's
// clock with Read Control, here it is an enable plus a valid bit. Branch
// Reset (flush) clears the valid bit and wins over everything; a decode stall
// holds the contents. Without a load the register goes empty. Carrying PC,
// length and prediction and the stall input are this design's additions.
// Timing: one register stage; din in cycle t appears at dout in t+1.
module dp_dec_reg
  import vl_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    load,    // Read Control
  input  logic    flush,   // Branch Reset
  input  logic    stall,   // hold (decode stall)
  input  dinstr_t din,     // valid bit of din is ignored
  output dinstr_t dout
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dout <= '0;
    end else if (flush) begin
      dout.valid <= 1'b0;
    end else if (!stall) begin
      if (load) begin
        dout       <= din;
        dout.valid <= 1'b1;
      end else begin
        dout.valid <= 1'b0;
      end
    end
  end
endmodule
