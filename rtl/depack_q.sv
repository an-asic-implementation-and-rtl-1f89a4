// depack_q: registers A and B, the eight-byte Depack_Q ring buffer.
//
// Each register takes a 32-bit chunk from the instruction cache when its
// write enable (Write Enable 1 for A, 2 for B) is high; in the paper these
// enables gate the registers' clocks, here they are register enables. Ring
// byte k (0..7) is byte k%4 of A for k < 4 and of B otherwise, most
// significant byte first (big-endian, as in MIPS); the byte order and the
// reset to zero are this design's choices.
// Timing: a chunk written in cycle t is visible at the outputs in t+1.
module depack_q (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] chunk,  // 32 Bit Chunk from the cache
  input  logic        we1,    // Write Enable 1
  input  logic        we2,    // Write Enable 2
  output logic [31:0] reg_a,
  output logic [31:0] reg_b
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_a <= '0;
      reg_b <= '0;
    end else begin
      if (we1) reg_a <= chunk;
      if (we2) reg_b <= chunk;
    end
  end
endmodule
