// byte_select: the four byte multiplexers in front of the Depack Logic.
//
// Multiplexer i selects ring byte (RP + i) mod 8 of the Depack_Q, so the
// Depack Logic always sees the four adjacent bytes starting at the read
// pointer, wrapping from B back to A. This follows the depack-stage drawing
// (inputs RP+0 .. RP+3). Ring byte 0 is A[31:24], byte 7 is B[7:0].
// Timing: purely combinational.
module byte_select (
  input  logic [31:0]     reg_a,
  input  logic [31:0]     reg_b,
  input  logic [2:0]      rp,     // Read Pointer
  output logic [3:0][7:0] bytes   // bytes[i] = ring byte rp+i
);
  logic [7:0][7:0] ring;

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      ring[k]     = reg_a[31-8*k -: 8];
      ring[k + 4] = reg_b[31-8*k -: 8];
    end
    for (int i = 0; i < 4; i++) begin
      bytes[i] = ring[3'(rp + 3'(i))];
    end
  end
endmodule
