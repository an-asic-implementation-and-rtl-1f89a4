// tb_byte_select: for random register contents and every read pointer the
// four outputs must be ring bytes rp..rp+3 (mod 8), ring byte 0 being the
// most significant byte of A and byte 7 the least significant byte of B.
module tb_byte_select;
  logic [31:0] reg_a, reg_b;
  logic [2:0]  rp;
  logic [3:0][7:0] bytes;
  logic [63:0] both;
  int checks = 0, failures = 0;

  byte_select dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200) begin
      reg_a = $urandom; reg_b = $urandom;
      both  = {reg_a, reg_b};
      for (int p = 0; p < 8; p++) begin
        rp = 3'(p);
        #1;
        for (int i = 0; i < 4; i++) begin
          int k;
          k = (p + i) % 8;
          checks++;
          if (bytes[i] !== both[63 - 8*k -: 8]) begin
            failures++;
            $display("rp=%0d i=%0d got %h want %h", p, i, bytes[i], both[63 - 8*k -: 8]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
