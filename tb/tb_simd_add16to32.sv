// tb_simd_add16to32: checks the quad-16b to 32b add against the sum of
// the four sign-extended 16-bit lanes, on random and extreme operands.
module tb_simd_add16to32;
  logic [31:0] src_a, src_b, dst;
  int checks = 0, failures = 0;

  simd_add16to32 dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      longint e;
      src_a = $urandom;
      src_b = $urandom;
      if (i == 0) begin src_a = 32'h7FFF_7FFF; src_b = 32'h7FFF_7FFF; end
      if (i == 1) begin src_a = 32'h8000_8000; src_b = 32'h8000_8000; end
      if (i == 2) begin src_a = 32'hFFFF_0001; src_b = 32'h0000_FFFF; end
      #1;
      e = longint'($signed(src_a[15:0])) + longint'($signed(src_a[31:16]))
        + longint'($signed(src_b[15:0])) + longint'($signed(src_b[31:16]));
      checks++;
      if (longint'($signed(dst)) != e) begin
        failures++;
        $display("a=%h b=%h got %0d exp %0d", src_a, src_b, $signed(dst), e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
