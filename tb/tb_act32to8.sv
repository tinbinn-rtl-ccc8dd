// tb_act32to8: checks the 32b-to-8b activation: ReLU, right shift and
// clamp to 255, on random and boundary inputs for every shift amount.
module tb_act32to8;
  logic [31:0] src;
  logic [4:0]  shift;
  logic [7:0]  act;
  int checks = 0, failures = 0;

  act32to8 dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      longint v, e;
      shift = 5'($urandom);
      case (i % 5)
        0: src = $urandom;
        1: src = $urandom_range(0, 300) << shift;
        2: src = -$urandom_range(1, 1000);
        3: src = 32'd255 << shift;
        default: src = (32'd256 << shift) - 1;
      endcase
      #1;
      v = longint'($signed(src));
      if (v < 0) e = 0;
      else begin
        e = v / (longint'(1) << shift);
        if (e > 255) e = 255;
      end
      checks++;
      if (longint'(act) != e) begin
        failures++;
        $display("src=%0d shift=%0d got %0d exp %0d", v, shift, act, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
