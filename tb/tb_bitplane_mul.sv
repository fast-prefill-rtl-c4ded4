// tb_bitplane_mul: exhaustive check of the bit-plane INT8 multiplier against
// the ordinary signed product for all 65536 operand pairs.
module tb_bitplane_mul;
  logic signed [7:0]  a, b;
  logic signed [15:0] p;
  int checks = 0, failures = 0;

  bitplane_mul dut (.a, .b, .p);

  initial begin
    for (int i = -128; i < 128; i++) begin
      for (int j = -128; j < 128; j++) begin
        a = 8'(i); b = 8'(j);
        #1;
        checks++;
        if (int'(p) != i * j) begin
          failures++;
          if (failures < 10) $display("mismatch %0d*%0d got %0d", i, j, p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
