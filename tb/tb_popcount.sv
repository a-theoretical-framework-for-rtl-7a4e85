// tb_popcount: exhaustive check of the combined Hamming weight unit.
//
// Every operand pair of the 8-bit default is applied and z is compared with
// a bit-by-bit count done in the testbench. A 3-bit instance is checked
// exhaustively too, to exercise a width that is not a power of two.
module tb_popcount;
  logic [7:0] a, b;
  logic [4:0] z;
  logic [2:0] a3, b3;
  logic [2:0] z3;
  int checks = 0, failures = 0;

  popcount dut (.a, .b, .z);
  popcount #(.N(3)) dut3 (.a(a3), .b(b3), .z(z3));

  function automatic int ones(logic [31:0] v, int n);
    int c = 0;
    for (int i = 0; i < n; i++) if (v[i]) c++;
    return c;
  endfunction

  initial begin
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++) begin
        a = 8'(i); b = 8'(j);
        #1;
        checks++;
        if (int'(z) != ones(i, 8) + ones(j, 8)) begin
          failures++;
          if (failures < 10) $display("FAIL a=%h b=%h z=%0d", a, b, z);
        end
      end
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        a3 = 3'(i); b3 = 3'(j);
        #1;
        checks++;
        if (int'(z3) != ones(i, 3) + ones(j, 3)) failures++;
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
