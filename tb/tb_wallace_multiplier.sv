// tb_wallace_multiplier: checks the Wallace tree against the '*' operator.
//
// The 8-bit default and a 4-bit instance are checked over every operand
// pair; a 16-bit and a 5-bit instance (a width that is not a power of two)
// over random pairs with all-ones and zero corners.
module tb_wallace_multiplier;
  logic [7:0]  a8, b8;   logic [15:0] p8;
  logic [3:0]  a4, b4;   logic [7:0]  p4;
  logic [15:0] a16, b16; logic [31:0] p16;
  logic [4:0]  a5, b5;   logic [9:0]  p5;
  int checks = 0, failures = 0;

  wallace_multiplier         dut8  (.a(a8),  .b(b8),  .p(p8));
  wallace_multiplier #(.N(4))  dut4  (.a(a4),  .b(b4),  .p(p4));
  wallace_multiplier #(.N(16)) dut16 (.a(a16), .b(b16), .p(p16));
  wallace_multiplier #(.N(5))  dut5  (.a(a5),  .b(b5),  .p(p5));

  task automatic fail(string m);
    failures++;
    if (failures < 10) $display("FAIL %s", m);
  endtask

  initial begin
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++) begin
        a8 = 8'(i); b8 = 8'(j); #1;
        checks++;
        if (int'(p8) != i * j) fail($sformatf("8: %0d*%0d=%0d", i, j, p8));
      end
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        a4 = 4'(i); b4 = 4'(j); #1;
        checks++;
        if (int'(p4) != i * j) fail($sformatf("4: %0d*%0d=%0d", i, j, p4));
      end
    for (int k = 0; k < 20000; k++) begin
      a16 = (k == 0) ? 16'hFFFF : 16'($urandom);
      b16 = (k == 0) ? 16'hFFFF : (k == 1) ? 16'h0 : 16'($urandom);
      a5 = 5'($urandom); b5 = 5'($urandom);
      #1;
      checks += 2;
      if (p16 != 32'(a16) * 32'(b16)) fail($sformatf("16: %h*%h=%h", a16, b16, p16));
      if (p5 != 10'(a5) * 10'(b5)) fail("5");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
