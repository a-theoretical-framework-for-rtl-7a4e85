// tb_operand_isolation: checks that the tree inputs follow the arriving
// operands when load is high, stay exactly on the held operands when load is
// low, and that the held registers reset to zero and load only with load.
module tb_operand_isolation;
  logic clk = 0, rst_n = 0, load = 0;
  logic [7:0] a = 0, b = 0, tree_a, tree_b, held_a, held_b;
  logic [7:0] ea = 0, eb = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  operand_isolation dut (.clk, .rst_n, .load, .a, .b, .tree_a, .tree_b, .held_a, .held_b);

  initial begin
    @(posedge clk); #1;
    checks++; if (held_a !== 0 || held_b !== 0) begin failures++; $display("FAIL reset"); end
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      a = 8'($urandom); b = 8'($urandom); load = 1'($urandom);
      #1;
      checks += 2;
      if (tree_a !== (load ? a : ea) || tree_b !== (load ? b : eb)) begin
        failures++; if (failures < 10) $display("FAIL tree @%0d", i);
      end
      if (held_a !== ea || held_b !== eb) begin
        failures++; if (failures < 10) $display("FAIL held @%0d", i);
      end
      @(posedge clk);
      if (load) begin ea = a; eb = b; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
