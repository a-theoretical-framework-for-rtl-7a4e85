// tb_safety_controller: checks ArchValidity and isolate_en against the rule
//   isolate_en = valid & sap_low & (A==0 | B==0 | A==heldA & (B==heldB | sw_mode))
// on directed corner cases and on random operands biased towards equal and
// zero values. Stationary-weight mode is only driven with B equal to the
// held weight, as the flag promises.
module tb_safety_controller;
  logic clk = 0, rst_n = 0;
  logic valid, sw_mode, sap_low;
  logic [7:0] a, b, held_a, held_b;
  logic arch_valid, zero_hit, isolate_en;
  int checks = 0, failures = 0;
  int n_iso = 0, n_zero = 0, n_stasis = 0, n_sw = 0;

  always #5 clk = ~clk;

  safety_controller dut (.clk, .rst_n, .valid, .a, .b, .held_a, .held_b,
                         .sw_mode, .sap_low, .arch_valid, .zero_hit, .isolate_en);

  function automatic logic [7:0] pick(logic [7:0] other);
    case ($urandom_range(0, 3))
      0:       return other;
      1:       return 8'h00;
      default: return 8'($urandom);
    endcase
  endfunction

  task automatic check_now();
    logic e_zero, e_arch, e_iso;
    #1;
    e_zero = (a == 0) || (b == 0);
    e_arch = e_zero || (a == held_a && b == held_b) || (sw_mode && a == held_a);
    e_iso  = valid && sap_low && e_arch;
    checks += 3;
    if (zero_hit !== e_zero)   begin failures++; $display("FAIL zero a=%h b=%h", a, b); end
    if (arch_valid !== e_arch) begin failures++; $display("FAIL arch a=%h b=%h ha=%h hb=%h sw=%b", a, b, held_a, held_b, sw_mode); end
    if (isolate_en !== e_iso)  begin failures++; $display("FAIL iso"); end
    if (e_iso) n_iso++;
    if (e_arch && e_zero) n_zero++;
    if (a == held_a && b == held_b && !e_zero) n_stasis++;
    if (sw_mode && a == held_a && !e_zero) n_sw++;
  endtask

  initial begin
    @(posedge clk); rst_n = 1;
    // Directed: the paper's example operands, changing A, no isolation.
    valid = 1; sap_low = 1; sw_mode = 0;
    held_a = 8'h02; held_b = 8'h06; a = 8'h02; b = 8'h06; check_now();
    checks++; if (!isolate_en) begin failures++; $display("FAIL stasis"); end
    a = 8'h03; check_now();
    checks++; if (isolate_en) begin failures++; $display("FAIL changed operand isolated"); end
    sap_low = 0; a = 8'h02; check_now();
    checks++; if (isolate_en) begin failures++; $display("FAIL isolated without SAP_low"); end
    sap_low = 1; a = 8'h00; b = 8'h77; check_now();
    checks++; if (!isolate_en) begin failures++; $display("FAIL zero"); end
    // Random.
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      held_a  = 8'($urandom);
      held_b  = 8'($urandom);
      valid   = ($urandom_range(0, 9) != 0);
      sap_low = 1'($urandom);
      sw_mode = 1'($urandom);
      a = pick(held_a);
      b = sw_mode ? held_b : pick(held_b);
      check_now();
    end
    checks++;
    if (n_iso == 0 || n_zero == 0 || n_stasis == 0 || n_sw == 0) begin
      failures++; $display("FAIL coverage");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
