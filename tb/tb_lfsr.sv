// tb_lfsr: checks the LFSR against a bit-serial reference and checks its
// period.
//
// The reference shifts one bit at a time with the feedback taken from bits
// 16, 14, 13 and 11 (x^16+x^14+x^13+x^11+1), four shifts per enabled clock.
// The state must match every cycle, hold while en is low, restart from the
// seed on reset, and come back to the seed after exactly 65535 enabled clocks
// (4 and 65535 are coprime, so the period in clocks equals the bit period).
module tb_lfsr;
  logic clk = 0, rst_n = 0, en = 0;
  logic [15:0] state, ref_s;
  int checks = 0, failures = 0;
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  lfsr dut (.clk, .rst_n, .en, .state);

  function automatic logic [15:0] step(logic [15:0] s);
    logic nb;
    for (int k = 0; k < 4; k++) begin
      nb = s[15] ^ s[13] ^ s[12] ^ s[10];
      s  = {s[14:0], nb};
    end
    return s;
  endfunction

  task automatic check(string what);
    checks++;
    if (state !== ref_s) begin
      failures++;
      if (failures < 10) $display("FAIL %s state=%h ref=%h", what, state, ref_s);
    end
  endtask

  initial begin
    int first_back;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    ref_s = 16'hACE1;
    check("seed");
    // Random enables.
    for (int i = 0; i < 2000; i++) begin
      en = 1'($urandom);
      @(posedge clk); #1;
      if (en) ref_s = step(ref_s);
      check("run");
    end
    // Period from the seed.
    rst_n = 0; en = 1;
    @(posedge clk); #1;
    rst_n = 1; ref_s = 16'hACE1;
    check("reset");
    first_back = -1;
    for (int i = 1; i <= 65535; i++) begin
      @(posedge clk); #1;
      ref_s = step(ref_s);
      if (i % 4096 == 0) check("period run");
      if (state == 16'hACE1 && first_back < 0) first_back = i;
      if (state == 16'h0000) begin failures++; $display("FAIL zero state"); end
    end
    checks++;
    if (first_back != 65535) begin
      failures++;
      $display("FAIL period %0d", first_back);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
