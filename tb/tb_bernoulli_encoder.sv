// tb_bernoulli_encoder: checks that the proxy bit is calibrated.
//
// For every Z in 0..16, the random input is swept over all 16 values of its
// low four bits (with random upper bits): the number of draws giving S=1
// must equal Z exactly, i.e. Pr(S=1) = Z/16 = Z/(2n). It also checks that S
// is monotone in R (a threshold), and that the flip-flop s_q loads only on
// valid cycles and clears on reset.
module tb_bernoulli_encoder;
  logic clk = 0, rst_n = 0, valid = 0;
  logic [4:0]  z;
  logic [15:0] rnd;
  logic s_comb, s_q;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  bernoulli_encoder dut (.clk, .rst_n, .valid, .z, .rnd, .s_comb, .s_q);

  task automatic fail(string m);
    failures++;
    if (failures < 10) $display("FAIL %s", m);
  endtask

  initial begin
    logic exp_q;
    @(posedge clk); #1;
    checks++; if (s_q !== 1'b0) fail("reset");
    rst_n = 1;
    for (int zz = 0; zz <= 16; zz++) begin
      int ones;
      logic prev;
      ones = 0;
      prev = 1'b1;
      z = 5'(zz);
      for (int r = 0; r < 16; r++) begin
        rnd = {12'($urandom), 4'(r)};
        #1;
        if (s_comb) ones++;
        checks++;
        // S is 1 for the lowest Z values of R and 0 above: a threshold.
        if (s_comb && !prev) fail($sformatf("not monotone z=%0d r=%0d", zz, r));
        prev = s_comb;
      end
      checks++;
      if (ones != zz) fail($sformatf("calibration z=%0d ones=%0d", zz, ones));
    end
    // Flip-flop behaviour.
    exp_q = s_q;
    for (int i = 0; i < 500; i++) begin
      logic sc;
      z = 5'($urandom_range(0, 16));
      rnd = 16'($urandom);
      valid = 1'($urandom);
      #1 sc = s_comb;
      @(posedge clk); #1;
      if (valid) exp_q = sc;
      checks++;
      if (s_q !== exp_q) fail("s_q");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
