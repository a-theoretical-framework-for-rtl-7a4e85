// tb_sap_predictor: checks the predictor chain at its default size
// (n = 8, W = 256) and the statistics the proxy is meant to have.
//
//  * z equals HW(A)+HW(B) every cycle;
//  * a model that watches the proxy bit s counts its flips per window and
//    predicts toggles, window_done (every W valid pairs) and sap_low;
//  * holding an operand pair of weight Z for 8 windows, the measured flip
//    rate must be within 0.04 of 2p(1-p), p = Z/16 (exactly 0 for Z = 0 and
//    Z = 16), and sap_low must fire for sparse pairs and not for dense ones
//    with tau_th = 100 toggles per 255;
//  * a 4-bit instance fed a = 0010, b = 0110 (three ones out of eight, the
//    worked example of the method) must flip at 2(3/8)(5/8) = 0.469 +- 0.03;
//    with its threshold at 128 toggles (rate 0.5) its SAP_low must fire, and
//    never before the first W = 256 pairs have been seen.
module tb_sap_predictor;
  localparam int W = 256;
  logic clk = 0, rst_n = 0, valid = 0;
  logic [7:0] a = 0, b = 0, tau_th = 8'd100, toggles;
  logic [4:0] z;
  logic s, window_done, sap_low;
  // 4-bit instance for the worked example.
  logic [3:0] a4 = 4'b0010, b4 = 4'b0110;
  logic [7:0] tau4 = 8'd128;
  int valid_cnt = 0, first_fire = -1, fires4 = 0;
  logic [7:0] tog4;
  logic [3:0] z4;
  logic s4, done4, low4;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sap_predictor dut (.clk, .rst_n, .valid, .a, .b, .tau_th, .z, .s, .toggles,
                     .window_done, .sap_low);
  sap_predictor #(.N(4), .W(W)) dut4 (.clk, .rst_n, .valid, .a(a4), .b(b4), .tau_th(tau4),
                     .z(z4), .s(s4), .toggles(tog4), .window_done(done4), .sap_low(low4));

  task automatic fail(string m);
    failures++;
    if (failures < 10) $display("FAIL %s", m);
  endtask

  function automatic int ones(logic [7:0] v);
    int c = 0;
    for (int i = 0; i < 8; i++) if (v[i]) c++;
    return c;
  endfunction

  // Model of the windowed count, driven by the observed proxy bit.
  int pos = 0, cnt = 0, last_cnt = 0, wins = 0;
  logic last_s = 0, exp_low = 0, exp_done = 0;
  int pos4 = 0, cnt4 = 0, sum4 = 0, wins4 = 0;
  logic last4 = 0;

  always @(posedge clk) if (rst_n) begin
    exp_done <= 0;
    if (valid) begin
      checks++;
      if (int'(z) != ones(a) + ones(b)) fail("z");
      if (pos != 0 && s != last_s) cnt++;
      last_s <= s;
      if (pos == W - 1) begin
        exp_low  <= (cnt < int'(tau_th));
        exp_done <= 1;
        last_cnt = cnt; wins++;
        cnt = 0; pos = 0;
      end else pos++;
      // 4-bit example.
      if (pos4 != 0 && s4 != last4) cnt4++;
      last4 <= s4;
      if (pos4 == W - 1) begin sum4 += cnt4; wins4++; cnt4 = 0; pos4 = 0; end
      else pos4++;
    end
  end

  always @(posedge clk) if (rst_n && valid) valid_cnt++;
  always @(negedge clk) if (rst_n) begin
    if (done4 && low4) fires4++;
    if (low4 && first_fire < 0) begin
      first_fire = valid_cnt;
      checks++;
      if (!done4 || valid_cnt < W) fail($sformatf("SAP_low fired after %0d pairs", valid_cnt));
    end
    checks += 3;
    if (sap_low !== exp_low)      fail($sformatf("sap_low win=%0d", wins));
    if (window_done !== exp_done) fail("window_done");
    if (int'(toggles) != cnt)     fail("toggles");
  end

  // Hold (x, y) for nw windows and return the mean flip rate.
  task automatic hold(input logic [7:0] x, input logic [7:0] y, input int nw, output real rate);
    int sum = 0;
    a = x; b = y; valid = 1;
    for (int w = 0; w < nw; w++) begin
      repeat (W) @(posedge clk);
      #1 sum += last_cnt;
    end
    rate = real'(sum) / real'(nw * (W - 1));
  endtask

  initial begin
    real r, expct, p;
    logic [7:0] pairs_a [4] = '{8'h00, 8'h02, 8'h0F, 8'hFF};
    logic [7:0] pairs_b [4] = '{8'h00, 8'h06, 8'hF0, 8'hFF};
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Random operand stream with gaps: structural checks only.
    for (int i = 0; i < 3 * W; i++) begin
      @(negedge clk);
      valid = ($urandom_range(0, 9) != 0);
      a = 8'($urandom); b = 8'($urandom);
    end
    // Align to a window boundary with valid held high.
    @(negedge clk); valid = 1;
    while (pos != 0) @(negedge clk);
    for (int k = 0; k < 4; k++) begin
      p = real'(ones(pairs_a[k]) + ones(pairs_b[k])) / 16.0;
      expct = 2.0 * p * (1.0 - p);
      hold(pairs_a[k], pairs_b[k], 8, r);
      $display("Z=%0d measured rate %f expected %f sap_low=%b", ones(pairs_a[k]) + ones(pairs_b[k]), r, expct, sap_low);
      checks++;
      if (r < expct - 0.04 || r > expct + 0.04) fail($sformatf("rate Z=%0d", k));
      checks++;
      if (sap_low !== (expct * 255.0 < 100.0 - 20.0 ? 1'b1 : (expct * 255.0 > 100.0 + 20.0 ? 1'b0 : sap_low)))
        fail("sap_low decision");
    end
    r = real'(sum4) / real'(wins4 * (W - 1));
    $display("worked example a=0010 b=0110: rate %f over %0d windows", r, wins4);
    checks++;
    if (wins4 < 16 || r < 0.469 - 0.03 || r > 0.469 + 0.03) fail("worked example rate");
    $display("worked example: SAP_low first set after %0d pairs, set at %0d of %0d window ends",
             first_fire, fires4, wins4);
    checks++;
    if (fires4 == 0) fail("worked example never fired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * W * 3) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
