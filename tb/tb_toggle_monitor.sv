// tb_toggle_monitor: checks the windowed toggle count and the SAP_low
// decision against a model in the testbench.
//
// Uses W = 16 to keep windows short. Random proxy samples, with random
// bias per window so that some windows flip rarely and others often, and a
// new random threshold per window; valid drops at random. The model counts
// flips between consecutive valid samples of a window (W-1 transitions),
// and checks sap_low, the toggle count and the window_done pulse, which must
// come exactly once per W valid samples.
module tb_toggle_monitor;
  localparam int W = 16;
  logic clk = 0, rst_n = 0, valid = 0, s = 0, s_prev = 0;
  logic [3:0] tau_th = 0, toggles;
  logic sap_low, window_done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  toggle_monitor #(.W(W)) dut (.clk, .rst_n, .valid, .s, .s_prev, .tau_th,
                               .toggles, .sap_low, .window_done);

  task automatic fail(string m);
    failures++;
    if (failures < 10) $display("FAIL %s", m);
  endtask

  int pos = 0, cnt = 0, lows = 0, highs = 0;
  logic exp_low = 0, last_s = 0, exp_done = 0;

  initial begin
    int flip_pct;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    flip_pct = 50;
    for (int i = 0; i < 6000; i++) begin
      valid = ($urandom_range(0, 99) < 85);
      if (pos == 0 && valid) begin
        flip_pct = $urandom_range(0, 100);
        tau_th = 4'($urandom_range(1, 15));
      end
      s = ($urandom_range(0, 99) < flip_pct) ? ~last_s : last_s;
      s_prev = last_s;
      @(posedge clk);
      // Model update for this edge.
      exp_done = 0;
      if (valid) begin
        if (pos != 0 && s != last_s) cnt++;
        last_s = s;
        if (pos == W - 1) begin
          exp_low = (cnt < tau_th);
          if (exp_low) lows++; else highs++;
          exp_done = 1;
          cnt = 0; pos = 0;
        end else pos++;
      end
      #1;
      checks += 3;
      if (sap_low !== exp_low)      fail($sformatf("sap_low @%0d", i));
      if (int'(toggles) != cnt)     fail($sformatf("toggles %0d vs %0d", toggles, cnt));
      if (window_done !== exp_done) fail($sformatf("window_done @%0d", i));
    end
    checks++;
    if (lows == 0 || highs == 0) fail("sap_low never took both values");
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
