// tb_sap_workload: weight-stationary INT8 tiles through the SAP multiplier,
// next to an unguarded Wallace tree fed the same pairs.
//
// Each tile holds one quantised weight (small values such as +2 = 00000010)
// and streams a 16x16 activation tile in raster order: 256 pairs, exactly
// one observation window at the default W = 256. Activations look like a
// ReLU feature map: half the 4x4 patches are zero, the others hold one small
// value, so neighbouring pixels repeat. The stationary-weight flag is set
// inside a tile and dropped on the first pair of the next tile, where the
// weight changes.
//
// Checks: every product equals A*B; the guarded tree's input and output
// switching never exceeds the unguarded tree's; after the first tile the
// predictor reports low activity and the tree is frozen on some pairs.
// The switching saved is printed.
module tb_sap_workload;
  localparam int N = 8, W = 256, TILES = 12;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, sw_mode = 0;
  logic [N-1:0] a = 0, b = 0;
  logic [7:0] tau_th = 8'd100;
  logic out_valid, isolated, sap_low, arch_valid, window_done;
  logic [2*N-1:0] product, base_p, base_q;
  logic [7:0] toggles;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sap_multiplier dut (.clk, .rst_n, .in_valid, .a, .b, .sw_mode, .tau_th,
                      .out_valid, .product, .isolated, .sap_low, .arch_valid,
                      .toggles, .window_done);

  // Unguarded reference tree: sees every pair.
  wallace_multiplier base (.a, .b, .p(base_p));

  logic [N-1:0]   pa = 0, pb = 0, sa = 0, sb = 0;
  logic [2*N-1:0] pp = 0, sp = 0;
  longint sw_base = 0, sw_sap = 0;
  int iso = 0, low_tiles = 0;

  always @(posedge clk) if (rst_n && in_valid) begin
    logic [2*N-1:0] e;
    e = (2*N)'(a) * (2*N)'(b);
    sw_base += $countones(a ^ pa) + $countones(b ^ pb) + $countones(base_p ^ pp);
    sw_sap  += $countones(dut.tree_a ^ sa) + $countones(dut.tree_b ^ sb)
             + $countones(dut.tree_p ^ sp);
    pa = a; pb = b; pp = base_p;
    sa = dut.tree_a; sb = dut.tree_b; sp = dut.tree_p;
    #1;
    checks++;
    if (product !== e || !out_valid) begin
      failures++;
      if (failures < 10) $display("FAIL %0d*%0d gave %0d", a, b, product);
    end
    if (isolated) iso++;
  end

  logic [N-1:0] weights [6] = '{8'h02, 8'h01, 8'h04, 8'h03, 8'h02, 8'h08};

  initial begin
    logic [N-1:0] patch [4][4];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < TILES; t++) begin
      int iso_before;
      iso_before = iso;
      for (int py = 0; py < 4; py++)
        for (int px = 0; px < 4; px++)
          patch[py][px] = ($urandom_range(0, 1) == 0) ? '0 : N'($urandom_range(1, 15));
      for (int y = 0; y < 16; y++)
        for (int x = 0; x < 16; x++) begin
          @(negedge clk);
          in_valid = 1;
          b = weights[t % 6];
          sw_mode = !(x == 0 && y == 0);
          a = patch[y / 4][x / 4];
        end
      @(negedge clk);
      if (t > 0) begin
        checks++;
        if (iso == iso_before) begin
          failures++; $display("FAIL tile %0d: tree never frozen", t);
        end
      end
      if (sap_low) low_tiles++;
    end
    in_valid = 0;
    @(negedge clk);
    $display("tiles=%0d isolated pairs=%0d of %0d, tiles ending with SAP_low=%0d",
             TILES, iso, TILES * W, low_tiles);
    $display("switching at tree inputs+outputs: guarded %0d, unguarded %0d (%0.1f%% saved)",
             sw_sap, sw_base, 100.0 * (1.0 - real'(sw_sap) / real'(sw_base)));
    checks += 2;
    if (sw_sap > sw_base) begin failures++; $display("FAIL guarded tree switched more"); end
    if (low_tiles == 0)   begin failures++; $display("FAIL SAP_low never set"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (TILES * (W + 2) + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
