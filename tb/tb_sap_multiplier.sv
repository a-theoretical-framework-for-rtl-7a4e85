// tb_sap_multiplier: end-to-end test of the SAP-guarded multiplier at its
// default size (n = 8, W = 256), no parameter overridden.
//
// Phases, each several windows long:
//   1. dense random operands with gaps, repeats and zeros (SAP_low stays low,
//      valid reuse is missed);
//   2. weight-stationary sparse stream: weight B = 2 fixed, flagged with
//      sw_mode, sparse activations each held a few cycles (SAP_low rises, the
//      tree is frozen by stasis, zero masking and the stationary-weight flag);
//   3. sparse stream without the flag and with changing weights (stasis and
//      zero isolation; changing operands are refused although SAP_low is set);
//   4. dense random again (SAP_low falls).
// Every product is compared with A*B one cycle after the pair is presented;
// isolated and arch_valid are compared with a model that tracks the
// operands the tree holds; sap_low may only change as a window closes, and a
// window must close after exactly W valid pairs. The switching on the tree
// inputs is counted and must never exceed that of the raw operand stream.
// Each mechanism must occur at least once.
module tb_sap_multiplier;
  localparam int N = 8, W = 256;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, sw_mode = 0;
  logic [N-1:0] a = 0, b = 0;
  logic [7:0] tau_th = 8'd100;
  logic out_valid, isolated, sap_low, arch_valid, window_done;
  logic [2*N-1:0] product;
  logic [7:0] toggles;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sap_multiplier dut (.clk, .rst_n, .in_valid, .a, .b, .sw_mode, .tau_th,
                      .out_valid, .product, .isolated, .sap_low, .arch_valid,
                      .toggles, .window_done);

  task automatic fail(string m);
    failures++;
    if (failures < 15) $display("FAIL @%0t %s", $time, m);
  endtask

  function automatic int hd(logic [N-1:0] x, logic [N-1:0] y);
    return $countones(x ^ y);
  endfunction

  // Model state.
  logic [N-1:0] m_ha = 0, m_hb = 0;       // operands the tree holds
  logic [N-1:0] last_a = 0, last_b = 0;   // previous valid operands
  logic [N-1:0] tree_a_prev = 0, tree_b_prev = 0;
  int valid_seen = 0;
  int n_rise = 0, n_fall = 0, n_iso_stasis = 0, n_iso_zero = 0, n_iso_sw = 0;
  int n_blocked = 0, n_missed = 0, n_idle = 0, n_windows = 0;
  longint raw_sw = 0, tree_sw = 0;
  logic prev_low = 0;

  // Inputs change at the falling edge; the model looks at them just before
  // the rising edge and checks the registered outputs just after it.
  always @(posedge clk) if (rst_n) begin
    logic e_zero, e_arch, e_iso;
    logic [2*N-1:0] e_prod;
    logic low_now, v;
    low_now = sap_low;
    v = in_valid;
    e_zero = (a == 0) || (b == 0);
    e_arch = e_zero || (a == m_ha && (b == m_hb || sw_mode));
    e_iso  = v && low_now && e_arch;
    e_prod = (2*N)'(a) * (2*N)'(b);
    checks++;
    if (arch_valid !== e_arch) fail("arch_valid");
    // Tree input switching against raw operand switching.
    tree_sw += hd(dut.tree_a, tree_a_prev) + hd(dut.tree_b, tree_b_prev);
    tree_a_prev = dut.tree_a; tree_b_prev = dut.tree_b;
    if (v) begin
      raw_sw += hd(a, last_a) + hd(b, last_b);
      last_a = a; last_b = b;
      if (e_iso && e_zero) n_iso_zero++;
      else if (e_iso && sw_mode) n_iso_sw++;
      else if (e_iso) n_iso_stasis++;
      if (low_now && !e_arch) n_blocked++;
      if (!low_now && e_arch) n_missed++;
      if (!e_iso) begin m_ha = a; m_hb = b; end
      valid_seen++;
    end else n_idle++;
    #1;
    checks += 2;
    if (out_valid !== v) fail("out_valid latency");
    if (v) begin
      checks += 2;
      if (product !== e_prod) fail($sformatf("product %0d*%0d got %0d", a, b, product));
      if (isolated !== e_iso) fail($sformatf("isolated exp %b", e_iso));
    end
    // Windows close after exactly W valid pairs; sap_low moves only then.
    if (window_done) n_windows++;
    if (window_done !== (v && valid_seen % W == 0)) fail("window timing");
    if (sap_low !== prev_low && !window_done) fail("sap_low changed inside a window");
    if (sap_low && !prev_low) n_rise++;
    if (!sap_low && prev_low) n_fall++;
    prev_low = sap_low;
  end

  function automatic logic [N-1:0] sparse();
    logic [N-1:0] v;
    case ($urandom_range(0, 5))
      0: v = '0;
      1: v = N'(1) << $urandom_range(0, N - 1);
      2: v = N'(1) << $urandom_range(0, N - 1);
      3: v = (N'(1) << $urandom_range(0, N - 1)) | (N'(1) << $urandom_range(0, N - 1));
      default: v = N'(1) << $urandom_range(0, 2);
    endcase
    return v;
  endfunction

  task automatic drive(input int cycles, input int mode);
    int hold_a = 0, hold_b = 0;
    for (int i = 0; i < cycles; i++) begin
      @(negedge clk);
      case (mode)
        1, 4: begin   // dense
          in_valid = ($urandom_range(0, 9) != 0);
          sw_mode  = 0;
          case ($urandom_range(0, 9))
            0: ;                                           // repeat the pair
            1: begin a = 0; b = N'($urandom); end
            default: begin a = N'($urandom); b = N'($urandom); end
          endcase
        end
        2: begin      // weight stationary, flagged
          in_valid = ($urandom_range(0, 19) != 0);
          sw_mode = 1; b = N'(2);
          if (hold_a == 0) begin a = sparse(); hold_a = $urandom_range(1, 6); end
          hold_a--;
        end
        3: begin      // sparse, weights changing
          in_valid = ($urandom_range(0, 19) != 0);
          sw_mode = 0;
          if (hold_a == 0) begin a = sparse(); hold_a = $urandom_range(1, 4); end
          if (hold_b == 0) begin b = sparse(); hold_b = $urandom_range(4, 12); end
          hold_a--; hold_b--;
        end
        default: ;
      endcase
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    drive(3 * W, 1);
    drive(5 * W, 2);
    sw_mode = 0;          // the weight changes next: drop the flag first
    drive(5 * W, 3);
    drive(3 * W, 4);
    @(negedge clk) in_valid = 0;
    @(negedge clk);
    $display("windows=%0d rise=%0d fall=%0d iso_stasis=%0d iso_zero=%0d iso_sw=%0d blocked=%0d missed=%0d idle=%0d",
             n_windows, n_rise, n_fall, n_iso_stasis, n_iso_zero, n_iso_sw, n_blocked, n_missed, n_idle);
    $display("switching on tree inputs %0d, on raw operands %0d (%0.1f%% avoided)",
             tree_sw, raw_sw, 100.0 * (1.0 - real'(tree_sw) / real'(raw_sw)));
    checks += 10;
    if (n_rise == 0)       fail("SAP_low never rose");
    if (n_fall == 0)       fail("SAP_low never fell");
    if (n_iso_stasis == 0) fail("no stasis isolation");
    if (n_iso_zero == 0)   fail("no zero-mask isolation");
    if (n_iso_sw == 0)     fail("no stationary-weight isolation");
    if (n_blocked == 0)    fail("no refused prediction");
    if (n_missed == 0)     fail("no missed reuse");
    if (n_idle == 0)       fail("no idle cycle");
    if (n_windows < 10)    fail("too few windows");
    if (tree_sw > raw_sw)  fail("tree switched more than the raw operands");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * W) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
