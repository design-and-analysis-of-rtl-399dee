// Self-checking testbench for fsm_element.
//
// Drives random enable / direction / stall / clear sequences into two
// instances (L = 15, the default, and L = 1) and compares, every cycle, the
// register contents and U with an independent model: a saturating up/down
// counter k in 0..L. The register must hold the thermometer code of k (k
// ones in the leftmost cells) and U must be 1 exactly when k = L. It also
// checks that reset and clear empty the register and that en = 0 or
// bit_en = 0 hold it.
module fsm_element_tb;

  localparam int unsigned LA = 15;
  localparam int unsigned LB = 1;
  localparam int unsigned NCYC = 20000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clr = 1'b0;
  logic bit_en = 1'b0;
  logic en = 1'b0;
  logic dir = 1'b0;
  logic u_a, u_b;
  logic [LA-1:0] sr_a;
  logic [LB-1:0] sr_b;

  int checks = 0;
  int failures = 0;
  int unsigned k_a = 0, k_b = 0;
  int n_full = 0, n_empty_down = 0, n_full_up = 0, n_hold = 0, n_clr = 0;

  always #5 clk = ~clk;

  fsm_element dut_a (.clk, .rst_n, .clr, .bit_en, .en, .dir, .u(u_a), .sr_q(sr_a));
  fsm_element #(.L(LB)) dut_b (.clk, .rst_n, .clr, .bit_en, .en, .dir, .u(u_b), .sr_q(sr_b));

  function automatic logic [63:0] thermo(int unsigned k, int unsigned len);
    logic [63:0] v = '0;
    for (int unsigned i = 0; i < k; i++) v[len-1-i] = 1'b1;
    return v;
  endfunction

  function automatic int unsigned step(int unsigned k, int unsigned len, logic c, logic b_en,
                                       logic e, logic d);
    if (c) return 0;
    if (!(b_en && e)) return k;
    if (d) return (k == len) ? len : k + 1;
    return (k == 0) ? 0 : k - 1;
  endfunction

  task automatic check_state();
    checks++;
    if (sr_a !== thermo(k_a, LA)[LA-1:0] || u_a !== (k_a == LA)) begin
      failures++;
      if (failures < 10) $display("FAIL L=%0d: k=%0d sr=%b u=%b", LA, k_a, sr_a, u_a);
    end
    checks++;
    if (sr_b !== thermo(k_b, LB)[LB-1:0] || u_b !== (k_b == LB)) begin
      failures++;
      if (failures < 10) $display("FAIL L=%0d: k=%0d sr=%b u=%b", LB, k_b, sr_b, u_b);
    end
  endtask

  initial begin
    repeat (NCYC + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 check_state();  // reset leaves the register empty
    @(negedge clk) rst_n = 1'b1;
    // Fill the register completely, then check saturation at the top.
    for (int i = 0; i < LA + 3; i++) begin
      @(negedge clk);
      {bit_en, en, dir, clr} = 4'b1110;
      @(posedge clk);
      k_a = step(k_a, LA, clr, bit_en, en, dir);
      k_b = step(k_b, LB, clr, bit_en, en, dir);
      #1 check_state();
    end
    if (k_a == LA) n_full++;
    // Random traffic; the direction bias drifts so both ends are visited.
    for (int i = 0; i < NCYC; i++) begin
      automatic int unsigned bias = ((i / 500) % 2 == 0) ? 30 : 70;
      @(negedge clk);
      bit_en = ($urandom_range(99) < 90);
      en     = ($urandom_range(99) < 70);
      dir    = ($urandom_range(99) < bias);
      clr    = ($urandom_range(999) == 0);
      if (clr) n_clr++;
      if (bit_en && en && !dir && k_a == 0) n_empty_down++;
      if (bit_en && en && dir && k_a == LA) n_full_up++;
      if (!(bit_en && en)) n_hold++;
      @(posedge clk);
      k_a = step(k_a, LA, clr, bit_en, en, dir);
      k_b = step(k_b, LB, clr, bit_en, en, dir);
      #1 check_state();
    end
    // Asynchronous reset from a non-empty state.
    @(negedge clk) {bit_en, en, dir, clr} = 4'b1110;
    @(posedge clk) k_a = step(k_a, LA, 1'b0, 1'b1, 1'b1, 1'b1);
    k_b = step(k_b, LB, 1'b0, 1'b1, 1'b1, 1'b1);
    #2 rst_n = 1'b0;
    #1 k_a = 0; k_b = 0;
    check_state();
    $display("events: saturate_full=%0d saturate_empty=%0d holds=%0d clears=%0d",
             n_full_up, n_empty_down, n_hold, n_clr);
    checks++;
    if (n_full_up == 0 || n_empty_down == 0 || n_hold == 0 || n_clr == 0) begin
      failures++;
      $display("FAIL: a saturation, hold or clear case was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
