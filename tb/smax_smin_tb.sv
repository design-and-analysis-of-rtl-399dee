// Self-checking testbench for smax_smin (unit level).
//
// Four instances share the input streams: the default maximum (L = 15),
// the minimum (L = 15), a maximum with L = 1 and a maximum with L = 63
// (M = 64 states). Three kinds of checks:
//  1. Cycle-exact: every output bit is compared in the same cycle with a
//     model that keeps the FSM state as a saturating counter and applies
//     the three input cases (A = B; A = 0, B = 1; A = 1, B = 0) directly.
//     Random stalls (bit_en = 0) and clears are mixed in.
//  2. Ones bookkeeping per stream: o(C) = o(B) + o_R and
//     o(C) = o(A) + o_L - o_S, where o_R counts (A,B) = (1,0) while the
//     register is full, o_L counts (A,B) = (0,1) while it is empty and o_S
//     is the number of ones left in the register at the end.
//  3. Long-stream value: for several (a, b) the ones rate of C over 2*10^5
//     bits is compared with c = b + (b-a)/((b(1-a)/(a(1-b)))^M - 1)
//     (and 1 - f(1-a, 1-b) for the minimum).
// It counts how often a right overflow, a left overflow, a stall and a
// clear happened and fails if one never did.
module smax_smin_tb;
  import sc_maxmin_pkg::*;

  localparam int unsigned NRAND = 40000;
  localparam int unsigned NSTREAM = 4000;
  localparam int unsigned NLONG = 200000;

  class smax_model;
    int unsigned len;
    bit is_min;
    int unsigned k;
    function new(int unsigned l, bit m);
      len = l; is_min = m; k = 0;
    endfunction
    // Output bit of the current cycle (state before the update).
    function bit out(bit a, bit b);
      bit ai = a ^ is_min, bi = b ^ is_min, ci;
      if (ai == bi) ci = bi;
      else if (!ai) ci = 1'b1;
      else ci = (k == len);
      return ci ^ is_min;
    endfunction
    function void update(bit a, bit b, bit en, bit clear);
      bit ai = a ^ is_min, bi = b ^ is_min;
      if (clear) k = 0;
      else if (en && ai && !bi && k < len) k++;
      else if (en && !ai && bi && k > 0) k--;
    endfunction
  endclass

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clr = 1'b0;
  logic bit_en = 1'b0;
  logic a = 1'b0, b = 1'b0;
  logic c_max, c_min, c_l1, c_l63;
  logic [14:0] sr_max, sr_min;
  logic [0:0]  sr_l1;
  logic [62:0] sr_l63;

  always #5 clk = ~clk;

  smax_smin dut_max (.clk, .rst_n, .clr, .bit_en, .a, .b, .c(c_max), .sr_q(sr_max));
  smax_smin #(.L(15), .MODE(SC_MIN)) dut_min (.clk, .rst_n, .clr, .bit_en, .a, .b, .c(c_min),
                                             .sr_q(sr_min));
  smax_smin #(.L(1)) dut_l1 (.clk, .rst_n, .clr, .bit_en, .a, .b, .c(c_l1), .sr_q(sr_l1));
  smax_smin #(.L(63)) dut_l63 (.clk, .rst_n, .clr, .bit_en, .a, .b, .c(c_l63), .sr_q(sr_l63));

  smax_model m_max = new(15, 1'b0);
  smax_model m_min = new(15, 1'b1);
  smax_model m_l1  = new(1, 1'b0);
  smax_model m_l63 = new(63, 1'b0);

  int checks = 0;
  int failures = 0;
  int n_right_ovf = 0, n_left_ovf = 0, n_stall = 0, n_clear = 0, n_min_diff = 0;

  task automatic expect_bit(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %b expected %b (a=%b b=%b)", what, got, exp, a, b);
    end
  endtask

  task automatic expect_close(string what, real got, real exp, real tol);
    checks++;
    if (got > exp + tol || got < exp - tol) begin
      failures++;
      $display("FAIL %s: got %f expected %f +- %f", what, got, exp, tol);
    end else begin
      $display("  %s: measured %f theory %f", what, got, exp);
    end
  endtask

  function automatic real smax_theory(real pa, real pb, int unsigned m);
    real r = (pb * (1.0 - pa)) / (pa * (1.0 - pb));
    return pb + (pb - pa) / ($pow(r, m) - 1.0);
  endfunction

  function automatic logic rbit(int unsigned thr);
    return ($urandom < thr);
  endfunction

  function automatic int unsigned thr_of(real p);
    return int'(p * 4294967295.0);
  endfunction

  // One clock cycle: apply inputs, check outputs, advance the models.
  task automatic cycle(logic ai, logic bi, logic en, logic cl, bit check_all);
    @(negedge clk);
    a = ai; b = bi; bit_en = en; clr = cl;
    #1;
    if (check_all) begin
      expect_bit("max L=15", c_max, m_max.out(ai, bi));
      expect_bit("min L=15", c_min, m_min.out(ai, bi));
      expect_bit("max L=1",  c_l1,  m_l1.out(ai, bi));
      expect_bit("max L=63", c_l63, m_l63.out(ai, bi));
    end
    if (en && !cl && ai && !bi && m_max.k == 15) n_right_ovf++;
    if (en && !cl && !ai && bi && m_max.k == 0) n_left_ovf++;
    if (!en && (ai != bi)) n_stall++;
    if (cl) n_clear++;
    @(posedge clk);
    m_max.update(ai, bi, en, cl);
    m_min.update(ai, bi, en, cl);
    m_l1.update(ai, bi, en, cl);
    m_l63.update(ai, bi, en, cl);
  endtask

  initial begin
    repeat (NRAND + 40 * NSTREAM + 10 * NLONG + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned ta, tb_;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // 1. Cycle-exact comparison with drifting stream probabilities.
    for (int i = 0; i < NRAND; i++) begin
      if (i % 1000 == 0) begin
        ta = $urandom; tb_ = $urandom;
      end
      cycle(rbit(ta), rbit(tb_), $urandom_range(99) < 90, $urandom_range(2999) == 0, 1'b1);
      if (c_max != c_min) n_min_diff++;
    end

    // 2. Ones bookkeeping on whole streams, default instance.
    for (int s = 0; s < 20; s++) begin
      automatic int o_a = 0, o_b = 0, o_c = 0, o_r = 0, o_l = 0, o_s = 0;
      ta = $urandom; tb_ = $urandom;
      cycle(1'b0, 1'b0, 1'b1, 1'b1, 1'b0);  // clear before the stream
      for (int i = 0; i < NSTREAM; i++) begin
        automatic logic ai = rbit(ta), bi = rbit(tb_);
        @(negedge clk);
        a = ai; b = bi; bit_en = 1'b1; clr = 1'b0;
        #1;
        o_a += ai; o_b += bi; o_c += c_max;
        if (ai && !bi && &sr_max) o_r++;
        if (!ai && bi && sr_max == '0) o_l++;
        if (ai && !bi && &sr_max) n_right_ovf++;
        if (!ai && bi && sr_max == '0) n_left_ovf++;
        @(posedge clk);
        m_max.update(ai, bi, 1'b1, 1'b0);
      end
      #1 o_s = $countones(sr_max);
      checks++;
      if (o_c != o_b + o_r) begin
        failures++;
        $display("FAIL stream %0d: o(C)=%0d o(B)=%0d o_R=%0d", s, o_c, o_b, o_r);
      end
      checks++;
      if (o_c != o_a + o_l - o_s) begin
        failures++;
        $display("FAIL stream %0d: o(C)=%0d o(A)=%0d o_L=%0d o_S=%0d", s, o_c, o_a, o_l, o_s);
      end
    end
    // Re-synchronise all models with their instances.
    cycle(1'b0, 1'b0, 1'b1, 1'b1, 1'b0);

    // 3. Long streams against the steady-state formula.
    begin
      automatic real pairs[7][2] = '{'{0.3, 0.7}, '{0.7, 0.3}, '{0.45, 0.55}, '{0.55, 0.45},
                           '{0.48, 0.52}, '{0.52, 0.48}, '{0.9, 0.1}};
      foreach (pairs[p]) begin
        automatic real pa = pairs[p][0], pb = pairs[p][1];
        automatic int o_max = 0, o_min = 0, o_63 = 0;
        ta = thr_of(pa); tb_ = thr_of(pb);
        cycle(1'b0, 1'b0, 1'b1, 1'b1, 1'b0);
        for (int i = 0; i < NLONG; i++) begin
          @(negedge clk);
          a = rbit(ta); b = rbit(tb_); bit_en = 1'b1; clr = 1'b0;
          #1;
          o_max += c_max; o_min += c_min; o_63 += c_l63;
          if (a && !b && &sr_max) n_right_ovf++;
          if (!a && b && sr_max == '0) n_left_ovf++;
        end
        expect_close($sformatf("max M=16 a=%.2f b=%.2f", pa, pb), real'(o_max) / NLONG,
                     smax_theory(pa, pb, 16), 0.008);
        expect_close($sformatf("max M=64 a=%.2f b=%.2f", pa, pb), real'(o_63) / NLONG,
                     smax_theory(pa, pb, 64), 0.008);
        expect_close($sformatf("min M=16 a=%.2f b=%.2f", pa, pb), real'(o_min) / NLONG,
                     1.0 - smax_theory(1.0 - pa, 1.0 - pb, 16), 0.008);
      end
    end

    $display("events: right_overflow=%0d left_overflow=%0d stall=%0d clear=%0d min_differs=%0d",
             n_right_ovf, n_left_ovf, n_stall, n_clear, n_min_diff);
    checks++;
    if (n_right_ovf == 0 || n_left_ovf == 0 || n_stall == 0 || n_clear == 0 || n_min_diff == 0) begin
      failures++;
      $display("FAIL: a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
