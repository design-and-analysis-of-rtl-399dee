// End-to-end testbench for smax_smin at its default size (L = 15, maximum).
//
// Reproduces the stream-length experiment for N = 10^4 bits: for each of
// NCASES test cases, draw a and b uniformly from [0, 1), generate two
// independent Bernoulli streams of N bits, clear the register, run the
// streams through the unit (with random idle cycles, bit_en = 0, mixed in)
// and count the ones of A, B and C. The error of a case is
//   |o(C) - o(B)| / N  if a <= b,   |o(C) - o(A)| / N  if a > b,
// i.e. the right-overflow ones when B is the larger stream, and left
// overflows minus the ones left in the register when A is. The mean error
// over all cases is compared with the expected error probability of about
// 1.03e-3 predicted for N = 10^4 and L = 15 (within 10 %).
//
// Every case also checks the exact ones bookkeeping
//   o(C) = o(B) + o_R   and   o(C) = o(A) + o_L - o_S
// against the register contents, and that the stream of N bits took N
// active cycles (one bit per cycle). Right overflows, left overflows,
// ones left in the register, idle cycles and clears are counted; a
// mechanism that never happened is a failure.
module smax_smin_full_tb;

  localparam int unsigned N = 10000;
  localparam int unsigned NCASES = 10000;
  localparam real PE_THEORY = 1.03e-3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clr = 1'b0;
  logic bit_en = 1'b0;
  logic a = 1'b0, b = 1'b0;
  logic c;
  logic [sc_maxmin_pkg::SR_LEN_DEFAULT-1:0] sr_q;

  always #5 clk = ~clk;

  smax_smin dut (.clk, .rst_n, .clr, .bit_en, .a, .b, .c, .sr_q);

  int checks = 0;
  int failures = 0;
  longint n_right_ovf = 0, n_left_ovf = 0, n_remaining = 0, n_idle = 0, n_clear = 0;
  longint cycle_count = 0;

  always @(posedge clk) cycle_count <= cycle_count + 1;

  initial begin
    repeat (NCASES * (N + N / 10 + 10) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic real err_sum = 0.0, err_le_sum = 0.0, err_gt_sum = 0.0;
    automatic int n_le = 0, n_gt = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < NCASES; t++) begin
      automatic int unsigned ta = $urandom, tb_ = $urandom;
      automatic int o_a = 0, o_b = 0, o_c = 0, o_r = 0, o_l = 0, o_s, sent = 0, idle = 0;
      automatic longint t0;
      automatic real err;
      @(negedge clk);
      clr = 1'b1; bit_en = 1'b0;
      n_clear++;
      @(negedge clk);
      clr = 1'b0;
      t0 = cycle_count;
      while (sent < N) begin
        automatic logic ai = ($urandom < ta), bi = ($urandom < tb_);
        automatic logic en = ($urandom_range(99) >= 5);
        a = ai; b = bi; bit_en = en;
        #1;
        if (en) begin
          o_a += ai; o_b += bi; o_c += c;
          if (ai && !bi && &sr_q) o_r++;
          if (!ai && bi && sr_q == '0) o_l++;
          sent++;
        end else begin
          idle++;
        end
        @(negedge clk);
      end
      bit_en = 1'b0;
      n_idle += 64'(idle);
      o_s = $countones(sr_q);
      n_right_ovf += 64'(o_r); n_left_ovf += 64'(o_l); n_remaining += 64'(o_s);
      checks++;
      if (o_c != o_b + o_r || o_c != o_a + o_l - o_s) begin
        failures++;
        if (failures < 10)
          $display("FAIL case %0d: o(A)=%0d o(B)=%0d o(C)=%0d o_R=%0d o_L=%0d o_S=%0d",
                   t, o_a, o_b, o_c, o_r, o_l, o_s);
      end
      // One bit per active cycle: N bits plus the idle cycles.
      checks++;
      if (cycle_count - t0 != 64'(N + idle)) begin
        failures++;
        if (failures < 10) $display("FAIL case %0d: %0d cycles for %0d bits and %0d idle cycles",
                                    t, cycle_count - t0, N, idle);
      end
      if (ta <= tb_) begin
        err = real'(o_c > o_b ? o_c - o_b : o_b - o_c) / N;
        err_le_sum += err; n_le++;
      end else begin
        err = real'(o_c > o_a ? o_c - o_a : o_a - o_c) / N;
        err_gt_sum += err; n_gt++;
      end
      err_sum += err;
    end
    begin
      automatic real pe = err_sum / NCASES;
      $display("N=%0d L=%0d cases=%0d: mean error %e (a<=b: %e over %0d, a>b: %e over %0d)",
               N, sc_maxmin_pkg::SR_LEN_DEFAULT, NCASES, pe, err_le_sum / n_le, n_le,
               err_gt_sum / n_gt, n_gt);
      checks++;
      if (pe < 0.9 * PE_THEORY || pe > 1.1 * PE_THEORY) begin
        failures++;
        $display("FAIL: mean error %e far from the predicted %e", pe, PE_THEORY);
      end
    end
    $display("events: right_overflow=%0d left_overflow=%0d remaining_ones=%0d idle=%0d clear=%0d",
             n_right_ovf, n_left_ovf, n_remaining, n_idle, n_clear);
    checks++;
    if (n_right_ovf == 0 || n_left_ovf == 0 || n_remaining == 0 || n_idle == 0 || n_clear == 0) begin
      failures++;
      $display("FAIL: a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
