// Workload testbench: error probability against shift-register length.
//
// Seven maximum units with L = 3, 6, 12, 15, 22, 27 and 34 see the same
// pair of input streams. For each stream length N in {1000, 30000, 50000,
// 100000} it runs a number of test cases with a and b drawn uniformly from
// [0, 1), and measures for every L the mean error
//   |o(C) - o(B)| / N  if a <= b,   |o(C) - o(A)| / N  if a > b.
// Checks:
//  - at the predicted optimum L_opt(N) (6, 22, 27, 34 for the four N) the
//    measured mean error is within 20 % of the predicted value (4.13e-3,
//    5.18e-4, 3.75e-4, 2.41e-4);
//  - for N = 1000 the optimum L = 6 beats both L = 3 (too many overflows)
//    and L = 15 (too many ones left in the register);
//  - every stream obeys o(C) = o(B) + o_R = o(A) + o_L - o_S for every L.
module smax_lopt_tb;

  localparam int NL = 7;
  localparam int unsigned LS [NL] = '{3, 6, 12, 15, 22, 27, 34};
  localparam int NN = 4;
  localparam int unsigned NS [NN] = '{1000, 30000, 50000, 100000};
  localparam int unsigned CASES [NN] = '{4000, 400, 300, 500};
  localparam int LOPT_IDX [NN] = '{1, 4, 5, 6};
  localparam real PE_PAPER [NN] = '{4.1274801e-03, 5.1816724e-04, 3.7486047e-04, 2.4078136e-04};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clr = 1'b0;
  logic bit_en = 1'b0;
  logic a = 1'b0, b = 1'b0;
  logic c_v [NL];
  logic full_v [NL];
  logic empty_v [NL];
  int   ones_v [NL];

  always #5 clk = ~clk;

  for (genvar g = 0; g < NL; g++) begin : g_dut
    logic [LS[g]-1:0] sr;
    logic cg;
    smax_smin #(.L(LS[g])) dut (.clk, .rst_n, .clr, .bit_en, .a, .b, .c(cg), .sr_q(sr));
    assign c_v[g] = cg;
    assign full_v[g] = &sr;
    assign empty_v[g] = (sr == '0);
    assign ones_v[g] = $countones(sr);
  end

  int checks = 0;
  int failures = 0;

  initial begin
    repeat (200000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < NN; n++) begin
      automatic real err_sum [NL] = '{default: 0.0};
      for (int t = 0; t < int'(CASES[n]); t++) begin
        automatic int unsigned ta = $urandom, tb_ = $urandom;
        automatic int o_a = 0, o_b = 0;
        automatic int o_c [NL] = '{default: 0};
        automatic int o_r [NL] = '{default: 0};
        automatic int o_l [NL] = '{default: 0};
        clr = 1'b1; bit_en = 1'b0;
        @(negedge clk);
        clr = 1'b0; bit_en = 1'b1;
        for (int i = 0; i < int'(NS[n]); i++) begin
          a = ($urandom < ta); b = ($urandom < tb_);
          #1;
          o_a += a; o_b += b;
          for (int l = 0; l < NL; l++) begin
            o_c[l] += c_v[l];
            if (a && !b && full_v[l]) o_r[l]++;
            if (!a && b && empty_v[l]) o_l[l]++;
          end
          @(negedge clk);
        end
        bit_en = 1'b0;
        #1;
        for (int l = 0; l < NL; l++) begin
          automatic int ref_ones = (ta <= tb_) ? o_b : o_a;
          checks++;
          if (o_c[l] != o_b + o_r[l] || o_c[l] != o_a + o_l[l] - ones_v[l]) begin
            failures++;
            if (failures < 10) $display("FAIL N=%0d L=%0d: ones bookkeeping", NS[n], LS[l]);
          end
          err_sum[l] += real'(o_c[l] > ref_ones ? o_c[l] - ref_ones : ref_ones - o_c[l]) / NS[n];
        end
      end
      for (int l = 0; l < NL; l++) err_sum[l] /= CASES[n];
      $display("N=%0d (%0d cases): L=3 %e  L=6 %e  L=12 %e  L=15 %e  L=22 %e  L=27 %e  L=34 %e",
               NS[n], CASES[n], err_sum[0], err_sum[1], err_sum[2], err_sum[3], err_sum[4],
               err_sum[5], err_sum[6]);
      checks++;
      if (err_sum[LOPT_IDX[n]] < 0.8 * PE_PAPER[n] || err_sum[LOPT_IDX[n]] > 1.2 * PE_PAPER[n]) begin
        failures++;
        $display("FAIL N=%0d: error at L=%0d is %e, predicted %e", NS[n], LS[LOPT_IDX[n]],
                 err_sum[LOPT_IDX[n]], PE_PAPER[n]);
      end
      if (n == 0) begin
        checks++;
        if (!(err_sum[1] < err_sum[0] && err_sum[1] < err_sum[3])) begin
          failures++;
          $display("FAIL N=1000: L=6 is not better than L=3 and L=15");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
