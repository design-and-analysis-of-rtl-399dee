// Workload testbench: transfer curve of the maximum unit.
//
// Holds a = 0.5 and sweeps b from 0.40 to 0.60 in steps of 0.01. For each
// point two independent streams of N = 10^6 bits drive two maximum units,
// one with L = 15 (M = 16 states) and one with L = 63 (M = 64). The ones
// rate of C is compared with the steady-state value
//   c = b + (b - a) / ((b(1-a) / (a(1-b)))^M - 1)
// and, at a = b, with its limit b + a(1-a)/M (about 0.5156 for M = 16 and
// 0.5039 for M = 64: unlike the exact maximum, the unit overshoots where
// the inputs are equal). The tolerance, 0.004, is about eight standard
// deviations of a rate measured over 10^6 bits.
module smax_fig8_tb;

  localparam int unsigned N = 1000000;
  localparam real PA = 0.5;
  localparam real TOL = 0.004;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clr = 1'b0;
  logic bit_en = 1'b0;
  logic a = 1'b0, b = 1'b0;
  logic c16, c64;
  logic [14:0] sr16;
  logic [62:0] sr64;

  always #5 clk = ~clk;

  smax_smin #(.L(15)) dut16 (.clk, .rst_n, .clr, .bit_en, .a, .b, .c(c16), .sr_q(sr16));
  smax_smin #(.L(63)) dut64 (.clk, .rst_n, .clr, .bit_en, .a, .b, .c(c64), .sr_q(sr64));

  int checks = 0;
  int failures = 0;

  function automatic real theory(real pa, real pb, int unsigned m);
    real r;
    if (pa == pb) return pb + pa * (1.0 - pa) / m;
    r = (pb * (1.0 - pa)) / (pa * (1.0 - pb));
    return pb + (pb - pa) / ($pow(r, m) - 1.0);
  endfunction

  task automatic expect_close(string what, real got, real exp);
    checks++;
    if (got > exp + TOL || got < exp - TOL) begin
      failures++;
      $display("FAIL %s: measured %f theory %f", what, got, exp);
    end else begin
      $display("  %s: measured %f theory %f", what, got, exp);
    end
  endtask

  initial begin
    repeat (22 * (N + 10) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int k = 0; k <= 20; k++) begin
      automatic real pb = (k == 10) ? PA : 0.40 + 0.01 * k;
      automatic int unsigned ta = int'(PA * 4294967295.0);
      automatic int unsigned tb_ = (k == 10) ? ta : int'(pb * 4294967295.0);
      automatic int o16 = 0, o64 = 0;
      clr = 1'b1; bit_en = 1'b0;
      @(negedge clk);
      clr = 1'b0; bit_en = 1'b1;
      for (int i = 0; i < int'(N); i++) begin
        a = ($urandom < ta); b = ($urandom < tb_);
        #1;
        o16 += c16; o64 += c64;
        @(negedge clk);
      end
      bit_en = 1'b0;
      expect_close($sformatf("M=16 a=%.2f b=%.2f", PA, pb), real'(o16) / N, theory(PA, pb, 16));
      expect_close($sformatf("M=64 a=%.2f b=%.2f", PA, pb), real'(o64) / N, theory(PA, pb, 64));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
