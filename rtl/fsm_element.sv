// FSM element of the stochastic max/min unit: a linear FSM with M = L+1
// states S0..S_L, built as an L-cell shift register instead of a counter.
//
// How it works: the state is the number of ones in the register. When the
// shift enable `en` is 1 and `dir` is 1, a 1 is shifted in from the left
// (every cell moves one place to the right, the rightmost cell drops out):
// the state goes up, saturating at S_L when the register is full. When `en`
// is 1 and `dir` is 0, a 0 is shifted in from the right (every cell moves one
// place to the left): the state goes down, saturating at S0. Started empty,
// the register therefore always holds a run of ones on the left, so the
// rightmost cell, output `u`, is 1 exactly in the last state S_L. All cells
// have equal weight, which is the reason for preferring a shift register to
// a binary counter (a flipped bit moves the state by one only).
//
// Interface: `sr_q[L-1]` is the leftmost cell, `sr_q[0]` the rightmost one
// (= u). `bit_en` qualifies the stream bit of this cycle; with bit_en = 0
// or en = 0 the register holds. `clr` empties the register synchronously
// (start of a new stream); `rst_n` does so asynchronously.
//
// Timing: `u` and `sr_q` are register outputs; the shift takes effect at the
// rising clock edge, one stream bit per cycle.
//
// From the paper: shift directions, fill values, U = rightmost cell and
// L = M-1. Own choices: the empty state after reset and clear, the clr and
// bit_en inputs, and the bit ordering of sr_q.
module fsm_element #(
  parameter int unsigned L = sc_maxmin_pkg::SR_LEN_DEFAULT  // register length = last state
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         bit_en,
  input  logic         en,    // EN: update the state (driven by D = A xor B)
  input  logic         dir,   // 1: shift a one in from the left, 0: shift a zero in from the right
  output logic         u,     // rightmost cell
  output logic [L-1:0] sr_q
);

  logic [L-1:0] sr_right;  // contents after shifting a 1 in from the left
  logic [L-1:0] sr_left;   // contents after shifting a 0 in from the right

  generate
    if (L == 1) begin : g_single
      assign sr_right = 1'b1;
      assign sr_left  = 1'b0;
    end else begin : g_multi
      assign sr_right = {1'b1, sr_q[L-1:1]};
      assign sr_left  = {sr_q[L-2:0], 1'b0};
    end
  endgenerate

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr_q <= '0;
    end else if (clr) begin
      sr_q <= '0;
    end else if (bit_en && en) begin
      sr_q <= dir ? sr_right : sr_left;
    end
  end

  assign u = sr_q[0];

  initial begin
    assert (L >= 1) else $fatal(1, "fsm_element: L must be at least 1");
  end

endmodule
