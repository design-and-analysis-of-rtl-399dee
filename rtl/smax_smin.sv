// Shift-register stochastic maximum / minimum of two unipolar bit streams.
//
// The unit takes one bit of each input stream A and B per clock cycle and
// produces one bit of the output stream C in the same cycle. In unipolar
// coding a stream encodes the probability of a one, so the ones rate of C
// approximates max(a, b) (or min(a, b) with MODE = SC_MIN).
//
// How it works (maximum): D = A xor B marks the cycles in which the two
// streams differ, and enables the FSM element, an L-cell shift register
// whose direction input is A.
//   A = B       : register unchanged, C = B.
//   A = 0, B = 1: a 0 is shifted in from the right (state down), C = B = 1.
//   A = 1, B = 0: a 1 is shifted in from the left (state up), C = U, the
//                 rightmost cell, which is 1 only when the register is full.
// So every one of B reaches C; the surplus ones of A over B are collected
// in the register and, once it is full, passed on to C. S = D and not B
// (= A and not B) selects U at the output multiplexer (input 1), otherwise
// B (input 0). For long streams C encodes
//   c = b + (b - a) / ((b(1-a) / (a(1-b)))^M - 1),  M = L + 1,
// which tends to max(a, b) as M grows. With finite streams of N bits, ones
// still held in the register at the end are missing from C, so there is a
// best L for a given N (L = 15 for N = 10^4, the default here).
//
// Minimum: A, B are inverted on entry and C on exit, around the same core.
//
// Interface: a, b are the stream bits of this cycle, valid when bit_en = 1;
// c is their output bit, combinational from a, b and the register (zero
// latency, one bit per cycle). clr empties the register before a new
// stream, rst_n resets it asynchronously. sr_q exposes the register so that
// the ones left at the end of a stream can be read.
//
// From the paper: the gate network (XOR, AND with B inverted, 2:1 mux), the
// FSM element and the inversion rule for the minimum. Own choices: the
// empty start state, clr, bit_en, the zero-latency timing and the
// compile-time MODE parameter.
module smax_smin
  import sc_maxmin_pkg::*;
#(
  parameter int unsigned L    = SR_LEN_DEFAULT,  // shift-register length, M = L+1 states
  parameter sc_mode_e    MODE = SC_MAX
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         bit_en,
  input  logic         a,
  input  logic         b,
  output logic         c,
  output logic [L-1:0] sr_q
);

  localparam logic INV = (MODE == SC_MIN);

  logic a_i, b_i;  // inputs of the max core (inverted for the minimum)
  logic d, s, u, c_i;

  assign a_i = a ^ INV;
  assign b_i = b ^ INV;

  // D: the two streams differ; S: A = 1 and B = 0, take the register output.
  assign d = a_i ^ b_i;
  assign s = d & ~b_i;

  fsm_element #(.L(L)) u_fsm (
    .clk   (clk),
    .rst_n (rst_n),
    .clr   (clr),
    .bit_en(bit_en),
    .en    (d),
    .dir   (a_i),
    .u     (u),
    .sr_q  (sr_q)
  );

  assign c_i = s ? u : b_i;
  assign c   = c_i ^ INV;

endmodule
