// lfsr -- maximum-length linear feedback shift register (Fibonacci form).
//
// The state is (e_1, ..., e_N), held with e_i in bit i-1 of `state`.  One
// step applies the transition
//     T(e_1, ..., e_N) = (e_2, ..., e_N, sum_{i=1..N} e_i * b_{i-1})
// where b_0 .. b_{N-1} are the low coefficients of the characteristic
// polynomial f(x) = x^N + ... + b_1 x + b_0 (parameter TAPS, bit i = b_i).
// The output function is out = e_1, so the LFSR emits e_1, e_2, ... of the
// initial state first and then the linear recurrence
//     s(j+N) = sum_i b_i s(j+i).
// With a primitive f(x) the period is 2^N - 1.  The transition, the output
// function and the default polynomial x^89 + x^38 + 1 follow the generator
// this design implements; the load/enable controls, the reset value SEED and
// the all-zero-state assertion are this design's own.
//
// Interface / timing: `out_bit` and `state` are register outputs.  On a
// rising edge with `load` high the state becomes `seed` (e_0); otherwise,
// with `en` high, it takes one step of T.  With both low it holds.  rst_n is
// asynchronous, active low, and resets the state to SEED.
module lfsr #(
  parameter int unsigned          N     = grng_pkg::LFSR_N,
  parameter logic [N-1:0]         TAPS  = grng_pkg::F1_TAPS,
  parameter logic [N-1:0]         SEED  = grng_pkg::F1_SEED
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         load,
  input  logic [N-1:0] seed,
  output logic [N-1:0] state,
  output logic         out_bit
);

  logic feedback;

  // sum_{i=1..N} e_i b_{i-1} over GF(2)
  assign feedback = ^(state & TAPS);
  assign out_bit  = state[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     state <= SEED;
    else if (load)  state <= seed;
    else if (en)    state <= {feedback, state[N-1:1]};
  end

  // The all-zero state is a fixed point of T and never leaves it.
  a_nonzero_state: assert property (@(posedge clk) disable iff (!rst_n) state != '0)
    else $error("lfsr: all-zero state");

endmodule
