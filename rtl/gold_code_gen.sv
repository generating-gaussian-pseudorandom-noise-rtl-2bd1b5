// gold_code_gen -- Gold code generator built from two maximum-length LFSRs.
//
// The Gold code of the design is s(i) = psi(Tr(alpha^i) + Tr(alpha^(3i))),
// i.e. the XOR of the m-sequences of f1 (minimal polynomial of alpha) and f2
// (minimal polynomial of alpha^3).  It is produced, as is usual in hardware,
// by running one LFSR per polynomial and XOR-ing their output bits; the
// default polynomials are f1 = x^89 + x^38 + 1 and
// f2 = x^89 + x^72 + x^55 + x^38 + 1, both of degree 89, so the period is
// 2^89 - 1, a Mersenne prime.  The output here is the {0,1} chip; the mapping
// to +/-1 (0 -> +1, 1 -> -1) is done by the consumer.
//
// The two-LFSR-plus-XOR structure and the polynomials follow the generator
// this design implements; the seeds and control pins are this design's own.
//
// Interface / timing: `chip` is the XOR of two register outputs, valid in
// the cycle before the edge that consumes it.  `en` advances both LFSRs by
// one step, `load` (priority) sets their states to seed1 / seed2.  rst_n is
// asynchronous, active low.
module gold_code_gen #(
  parameter int unsigned  N     = grng_pkg::LFSR_N,
  parameter logic [N-1:0] TAPS1 = grng_pkg::F1_TAPS,
  parameter logic [N-1:0] TAPS2 = grng_pkg::F2_TAPS,
  parameter logic [N-1:0] SEED1 = grng_pkg::F1_SEED,
  parameter logic [N-1:0] SEED2 = grng_pkg::F2_SEED
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         load,
  input  logic [N-1:0] seed1,
  input  logic [N-1:0] seed2,
  output logic         chip
);

  logic bit1, bit2;

  lfsr #(.N(N), .TAPS(TAPS1), .SEED(SEED1)) u_lfsr1 (
    .clk, .rst_n, .en, .load, .seed(seed1), .state(), .out_bit(bit1)
  );

  lfsr #(.N(N), .TAPS(TAPS2), .SEED(SEED2)) u_lfsr2 (
    .clk, .rst_n, .en, .load, .seed(seed2), .state(), .out_bit(bit2)
  );

  assign chip = bit1 ^ bit2;

endmodule
