// gauss_grng -- Gaussian pseudorandom noise generator (top level).
//
// A Gold code generator (two degree-89 LFSRs and an XOR) produces one binary
// chip per clock; the central-limit accumulator maps each chip to +/-1 and
// sums non-overlapping blocks of M = 256 chips.  Every M accepted chips one
// sample S(i) = M^(-1/2) * (block sum) comes out; by the central limit
// theorem, and because the Gold code has no full peaks in its correlation
// measures of order 3 and 4, the samples are close to standard normal in
// their first four moments.  With M = 256 the output word `sample` is S(i)
// as a signed fixed-point number with 4 fractional bits (range -16..+16 in
// steps of 1/8, since the block sum is always even).
//
// The structure (Gold code into block sum), the polynomials and M follow the
// generator this design implements.  The enable (stall), the seed-load port
// that also restarts the current block, the reset seeds and the output
// registers are this design's own.
//
// Interface / timing:
//   en      : advance one chip per rising edge; low stalls everything.
//   load    : load seed1/seed2 into the LFSRs and discard the partial block.
//   chip    : the Gold chip consumed at the next enabled edge (0/1).
//   sample, sample_valid : registered; sample_valid pulses for one cycle
//             after the edge that took the M-th chip of a block.
// Throughput is one sample per M enabled cycles; rst_n is asynchronous.
module gauss_grng #(
  parameter int unsigned  N     = grng_pkg::LFSR_N,
  parameter logic [N-1:0] TAPS1 = grng_pkg::F1_TAPS,
  parameter logic [N-1:0] TAPS2 = grng_pkg::F2_TAPS,
  parameter logic [N-1:0] SEED1 = grng_pkg::F1_SEED,
  parameter logic [N-1:0] SEED2 = grng_pkg::F2_SEED,
  parameter int unsigned  M     = grng_pkg::CLT_M,
  parameter int unsigned  SW    = grng_pkg::sum_width(M)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 load,
  input  logic [N-1:0]         seed1,
  input  logic [N-1:0]         seed2,
  output logic                 chip,
  output logic signed [SW-1:0] sample,
  output logic                 sample_valid
);

  gold_code_gen #(
    .N(N), .TAPS1(TAPS1), .TAPS2(TAPS2), .SEED1(SEED1), .SEED2(SEED2)
  ) u_gold (
    .clk, .rst_n, .en, .load, .seed1, .seed2, .chip
  );

  clt_accumulator #(.M(M), .SW(SW)) u_clt (
    .clk, .rst_n,
    .clear       (load),
    .in_valid    (en),
    .in_bit      (chip),
    .sample,
    .sample_valid
  );

endmodule
