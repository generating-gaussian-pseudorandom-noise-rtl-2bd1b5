// clt_accumulator -- central-limit block summer.
//
// Turns a stream of binary chips into Gaussian samples following
//     S(i) = M^(-1/2) * sum_{n=1..M} s(n + i*M),   s = (-1)^chip,
// i.e. each chip is mapped 0 -> +1, 1 -> -1 and non-overlapping blocks of M
// consecutive values are summed, no chip being used twice.  The output
// `sample` is the integer block sum (range -M..M, same parity as M); the
// scaling by M^(-1/2) is a fixed binary point when M is a power of four:
// for the default M = 256 the sample is S(i) with 4 fractional
// bits.  For other M the caller applies the scale.
//
// The block-sum formula and M = 256 follow the generator this design
// implements; the implementation as a signed up/down counter plus a chip
// counter, the valid/clear handshake and the output register are this
// design's own.
//
// Interface / timing: one chip is taken on each rising edge with `in_valid`
// high.  The edge that takes the M-th chip of a block writes `sample` and
// raises `sample_valid` for one cycle; `sample` then holds until the next
// block completes, so one sample is produced per M accepted chips.  `clear`
// (priority over in_valid) discards a partial block.  rst_n is
// asynchronous, active low.
module clt_accumulator #(
  parameter int unsigned M  = grng_pkg::CLT_M,
  parameter int unsigned SW = grng_pkg::sum_width(M)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 in_valid,
  input  logic                 in_bit,
  output logic signed [SW-1:0] sample,
  output logic                 sample_valid
);

  localparam int unsigned CW = (M > 1) ? $clog2(M) : 1;

  logic [CW-1:0]        count;   // chips taken in the current block
  logic signed [SW-1:0] acc;     // partial sum of the current block
  logic signed [SW-1:0] acc_next;
  logic                 last;

  // psi(chip) = (-1)^chip
  assign acc_next = in_bit ? acc - SW'(1) : acc + SW'(1);
  assign last     = (count == CW'(M - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count        <= '0;
      acc          <= '0;
      sample       <= '0;
      sample_valid <= 1'b0;
    end else begin
      sample_valid <= 1'b0;
      if (clear) begin
        count <= '0;
        acc   <= '0;
      end else if (in_valid) begin
        if (last) begin
          sample       <= acc_next;
          sample_valid <= 1'b1;
          count        <= '0;
          acc          <= '0;
        end else begin
          count <= count + CW'(1);
          acc   <= acc_next;
        end
      end
    end
  end

  // A block sum of M values of +/-1 lies in [-M, M].
  a_sample_range: assert property (@(posedge clk) disable iff (!rst_n)
    sample_valid |-> (sample <= $signed(SW'(M)) && sample >= -$signed(SW'(M))))
    else $error("clt_accumulator: sample out of range");

endmodule
