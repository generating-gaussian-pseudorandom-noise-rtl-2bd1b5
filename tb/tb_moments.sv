// tb_moments -- statistical workload: moments and triple product moments.
//
// Generates T = 100000 samples (M = 256 chips each, 25.6 million chips)
// from two generators fed from the same block-sum accumulator:
//   * the Gold code generator of the design (gauss_grng, defaults), and
//   * for comparison, a single m-sequence LFSR with x^89 + x^38 + 1
//     (lfsr + clt_accumulator), the weaker source the Gold code replaces.
// For each it computes the raw moments (1/T) sum S(i)^k, k = 1..4, of
// S(i) = sample / 16, and the triple product moments
//     |(1/T') sum_i S(i) S(i+d1) S(i+d2)|,  0 <= d1, d2 < 100,
// over a 100 x 100 window of shifts.  Expected behaviour:
//   * Gold code: moments close to the standard normal 0, 1, 0, 3 and no
//     peak in the triple product window (statistical noise only, a few
//     times 1/sqrt(T) = 0.003);
//   * m-sequence: a large third moment.  The trinomial gives
//     s(j) s(j+38) s(j+89) = +1 for every j, and its square
//     x^178 + x^76 + 1 likewise; inside a block of 256 these give
//     6 * (167 + 78) ordered triples of constant product, so
//     E[S^3] ~ 1470 / 256^1.5 = 0.359, and the triple product window peaks
//     far above the Gold code's.
// The two tails of the histogram (|S| > 2) are also counted: they must be
// balanced for the Gold code and lopsided for the m-sequence.
// Tolerances are about five standard errors of each estimate at T = 1e5.
module tb_moments;

  localparam int unsigned N  = grng_pkg::LFSR_N;
  localparam int unsigned M  = grng_pkg::CLT_M;
  localparam int unsigned SW = grng_pkg::sum_width(M);
  localparam int T   = 100000;
  localparam int WIN = 100;

  logic clk = 1'b0;
  logic rst_n;
  logic en, load;
  logic [N-1:0] seed1, seed2;
  logic chip_g, chip_m;
  logic signed [SW-1:0] sample_g, sample_m;
  logic valid_g, valid_m;

  int checks = 0;
  int failures = 0;

  gauss_grng dut_gold (.clk, .rst_n, .en, .load, .seed1, .seed2, .chip(chip_g),
                       .sample(sample_g), .sample_valid(valid_g));

  lfsr u_mseq (.clk, .rst_n, .en, .load, .seed(seed1), .state(), .out_bit(chip_m));
  clt_accumulator u_mclt (.clk, .rst_n, .clear(load), .in_valid(en), .in_bit(chip_m),
                          .sample(sample_m), .sample_valid(valid_m));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int xg [T];   // integer block sums, S = x / 16
  int xm [T];
  int ng = 0, nm = 0;

  always @(negedge clk) begin
    if (valid_g && ng < T) begin xg[ng] = int'(sample_g); ng++; end
    if (valid_m && nm < T) begin xm[nm] = int'(sample_m); nm++; end
  end

  function automatic void moments(input int x [T], output real mo [4]);
    real s1 = 0, s2 = 0, s3 = 0, s4 = 0;
    for (int i = 0; i < T; i++) begin
      real v = real'(x[i]) / 16.0;
      s1 += v; s2 += v * v; s3 += v * v * v; s4 += v * v * v * v;
    end
    mo[0] = s1 / T; mo[1] = s2 / T; mo[2] = s3 / T; mo[3] = s4 / T;
  endfunction

  // samples with S > +2 and with S < -2 (the two tails of the histogram)
  function automatic void tails(input int x [T], output int hi, output int lo);
    hi = 0;
    lo = 0;
    for (int i = 0; i < T; i++) begin
      if (x[i] > 32) hi++;
      if (x[i] < -32) lo++;
    end
  endfunction

  // max over the window of |mean of S(i)S(i+d1)S(i+d2)|, by symmetry d1 <= d2
  function automatic real triple_max(input int x [T]);
    int p [T];
    real best = 0.0;
    int L = T - WIN;
    for (int d1 = 0; d1 < WIN; d1++) begin
      for (int i = 0; i < L; i++) p[i] = x[i] * x[i+d1];
      for (int d2 = d1; d2 < WIN; d2++) begin
        longint acc = 0;
        real v;
        for (int i = 0; i < L; i++) acc += longint'(p[i]) * x[i+d2];
        v = real'(acc) / 4096.0 / L;
        if (v < 0) v = -v;
        if (v > best) best = v;
      end
    end
    return best;
  endfunction

  initial begin : watchdog
    repeat (T * M + 100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    real mg [4];
    real mm [4];
    real tg, tm;
    int hg, lg, hm, lm;
    rst_n = 1'b0;
    en = 1'b0;
    load = 1'b0;
    seed1 = {$urandom, $urandom, $urandom} | 89'h1;
    seed2 = {$urandom, $urandom, $urandom} | 89'h1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    load = 1'b1;
    @(negedge clk);
    load = 1'b0;
    en = 1'b1;
    wait (ng == T && nm == T);
    en = 1'b0;

    moments(xg, mg);
    moments(xm, mm);
    $display("order  Gold S(i)   m-sequence S(i)");
    for (int k = 0; k < 4; k++) $display("  %0d    %8.4f    %8.4f", k + 1, mg[k], mm[k]);
    check(mg[0] > -0.015 && mg[0] < 0.015, "Gold: first moment near 0");
    check(mg[1] > 0.975 && mg[1] < 1.025, "Gold: second moment near 1");
    check(mg[2] > -0.06 && mg[2] < 0.06, "Gold: third moment near 0");
    check(mg[3] > 2.85 && mg[3] < 3.15, "Gold: fourth moment near 3");
    check(mm[2] > 0.30 && mm[2] < 0.42, "m-sequence: third moment near 0.36");

    // histogram tails: symmetric for the Gold code, the m-sequence's upper
    // tail heavier (about 1900 samples expected per tail, sd about 45)
    tails(xg, hg, lg);
    tails(xm, hm, lm);
    $display("samples beyond +2 / below -2: Gold %0d / %0d, m-sequence %0d / %0d",
             hg, lg, hm, lm);
    check(hg - lg < 350 && lg - hg < 350, "Gold: symmetric tails");
    check(hm - lm > 350, "m-sequence: asymmetric tails");

    tg = triple_max(xg);
    tm = triple_max(xm);
    $display("max |triple product moment| over %0dx%0d shifts: Gold %f, m-sequence %f",
             WIN, WIN, tg, tm);
    check(tg < 0.03, "Gold: no peak in the triple product moments");
    check(tm > 0.2, "m-sequence: triple product moments peak");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
