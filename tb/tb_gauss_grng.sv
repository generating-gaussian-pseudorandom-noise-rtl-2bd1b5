// tb_gauss_grng -- end-to-end testbench of the Gaussian noise generator.
//
// Runs the top level with every parameter at its default (two degree-89
// LFSRs, M = 256) through complete operations and checks it against a
// reference model kept here: two m-sequences built from their recurrences
//     s1(j+89) = s1(j) ^ s1(j+38)
//     s2(j+89) = s2(j) ^ s2(j+38) ^ s2(j+55) ^ s2(j+72)
// starting from the seed bits, the chip s1 ^ s2, the +/-1 block sums of 256
// chips.  Checked: every chip, every sample value, the timing of every
// sample_valid pulse, and the rate of one sample per 256 enabled cycles.
// Mechanisms exercised and counted (each must occur): stalls (en low),
// seed loads that cut a block short, samples at full rate and under stalls.
// A loose sanity check of mean and variance of S = sample / 16 closes it.
module tb_gauss_grng;

  localparam int unsigned N  = grng_pkg::LFSR_N;
  localparam int unsigned M  = grng_pkg::CLT_M;
  localparam int unsigned SW = grng_pkg::sum_width(M);

  logic clk = 1'b0;
  logic rst_n;
  logic en, load;
  logic [N-1:0] seed1, seed2;
  logic chip;
  logic signed [SW-1:0] sample;
  logic sample_valid;

  int checks = 0;
  int failures = 0;

  gauss_grng dut (.clk, .rst_n, .en, .load, .seed1, .seed2, .chip, .sample, .sample_valid);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- reference model ----------------
  bit h1 [$];   // last N values of each m-sequence, h[0] oldest
  bit h2 [$];

  function automatic void ref_load(input logic [N-1:0] a, input logic [N-1:0] b);
    h1.delete();
    h2.delete();
    for (int j = 0; j < N; j++) begin
      h1.push_back(a[j]);
      h2.push_back(b[j]);
    end
  endfunction

  function automatic bit ref_chip();
    return h1[0] ^ h2[0];
  endfunction

  function automatic void ref_step();
    bit n1 = h1[0] ^ h1[38];
    bit n2 = h2[0] ^ h2[38] ^ h2[55] ^ h2[72];
    void'(h1.pop_front());
    void'(h2.pop_front());
    h1.push_back(n1);
    h2.push_back(n2);
  endfunction

  int  blk_cnt = 0, blk_sum = 0;
  bit  exp_valid = 1'b0;
  int  exp_sample = 0;
  longint cyc = 0, last_valid_cyc = -1;

  // counters of mechanisms and results
  int n_samples = 0, n_stalls = 0, n_cut_blocks = 0, n_full_rate = 0;
  real s_sum = 0.0, s_sq = 0.0;
  bit  full_rate_phase = 1'b0;

  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      exp_valid <= 1'b0;
      if (load) begin
        if (blk_cnt != 0) n_cut_blocks++;
        ref_load(seed1, seed2);
        blk_cnt = 0;
        blk_sum = 0;
      end else if (en) begin
        blk_sum += ref_chip() ? -1 : 1;
        blk_cnt++;
        ref_step();
        if (blk_cnt == int'(M)) begin
          exp_valid  <= 1'b1;
          exp_sample <= blk_sum;
          blk_cnt = 0;
          blk_sum = 0;
        end
      end else begin
        n_stalls++;
      end
    end
  end

  always @(negedge clk) begin
    if (rst_n) begin
      if (en && !load) check(chip == ref_chip(), "chip");
      check(sample_valid == exp_valid, $sformatf("sample_valid timing at cycle %0d", cyc));
      if (sample_valid && exp_valid) begin
        real s;
        check(int'(sample) == exp_sample,
              $sformatf("sample %0d expected %0d", sample, exp_sample));
        if (full_rate_phase && last_valid_cyc >= 0) begin
          check(cyc - last_valid_cyc == longint'(M),
                $sformatf("rate: %0d cycles between samples", cyc - last_valid_cyc));
          n_full_rate++;
        end
        last_valid_cyc = cyc;
        n_samples++;
        s = real'(sample) / 16.0;
        s_sum += s;
        s_sq  += s * s;
      end
    end
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_load(input logic [N-1:0] a, input logic [N-1:0] b);
    seed1 = a;
    seed2 = b;
    load = 1'b1;
    @(negedge clk);
    load = 1'b0;
  endtask

  initial begin : stim
    real mean, var_s;
    rst_n = 1'b0;
    en = 1'b0;
    load = 1'b0;
    seed1 = 1;
    seed2 = 1;
    repeat (2) @(posedge clk);
    @(negedge clk);
    check(sample_valid == 1'b0, "reset: no sample");
    rst_n = 1'b1;

    // operation 1: seed, run 300 samples at full rate
    do_load({$urandom, $urandom, $urandom} | 89'h1, {$urandom, $urandom, $urandom} | 89'h1);
    full_rate_phase = 1'b1;
    en = 1'b1;
    repeat (300 * M) @(negedge clk);
    en = 1'b0;
    full_rate_phase = 1'b0;
    last_valid_cyc = -1;
    @(negedge clk);

    // operation 2: random stalls, reseed in the middle of a block
    do_load({$urandom, $urandom, $urandom} | 89'h1, {$urandom, $urandom, $urandom} | 89'h1);
    for (int k = 0; k < 120000; k++) begin
      en = ($urandom_range(0, 4) != 0);
      @(negedge clk);
      if (k == 40000 || k == 80000) begin
        en = 1'b0;
        do_load({$urandom, $urandom, $urandom} | 89'h1, {$urandom, $urandom, $urandom} | 89'h1);
      end
    end
    en = 1'b0;
    repeat (3) @(negedge clk);

    mean  = s_sum / n_samples;
    var_s = s_sq / n_samples - mean * mean;
    $display("samples %0d (full rate %0d), stalls %0d, blocks cut by reseed %0d",
             n_samples, n_full_rate, n_stalls, n_cut_blocks);
    $display("mean %f variance %f", mean, var_s);
    check(n_full_rate >= 290, "full-rate samples happened");
    check(n_stalls > 0, "stalls happened");
    check(n_cut_blocks >= 2, "reseed cut a block short");
    check(n_samples > 500, "enough samples");
    check(mean > -0.2 && mean < 0.2, "mean near 0");
    check(var_s > 0.8 && var_s < 1.2, "variance near 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
