// tb_gold_code_gen -- self-checking testbench for gold_code_gen.
//
// The default generator (f1 = x^89 + x^38 + 1, f2 = x^89 + x^72 + x^55 +
// x^38 + 1) is seeded with random states and run with random stalls.  The
// chip stream is checked two independent ways:
//   1. against two m-sequences computed here from their recurrences
//      s1(j+89) = s1(j) ^ s1(j+38),
//      s2(j+89) = s2(j) ^ s2(j+38) ^ s2(j+55) ^ s2(j+72),
//      whose first 89 values are the seed bits, XOR-ed chip by chip;
//   2. against the recurrence of the product polynomial f1(x) * f2(x)
//      (degree 178), which every sum of an f1-sequence and an f2-sequence
//      satisfies; the product is computed here over GF(2).
// A second seed load mid-run restarts the code.
module tb_gold_code_gen;

  localparam int unsigned N = 89;
  localparam int unsigned STEPS = 3000;

  logic clk = 1'b0;
  logic rst_n;
  logic en, load;
  logic [N-1:0] seed1, seed2;
  logic chip;

  int checks = 0;
  int failures = 0;

  gold_code_gen dut (.clk, .rst_n, .en, .load, .seed1, .seed2, .chip);

  always #5 clk = ~clk;

  bit s1 [0:STEPS+N];
  bit s2 [0:STEPS+N];
  bit got [0:STEPS];
  bit prod [0:2*N];   // coefficients of f1(x) * f2(x)

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic build_ref();
    for (int j = 0; j < N; j++) begin
      s1[j] = seed1[j];
      s2[j] = seed2[j];
    end
    for (int j = 0; j < STEPS; j++) begin
      s1[j+N] = s1[j] ^ s1[j+38];
      s2[j+N] = s2[j] ^ s2[j+38] ^ s2[j+55] ^ s2[j+72];
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    bit f1 [0:N];
    bit f2 [0:N];
    int steps;
    int stalls;
    // f1, f2 as full coefficient vectors and their product
    foreach (f1[i]) begin f1[i] = 0; f2[i] = 0; end
    f1[0] = 1; f1[38] = 1; f1[89] = 1;
    f2[0] = 1; f2[38] = 1; f2[55] = 1; f2[72] = 1; f2[89] = 1;
    foreach (prod[i]) prod[i] = 0;
    for (int i = 0; i <= N; i++)
      for (int k = 0; k <= N; k++)
        prod[i+k] ^= f1[i] & f2[k];

    rst_n = 1'b0;
    en = 1'b0;
    load = 1'b0;
    seed1 = 1;
    seed2 = 1;
    repeat (2) @(posedge clk);
    @(negedge clk);
    check(chip == 1'b0, "reset: both LFSRs emit 1, chip 0");
    rst_n = 1'b1;

    for (int run = 0; run < 2; run++) begin
      int bad_prod = 0;
      seed1 = {$urandom, $urandom, $urandom};
      seed2 = {$urandom, $urandom, $urandom};
      if (seed1 == '0) seed1 = 1;
      if (seed2 == '0) seed2 = 1;
      build_ref();
      @(negedge clk);
      load = 1'b1;
      @(negedge clk);
      load = 1'b0;
      steps = 0;
      stalls = 0;
      while (steps < STEPS) begin
        en = ($urandom_range(0, 3) != 0);
        if (en) begin
          got[steps] = chip;
          check(chip == (s1[steps] ^ s2[steps]), $sformatf("chip %0d", steps));
          if (steps < N)
            check(chip == (seed1[steps] ^ seed2[steps]), $sformatf("seed chip %0d", steps));
          steps++;
        end else begin
          stalls++;
        end
        @(negedge clk);
      end
      en = 1'b0;
      check(stalls > 0, "stalls exercised");
      // recurrence of f1*f2 on the observed chips
      for (int j = 0; j + 2 * N < STEPS; j++) begin
        bit acc = 1'b0;
        for (int i = 0; i <= 2 * N; i++)
          if (prod[i]) acc ^= got[j+i];
        if (acc != 1'b0) bad_prod++;
      end
      check(bad_prod == 0, $sformatf("f1*f2 recurrence violated %0d times", bad_prod));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
