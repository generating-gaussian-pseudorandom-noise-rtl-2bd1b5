// tb_lfsr -- self-checking testbench for lfsr.
//
// Three instances are checked against the linear recurrence that the
// characteristic polynomial defines on the output sequence,
//     s(j+N) = XOR_{i : b_i = 1} s(j+i),   s(0..N-1) = seed bits e_1..e_N,
// computed here on a plain array of sequence values (not a shift register):
//   * the default LFSR, x^89 + x^38 + 1;
//   * x^89 + x^72 + x^55 + x^38 + 1;
//   * x^7 + x + 1, a small primitive polynomial, whose state must come back
//     to the seed after exactly 2^7 - 1 = 127 steps and not before.
// The enable is driven randomly so stalls are covered, a seed load in the
// middle of a run must restart the sequence, and load must win over en.
module tb_lfsr;

  localparam int unsigned N = 89;
  localparam int unsigned STEPS = 3000;

  logic clk = 1'b0;
  logic rst_n;
  logic en, load;
  logic [N-1:0] seed_a, seed_b;
  logic [N-1:0] state_a, state_b;
  logic out_a, out_b;
  logic [6:0] seed_c, state_c;
  logic out_c;

  int checks = 0;
  int failures = 0;

  localparam logic [N-1:0] TAPS_A = grng_pkg::F1_TAPS;
  localparam logic [N-1:0] TAPS_B = grng_pkg::F2_TAPS;
  localparam logic [6:0]   TAPS_C = 7'b000_0011;

  lfsr dut_a (.clk, .rst_n, .en, .load, .seed(seed_a), .state(state_a), .out_bit(out_a));
  lfsr #(.N(N), .TAPS(TAPS_B), .SEED(89'h5)) dut_b (
    .clk, .rst_n, .en, .load, .seed(seed_b), .state(state_b), .out_bit(out_b));
  lfsr #(.N(7), .TAPS(TAPS_C), .SEED(7'h1)) dut_c (
    .clk, .rst_n, .en, .load, .seed(seed_c), .state(state_c), .out_bit(out_c));

  always #5 clk = ~clk;

  // sequence values of the reference, index = steps since the last load
  bit seq_a [0:STEPS+N];
  bit seq_b [0:STEPS+N];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // fill the reference sequences from the seeds
  task automatic build_ref();
    for (int j = 0; j < N; j++) begin
      seq_a[j] = seed_a[j];
      seq_b[j] = seed_b[j];
    end
    for (int j = 0; j < STEPS; j++) begin
      bit fa = 1'b0, fb = 1'b0;
      for (int i = 0; i < N; i++) begin
        if (TAPS_A[i]) fa ^= seq_a[j+i];
        if (TAPS_B[i]) fb ^= seq_b[j+i];
      end
      seq_a[j+N] = fa;
      seq_b[j+N] = fb;
    end
  endtask

  // compare state (e_1..e_N = s(j)..s(j+N-1)) after j steps
  task automatic check_state(input int j);
    logic [N-1:0] ea, eb;
    for (int i = 0; i < N; i++) begin
      ea[i] = seq_a[j+i];
      eb[i] = seq_b[j+i];
    end
    check(state_a == ea, $sformatf("f1 state after %0d steps", j));
    check(state_b == eb, $sformatf("f2 state after %0d steps", j));
    check(out_a == seq_a[j], $sformatf("f1 out after %0d steps", j));
    check(out_b == seq_b[j], $sformatf("f2 out after %0d steps", j));
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    int steps;
    int stalls;
    rst_n = 1'b0;
    en = 1'b0;
    load = 1'b0;
    seed_a = 1; seed_b = 1; seed_c = 7'h1;
    repeat (2) @(posedge clk);
    #1;
    // reset values
    check(state_a == grng_pkg::F1_SEED, "f1 reset state");
    check(state_b == 89'h5, "f2 reset state");
    check(state_c == 7'h1, "x^7+x+1 reset state");
    rst_n = 1'b1;

    // two runs with different seeds; the second is loaded mid-stream
    for (int run = 0; run < 2; run++) begin
      seed_a = {$urandom, $urandom, $urandom};
      seed_b = {$urandom, $urandom, $urandom};
      if (seed_a == '0) seed_a = 1;
      if (seed_b == '0) seed_b = 1;
      build_ref();
      @(negedge clk);
      load = 1'b1;
      en   = 1'b1;     // load must take priority over en
      @(negedge clk);
      load = 1'b0;
      steps = 0;
      stalls = 0;
      check_state(0);
      while (steps < STEPS - 1) begin
        en = ($urandom_range(0, 3) != 0);
        @(negedge clk);
        if (en) steps++;
        else stalls++;
        check_state(steps);
      end
      en = 1'b0;
      check(stalls > 0, "stalls exercised");
    end

    // period of x^7 + x + 1: back to the seed after exactly 127 steps
    seed_c = 7'h4B;
    @(negedge clk);
    load = 1'b1;
    @(negedge clk);
    load = 1'b0;
    en = 1'b1;
    for (int k = 1; k <= 127; k++) begin
      @(negedge clk);
      if (k < 127) check(state_c != seed_c, $sformatf("x^7+x+1 early return at %0d", k));
      else         check(state_c == seed_c, "x^7+x+1 period 127");
    end
    en = 1'b0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
