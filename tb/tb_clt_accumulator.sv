// tb_clt_accumulator -- self-checking testbench for clt_accumulator.
//
// Two instances, the default M = 256 and M = 4, are fed the same random
// chip stream with a random in_valid (stalls) and occasional clears.  The
// testbench keeps its own count of accepted chips and of the +/-1 sum
// (chip 0 counts +1, chip 1 counts -1) and checks that:
//   * sample_valid pulses exactly on the cycle after the M-th chip of a
//     block was accepted, and at no other time (one sample per M chips);
//   * sample equals the independently computed block sum;
//   * clear discards the partial block;
//   * all-zero and all-one blocks give the extreme values +M and -M.
module tb_clt_accumulator;

  localparam int unsigned MA = 256;
  localparam int unsigned MB = 4;
  localparam int unsigned SWA = grng_pkg::sum_width(MA);
  localparam int unsigned SWB = grng_pkg::sum_width(MB);

  logic clk = 1'b0;
  logic rst_n;
  logic clear, in_valid, in_bit;
  logic signed [SWA-1:0] sample_a;
  logic signed [SWB-1:0] sample_b;
  logic valid_a, valid_b;

  int checks = 0;
  int failures = 0;

  clt_accumulator dut_a (
    .clk, .rst_n, .clear, .in_valid, .in_bit, .sample(sample_a), .sample_valid(valid_a));
  clt_accumulator #(.M(MB)) dut_b (
    .clk, .rst_n, .clear, .in_valid, .in_bit, .sample(sample_b), .sample_valid(valid_b));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // reference state, updated at each rising edge from the inputs
  int cnt_a = 0, sum_a = 0, cnt_b = 0, sum_b = 0;
  bit exp_valid_a = 0, exp_valid_b = 0;
  int exp_a = 0, exp_b = 0;
  int samples_a = 0, samples_b = 0, extremes = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      exp_valid_a <= 1'b0;
      exp_valid_b <= 1'b0;
      if (clear) begin
        cnt_a = 0; sum_a = 0; cnt_b = 0; sum_b = 0;
      end else if (in_valid) begin
        sum_a += in_bit ? -1 : 1;
        sum_b += in_bit ? -1 : 1;
        cnt_a++; cnt_b++;
        if (cnt_a == MA) begin
          exp_valid_a <= 1'b1; exp_a <= sum_a; cnt_a = 0; sum_a = 0;
        end
        if (cnt_b == MB) begin
          exp_valid_b <= 1'b1; exp_b <= sum_b; cnt_b = 0; sum_b = 0;
        end
      end
    end
  end

  // compare on the falling edge, after the registers have settled
  always @(negedge clk) begin
    if (rst_n) begin
      check(valid_a == exp_valid_a, "M=256 sample_valid timing");
      check(valid_b == exp_valid_b, "M=4 sample_valid timing");
      if (valid_a && exp_valid_a) begin
        samples_a++;
        check(int'(sample_a) == exp_a,
              $sformatf("M=256 sample %0d expected %0d", sample_a, exp_a));
        if (exp_a == MA || exp_a == -MA) extremes++;
      end
      if (valid_b && exp_valid_b) begin
        samples_b++;
        check(int'(sample_b) == exp_b,
              $sformatf("M=4 sample %0d expected %0d", sample_b, exp_b));
      end
    end
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    rst_n = 1'b0;
    clear = 1'b0;
    in_valid = 1'b0;
    in_bit = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    check(valid_a == 1'b0 && sample_a == '0, "reset values");
    rst_n = 1'b1;

    // all-zero block then all-one block: +M and -M
    for (int k = 0; k < 2 * int'(MA); k++) begin
      in_valid = 1'b1;
      in_bit = (k >= int'(MA));
      @(negedge clk);
    end
    // random stream with stalls and an occasional clear
    for (int k = 0; k < 20000; k++) begin
      in_valid = ($urandom_range(0, 4) != 0);
      in_bit   = $urandom_range(0, 1);
      clear    = ($urandom_range(0, 2999) == 0);
      @(negedge clk);
    end
    in_valid = 1'b0;
    clear = 1'b0;
    repeat (3) @(negedge clk);

    check(extremes == 2, "extreme block sums +M and -M seen");
    check(samples_a > 50, $sformatf("enough M=256 samples (%0d)", samples_a));
    check(samples_b > 3000, $sformatf("enough M=4 samples (%0d)", samples_b));
    $display("M=256 samples %0d, M=4 samples %0d", samples_a, samples_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
