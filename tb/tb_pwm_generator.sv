// tb_pwm_generator: self-checking test of the PWM output stage.
//
// Drives the PWM clock directly and counts, for each 256-clock PWM period,
// how many clocks the output is high. The expected count is the compare
// value that was present on cmp_in at the overflow that started the period
// (128 for the first period after reset), worked out from the stimulus the
// testbench applied, not from the block. It also checks that a compare value
// changed in the middle of a period does not alter that period, that the
// output rises at the start of each period (period = 256 clocks), and the
// two ends 0 and 255.
module tb_pwm_generator;
  logic       clk = 1'b0;
  logic       nrst;
  logic [7:0] cmp_in;
  logic       pwm_out;
  int         checks = 0, failures = 0;

  pwm_generator dut (.clk(clk), .nrst(nrst), .cmp_in(cmp_in), .pwm_out(pwm_out));

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Measure one period: 256 clocks, starting right after an overflow edge.
  // cmp_in may be changed at clock 'mid_at' of the period to 'mid_val'.
  task automatic run_period(input int expect_high, input int mid_at, input logic [7:0] mid_val);
    int high = 0;
    int first_low = -1;
    for (int c = 0; c < 256; c++) begin
      if (c == mid_at) cmp_in = mid_val;
      if (pwm_out) high++;
      else if (first_low < 0) first_low = c;
      @(negedge clk);
    end
    checks++;
    if (high != expect_high) begin
      failures++;
      $display("FAIL period high count %0d, expected %0d", high, expect_high);
    end
    checks++;
    if (!(expect_high == 0 || first_low == expect_high || (expect_high == 256 && first_low < 0))) begin
      failures++;
      $display("FAIL output not high at the start of the period (first low at %0d, expected %0d)",
               first_low, expect_high);
    end
  endtask

  initial begin
    logic [7:0] next_val;
    logic [7:0] cur;
    nrst = 1'b1;  // a falling edge is needed to trigger the asynchronous reset
    #1;
    nrst   = 1'b0;
    cmp_in = 8'd200;
    repeat (3) @(negedge clk);
    nrst = 1'b1;
    // After reset release at a negedge, the counter is 0 for the next high phase.
    // Period 1: reset value 128 even though cmp_in = 200 already.
    run_period(128, -1, 8'd0);
    // Period 2: 200 loaded at the overflow; change cmp_in mid-period.
    run_period(200, 100, 8'd30);
    // Period 3: the mid-period value.
    run_period(30, -1, 8'd0);
    // Ends and random values, each changed at a random point of the period.
    cur = 8'd30;
    for (int k = 0; k < 40; k++) begin
      case (k)
        0:       next_val = 8'd0;
        1:       next_val = 8'd255;
        2:       next_val = 8'd1;
        default: next_val = 8'($urandom_range(0, 255));
      endcase
      // cmp_in currently 'cur' was loaded at the last overflow; set the next
      // value somewhere inside this period, so the period still shows 'cur'.
      run_period(int'(cur), int'($urandom_range(0, 255)), next_val);
      cur = next_val;
    end
    run_period(int'(cur), -1, 8'd0);

    // Reset in mid-period returns to 50 %.
    repeat (37) @(negedge clk);
    nrst = 1'b0;
    @(negedge clk);
    nrst = 1'b1;
    run_period(128, -1, 8'd0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
