// tb_power_management: self-checking test of the clock dividers.
//
// Drives System Clock and measures, in System Clock cycles, the high time,
// low time and period of the tracking clock for each Clock Request code
// (expected 2, 20, 200, 2000 with a 50 % duty), that a new request only
// takes effect at a falling edge of the tracking clock, after the high phase
// in progress has run its full length (no shortened pulse), and the period of
// the PWM clock for several PWM frequency settings (expected 2*(f+1)).
module tb_power_management;
  import mppt_pkg::*;

  logic     sys_clk = 1'b0;
  logic     nrst;
  logic [7:0] pwm_freq;
  clk_req_e clk_req;
  logic     clk_ts, clk_pwm;
  int       checks = 0, failures = 0;
  longint   cyc = 0;

  power_management dut (
    .sys_clk(sys_clk), .nrst(nrst), .pwm_freq(pwm_freq), .clk_req(clk_req),
    .clk_ts(clk_ts), .clk_pwm(clk_pwm));

  always #5 sys_clk = ~sys_clk;
  always @(posedge sys_clk) cyc <= cyc + 1;

  initial begin
    repeat (200_000) @(posedge sys_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic longint ratio_of(clk_req_e r);
    case (r)
      CLK_REQ_DIV2:   return 2;
      CLK_REQ_DIV20:  return 20;
      CLK_REQ_DIV200: return 200;
      default:        return 2000;
    endcase
  endfunction

  // Time stamps (sys_clk cycles) taken by the stimulus process itself.
  task automatic next_rise(output longint t);
    @(posedge clk_ts); t = cyc;
  endtask
  task automatic next_fall(output longint t);
    @(negedge clk_ts); t = cyc;
  endtask

  initial begin
    clk_req_e seq [6] = '{CLK_REQ_DIV20, CLK_REQ_DIV2000, CLK_REQ_DIV2, CLK_REQ_DIV200,
                          CLK_REQ_DIV20, CLK_REQ_DIV2};
    clk_req_e cur;
    longint   r0, r1, r2, f1, p0, p1, p2;
    nrst = 1'b1;  // a falling edge is needed to trigger the asynchronous reset
    #1;
    nrst     = 1'b0;
    pwm_freq = 8'd0;
    clk_req  = CLK_REQ_DIV2;
    repeat (3) @(negedge sys_clk);
    nrst = 1'b1;

    // Reset ratio is 2.
    cur = CLK_REQ_DIV2;
    foreach (seq[k]) begin
      repeat (2) @(posedge clk_ts);
      next_rise(r0);
      next_fall(f1);
      next_rise(r1);
      check($sformatf("period of clk_ts, ratio %0d", ratio_of(cur)), r1 - r0, ratio_of(cur));
      check($sformatf("high time of clk_ts, ratio %0d", ratio_of(cur)), f1 - r0, ratio_of(cur) / 2);
      // Change the request right after a rising edge of clk_ts, as the
      // tracking system does. The high phase in progress keeps the old
      // ratio; the new one applies from the falling edge, so the rise-to-rise
      // period in progress is old/2 + new/2 (never a shortened pulse).
      clk_req = seq[k];
      next_fall(f1);
      check("high phase in progress when the request changes", f1 - r1, ratio_of(cur) / 2);
      next_rise(r2);
      check("low phase after the request changes", r2 - f1, ratio_of(seq[k]) / 2);
      cur = seq[k];
      next_rise(r0);
      check($sformatf("first period after switch to ratio %0d", ratio_of(cur)), r0 - r2, ratio_of(cur));
      // Change the request right after a falling edge (in the low phase):
      // the low phase and the following high phase keep the old ratio.
      next_fall(f1);
      clk_req = seq[(k + 1) % 6];
      next_rise(r1);
      check("low phase in progress when the request changes", r1 - f1, ratio_of(cur) / 2);
      next_fall(f1);
      check("high phase after a request made in the low phase", f1 - r1, ratio_of(cur) / 2);
      next_rise(r2);
      check("low phase after the next falling edge", r2 - f1, ratio_of(seq[(k + 1) % 6]) / 2);
      // restore the request of this step for the next iteration
      clk_req = seq[k];
      next_fall(f1);
      next_rise(r2);
    end

    // PWM clock periods.
    for (int k = 0; k < 6; k++) begin
      logic [7:0] f;
      f = (k == 0) ? 8'd0 : (k == 1) ? 8'd255 : 8'($urandom_range(1, 254));
      pwm_freq = f;
      repeat (3) @(posedge clk_pwm);
      p0 = cyc;
      @(posedge clk_pwm); p1 = cyc;
      @(posedge clk_pwm); p2 = cyc;
      check($sformatf("clk_pwm period for pwm_freq=%0d", f), p1 - p0, 2 * (longint'(f) + 1));
      check($sformatf("clk_pwm period for pwm_freq=%0d (2)", f), p2 - p1, 2 * (longint'(f) + 1));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
