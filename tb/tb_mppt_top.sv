// tb_mppt_top: end-to-end test of the MPPT with all parameters at their
// defaults, closed around a behavioural harvester + boost converter model.
//
// The PWM output drives the model, whose voltage and current feed the
// tracker, so the whole loop runs: power management dividing System Clock,
// Perturb and Observe decisions, clock requests and the PWM stage. The test
// runs several phases that move the maximum power point (source resistance
// 8, 5 and 12 ohm), change the Averaging code and the PWM frequency (0, 1).
//
// Checks:
//  * every PWM period (between two wraps of the PWM counter) lasts
//    512*(pwm_freq+1) System Clock cycles and is high for
//    cmp*2*(pwm_freq+1) cycles, cmp being the compare value the PWM stage
//    holds in that period;
//  * every tracking clock period (rising edge to rising edge) equals half
//    the ratio (2/20/200/2000) held at its start plus half the ratio held at
//    its end, as the request is applied at falling edges;
//  * in the phases that average 32 or 64 samples, the mean tracking
//    efficiency (harvested power over the maximum available) during the
//    last quarter of the phase is at least MIN_EFF (95 %); with 1 or 8
//    samples the model's ADC noise dominates and the figure is only printed;
//  * each mechanism happened at least once: every Clock Request code, every
//    step size, increase and decrease, decisions under every Averaging code,
//    a compare value kept waiting for the PWM counter overflow, and two PWM
//    frequencies. One that never happened counts as a failure.
module tb_mppt_top;
  import mppt_pkg::*;

  localparam real    MIN_EFF      = 0.95;

  logic       sys_clk = 1'b0;
  logic       nrst;
  logic [7:0] pwm_freq;
  logic [7:0] voltage, current;
  avg_code_e  averaging;
  logic       pwm_out;
  int         rs_ohm;
  real        duty;
  int         checks = 0, failures = 0;
  longint     cyc = 0;

  mppt_top dut (
    .sys_clk(sys_clk), .nrst(nrst), .pwm_freq(pwm_freq), .voltage(voltage),
    .current(current), .averaging(averaging), .pwm_out(pwm_out));

  harvester_model u_eh (
    .sys_clk(sys_clk), .pwm_in(pwm_out), .rs_ohm(rs_ohm),
    .voltage(voltage), .current(current), .duty(duty));

  always #5 sys_clk = ~sys_clk;
  always @(posedge sys_clk) cyc <= cyc + 1;

  initial begin
    #(10 * 100_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------- PWM periods
  // A period starts where the PWM counter wraps from 255 to 0. Between two
  // starts the output must be high for cmp*2*(pwm_freq+1) System Clock
  // cycles out of 512*(pwm_freq+1), cmp being the compare value held.
  logic [7:0] cnt_q = 8'd0;
  logic       per_valid = 1'b0;
  longint     per_high = 0, per_total = 0;
  int         per_cmp = 0;
  logic [7:0] per_f = 8'd0;
  int         per_checks = 0, per_fail = 0;
  int         cov_f[2];

  always @(posedge sys_clk) begin
    cnt_q <= dut.u_pwm.cnt_q;
    if (!nrst) begin
      per_valid <= 1'b0;
    end else if (dut.u_pwm.cnt_q == 8'd0 && cnt_q == 8'd255) begin
      if (per_valid && per_f == pwm_freq) begin
        per_checks++;
        if (pwm_freq < 2) cov_f[pwm_freq[0]]++;
        if (per_total != 512 * (longint'(pwm_freq) + 1) ||
            per_high != longint'(per_cmp) * 2 * (longint'(pwm_freq) + 1)) begin
          per_fail++;
          if (per_fail < 10)
            $display("FAIL PWM period: total %0d high %0d, expected %0d / %0d (cmp %0d)",
                     per_total, per_high, 512 * (longint'(pwm_freq) + 1),
                     longint'(per_cmp) * 2 * (longint'(pwm_freq) + 1), per_cmp);
        end
      end
      per_valid <= 1'b1;
      per_cmp   <= int'(dut.u_pwm.cmp_q);
      per_f     <= pwm_freq;
      per_high  <= pwm_out ? 1 : 0;
      per_total <= 1;
    end else begin
      per_high  <= per_high + (pwm_out ? 1 : 0);
      per_total <= per_total + 1;
    end
  end

  // ------------------------------------------------- tracking clock periods
  longint ts_last = -1;
  int     ts_checks = 0, ts_fail = 0;
  clk_req_e req_at_rise;
  always @(posedge dut.clk_ts) begin
    if (ts_last >= 0) begin
      longint exp_p;
      // the period just ended: high phase at the old ratio, low phase at
      // the ratio now held, so check the low-high halves separately
      ts_checks++;
      exp_p = ratio(req_at_rise) / 2 + ratio(dut.u_pm.req_q) / 2;
      if (cyc - ts_last != exp_p) begin
        ts_fail++;
        if (ts_fail < 10) $display("FAIL tracking clock period %0d, expected %0d", cyc - ts_last, exp_p);
      end
    end
    ts_last     = cyc;
    req_at_rise = dut.u_pm.req_q;
  end

  function automatic longint ratio(clk_req_e r);
    case (r)
      CLK_REQ_DIV2:   return 2;
      CLK_REQ_DIV20:  return 20;
      CLK_REQ_DIV200: return 200;
      default:        return 2000;
    endcase
  endfunction

  // ----------------------------------------------------------- mechanisms
  int cov_req[4], cov_step[9], cov_inc = 0, cov_dec = 0, cov_avg[4], cov_wait = 0;
  logic [7:0] cmp_seen = 8'd128;
  always @(posedge sys_clk) begin
    cov_req[dut.u_pm.req_q]++;
    if (dut.u_ts.pwm_cmp != dut.u_pwm.cmp_q) cov_wait++;
    if (dut.u_ts.pwm_cmp != cmp_seen) begin
      int d;
      d = int'(dut.u_ts.pwm_cmp) - int'(cmp_seen);
      if (d > 0) cov_inc++; else cov_dec++;
      if (d < 0) d = -d;
      if (d <= 8 && dut.u_ts.pwm_cmp != 8'd0 && dut.u_ts.pwm_cmp != 8'd255) cov_step[d]++;
      cov_avg[averaging]++;
      cmp_seen = dut.u_ts.pwm_cmp;
    end
  end

  // -------------------------------------------------------------- phases
  function automatic int mpp_of(int rs);
    // duty at which RL*(1-D)^2 = Rs, in compare counts
    return $rtoi(256.0 * (1.0 - $sqrt(real'(rs) / 40.0)) + 0.5);
  endfunction

  // Tracking efficiency at compare value cmp: the harvester power at that
  // duty cycle over the maximum, 4*Rs*Rin/(Rs+Rin)^2 with Rin = RL*(1-D)^2.
  function automatic real efficiency(int rs, real cmp);
    real rin;
    rin = 40.0 * (1.0 - cmp / 256.0) * (1.0 - cmp / 256.0);
    return 4.0 * real'(rs) * rin / ((real'(rs) + rin) * (real'(rs) + rin));
  endfunction

  task automatic run_phase(input string name, input int rs, input avg_code_e avg,
                           input logic [7:0] f, input longint cycles, input bit check_mpp);
    real    sum = 0.0, eff = 0.0;
    longint n   = 0;
    int     mean, mpp;
    rs_ohm    = rs;
    averaging = avg;
    pwm_freq  = f;
    for (longint c = 0; c < cycles; c++) begin
      @(posedge sys_clk);
      if (c >= cycles * 3 / 4) begin
        sum += real'(dut.u_pwm.cmp_q);
        eff += efficiency(rs, real'(dut.u_pwm.cmp_q));
        n++;
      end
    end
    mean = $rtoi(sum / real'(n) + 0.5);
    eff  = eff / real'(n);
    mpp  = mpp_of(rs);
    $display("phase %s: mean compare value %0d, maximum power point %0d, tracking efficiency %0.1f %% (%s)",
             name, mean, mpp, 100.0 * eff, check_mpp ? "checked" : "not checked");
    if (check_mpp) begin
      checks++;
      if (eff < MIN_EFF) begin
        failures++;
        $display("FAIL phase %s: tracking efficiency below %0.1f %%", name, 100.0 * MIN_EFF);
      end
    end
  endtask

  initial begin
    nrst = 1'b1;  // a falling edge is needed to trigger the asynchronous reset
    #1;
    nrst      = 1'b0;
    pwm_freq  = 8'd0;
    averaging = AVG_8;
    rs_ohm    = 10;
    repeat (5) @(negedge sys_clk);
    nrst = 1'b1;

    run_phase("Rs=8 avg32",   8, AVG_32, 8'd0, 20_000_000, 1'b1);
    run_phase("Rs=5 avg64",   5, AVG_64, 8'd0, 30_000_000, 1'b1);
    run_phase("Rs=12 avg32", 12, AVG_32, 8'd1, 30_000_000, 1'b1);
    run_phase("Rs=8 avg8",    8, AVG_8,  8'd0,  4_000_000, 1'b0);
    run_phase("Rs=8 avg1",    8, AVG_1,  8'd0,  2_000_000, 1'b0);

    checks += 2;
    if (per_checks == 0 || per_fail != 0) failures++;
    if (ts_checks == 0 || ts_fail != 0)   failures++;
    $display("PWM periods checked %0d (fail %0d), tracking clock periods %0d (fail %0d)",
             per_checks, per_fail, ts_checks, ts_fail);
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (cov_req[k] == 0) begin failures++; $display("FAIL clock request %0d never held", k); end
      checks++;
      if (cov_avg[k] == 0) begin failures++; $display("FAIL no decision under averaging code %0d", k); end
    end
    foreach (cov_step[d]) if (d == 1 || d == 2 || d == 4 || d == 8) begin
      checks++;
      if (cov_step[d] == 0) begin failures++; $display("FAIL step %0d never taken", d); end
    end
    checks += 5;
    if (cov_f[0] == 0) begin failures++; $display("FAIL no PWM period at pwm_freq 0"); end
    if (cov_f[1] == 0) begin failures++; $display("FAIL no PWM period at pwm_freq 1"); end
    if (cov_inc == 0)  begin failures++; $display("FAIL duty never increased"); end
    if (cov_dec == 0)  begin failures++; $display("FAIL duty never decreased"); end
    if (cov_wait == 0) begin failures++; $display("FAIL compare value never waited for overflow"); end
    $display("mechanisms: requests %0d/%0d/%0d/%0d cycles, steps 1:%0d 2:%0d 4:%0d 8:%0d, inc %0d dec %0d, avg %0d/%0d/%0d/%0d, waiting cycles %0d",
             cov_req[0], cov_req[1], cov_req[2], cov_req[3], cov_step[1], cov_step[2], cov_step[4],
             cov_step[8], cov_inc, cov_dec, cov_avg[0], cov_avg[1], cov_avg[2], cov_avg[3], cov_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
