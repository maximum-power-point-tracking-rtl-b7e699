// tb_tracking_system: self-checking test of the Perturb and Observe tracker.
//
// Two instances run side by side: one with the default reading of the
// decision tests (power and voltage compared with the previous window), one
// with CMP_PREV_DIFF = 1 (differences compared with the previous
// differences). Drives the tracking clock directly and feeds windows of voltage/current
// samples with a random Averaging code per window (changed again in the
// middle of some windows, which must not matter: the code is taken at the
// first sample). A reference model written here with plain integers forms
// the averaged power and voltage, the differences, the decision of the
// tracking flow chart, the variable step with saturation and the Clock
// Request. Before every clock edge the block's outputs must equal the model's
// held values, and right after the last sample of a window they must equal
// the new ones: this checks the values and the latency of one decision per
// window of 1, 8, 32 or 64 clocks. Coverage of each step size, both
// directions, each request code, each averaging code and saturation at both
// ends is counted; one that never occurred counts as a failure.
module tb_tracking_system;
  import mppt_pkg::*;

  localparam int TH0 = 4096, TH1 = 512, TH2 = 64;

  logic       clk = 1'b0;
  logic       nrst;
  logic [7:0] voltage, current;
  avg_code_e  averaging;
  logic [7:0] pwm_cmp [2];
  clk_req_e   clk_req [2];
  int         checks = 0, failures = 0;

  // dut0: default reading (power / voltage compared with the previous
  // window); dut1: the flow chart's tests taken literally.
  tracking_system dut0 (
    .clk(clk), .nrst(nrst), .voltage(voltage), .current(current),
    .averaging(averaging), .pwm_cmp(pwm_cmp[0]), .clk_req(clk_req[0]));
  tracking_system #(.CMP_PREV_DIFF(1'b1)) dut1 (
    .clk(clk), .nrst(nrst), .voltage(voltage), .current(current),
    .averaging(averaging), .pwm_cmp(pwm_cmp[1]), .clk_req(clk_req[1]));

  always #5 clk = ~clk;

  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model state
  // reference model state, one set per reading
  int m_cmp[2], m_req[2], m_hist[2], p_prev[2], v_prev[2], dp_prev[2], dv_prev[2];
  // coverage
  int cov_step[4], cov_inc, cov_dec, cov_req[4], cov_avg[4], cov_sat_hi, cov_sat_lo;

  task automatic check_outputs(input string when);
    for (int m = 0; m < 2; m++) begin
      checks++;
      if (pwm_cmp[m] != 8'(m_cmp[m]) || clk_req[m] != clk_req_e'(m_req[m])) begin
        failures++;
        $display("FAIL dut%0d %s: pwm_cmp=%0d clk_req=%0d, expected %0d / %0d",
                 m, when, pwm_cmp[m], clk_req[m], m_cmp[m], m_req[m]);
      end
    end
  endtask

  function automatic int clip(int x);
    return (x < 0) ? 0 : (x > 255) ? 255 : x;
  endfunction

  initial begin
    int v_base, i_base, n, code, sum_p, sum_v, avg_p, avg_v, dp, dv, adp, stp, band, v, i;
    nrst = 1'b1;  // a falling edge is needed to trigger the asynchronous reset
    #1;
    nrst      = 1'b0;
    voltage   = '0;
    current   = '0;
    averaging = AVG_1;
    for (int m = 0; m < 2; m++) begin
      m_cmp[m] = 128; m_req[m] = 0; m_hist[m] = 0;
      p_prev[m] = 0; v_prev[m] = 0; dp_prev[m] = 0; dv_prev[m] = 0;
    end
    repeat (3) @(negedge clk);
    nrst = 1'b1;
    check_outputs("after reset");
    v_base = 120; i_base = 100;

    for (int w = 0; w < 600; w++) begin
      // window size: mostly short windows, all four codes used
      code = (w % 10 == 9) ? int'($urandom_range(2, 3)) : int'($urandom_range(0, 1));
      n    = (code == 0) ? 1 : (code == 1) ? 8 : (code == 2) ? 32 : 64;
      cov_avg[code]++;
      // operating point of this window: big jump, medium, small or none
      case ($urandom_range(0, 4))
        0: begin v_base = $urandom_range(0, 255); i_base = $urandom_range(0, 255); end
        1: begin v_base = clip(v_base + int'($urandom_range(0, 40)) - 20);
                 i_base = clip(i_base + int'($urandom_range(0, 40)) - 20); end
        2: begin v_base = clip(v_base + int'($urandom_range(0, 4)) - 2); end
        3: begin v_base = clip(v_base + 3); i_base = clip(i_base + 2); end
        default: ;
      endcase
      // long runs that push the duty cycle to its ends
      if (w >= 200 && w < 260) begin v_base = 200; i_base = (w % 2) ? 200 : 10; end
      // power and voltage alternating in opposite phase: always "increase"
      if (w >= 300 && w < 360) begin v_base = (w % 2) ? 100 : 200; i_base = (w % 2) ? 200 : 10; end
      sum_p = 0; sum_v = 0;
      for (int s = 0; s < n; s++) begin
        if (s == 0) averaging = avg_code_e'(code);
        else if (s == 1) averaging = avg_code_e'($urandom_range(0, 3));
        v = clip(v_base + int'($urandom_range(0, 4)) - 2);
        i = clip(i_base + int'($urandom_range(0, 4)) - 2);
        voltage = 8'(v); current = 8'(i);
        sum_p += v * i; sum_v += v;
        check_outputs("held during a window");
        @(posedge clk);
        if (s != n - 1) @(negedge clk);
      end
      // model update at the window's last sample
      for (int m = 0; m < 2; m++) begin
        logic pu, vu;
        avg_p = sum_p / n;          // n is a power of two, sums are positive
        avg_v = sum_v / n;
        dp = avg_p - p_prev[m];
        dv = avg_v - v_prev[m];
        adp = (dp < 0) ? -dp : dp;
        band = (adp >= TH0) ? 0 : (adp >= TH1) ? 1 : (adp >= TH2) ? 2 : 3;
        stp = 8 >> band;
        if (m_hist[m] >= 1) m_req[m] = band;
        if (m == 0 && m_hist[m] >= 1) cov_req[band]++;
        pu = (m == 0) ? (dp > 0) : (dp > dp_prev[m]);
        vu = (m == 0) ? (dv > 0) : (dv > dv_prev[m]);
        if (m_hist[m] == 2 || (m == 0 && m_hist[m] == 1)) begin
          // tracking flow chart
          if (pu) begin
            if (vu) m_cmp[m] -= stp; else m_cmp[m] += stp;
          end else begin
            if (vu) m_cmp[m] += stp; else m_cmp[m] -= stp;
          end
          if (pu != vu) cov_inc++; else cov_dec++;
          cov_step[band]++;
          if (m_cmp[m] > 255) begin m_cmp[m] = 255; cov_sat_hi++; end
          if (m_cmp[m] < 0)   begin m_cmp[m] = 0;   cov_sat_lo++; end
        end
        // the differences of this window become the previous ones
        if (m_hist[m] >= 1) begin dp_prev[m] = dp; dv_prev[m] = dv; end
        if (m_hist[m] < 2) m_hist[m]++;
        p_prev[m] = avg_p; v_prev[m] = avg_v;
      end
      #1 check_outputs("right after the last sample of a window");
      @(negedge clk);
    end

    for (int k = 0; k < 4; k++) begin
      checks++;
      if (cov_step[k] == 0) begin failures++; $display("FAIL step size %0d never used", 8 >> k); end
      checks++;
      if (cov_req[k] == 0) begin failures++; $display("FAIL clock request %0d never issued", k); end
      checks++;
      if (cov_avg[k] == 0) begin failures++; $display("FAIL averaging code %0d never used", k); end
    end
    checks += 4;
    if (cov_inc == 0)    begin failures++; $display("FAIL no increase"); end
    if (cov_dec == 0)    begin failures++; $display("FAIL no decrease"); end
    if (cov_sat_hi == 0) begin failures++; $display("FAIL never saturated at 255"); end
    if (cov_sat_lo == 0) begin failures++; $display("FAIL never saturated at 0"); end
    $display("coverage: steps %0d/%0d/%0d/%0d requests %0d/%0d/%0d/%0d inc %0d dec %0d sat %0d/%0d",
             cov_step[0], cov_step[1], cov_step[2], cov_step[3],
             cov_req[0], cov_req[1], cov_req[2], cov_req[3], cov_inc, cov_dec, cov_sat_hi, cov_sat_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
