// tracking_system: Perturb and Observe tracker with averaging, variable step
// size and clock requests.
//
// Every rising edge of the tracking clock takes one sample of the 8-bit
// voltage and current inputs and forms the instant power P = V * I (16 bits).
// Samples are summed over a window of 1, 8, 32 or 64 clocks, chosen by the
// Averaging code at the first sample of the window; the window's sums are
// shifted right by log2(window) to give the averaged power P[n] and voltage
// V[n]. At the last sample of each window the tracker forms
//   dP[n] = P[n] - P[n-1]   and   dV[n] = V[n] - V[n-1]
// and decides the direction of the next duty-cycle step with the decision
// tree of the tracking flow chart:
//   power up   and voltage up       -> decrease the duty cycle
//   power up   and voltage not up   -> increase
//   power down and voltage up       -> increase
//   power down and voltage not up   -> decrease
// i.e. increase = (power up) XOR (voltage up). The flow chart prints its two
// tests as "dP[n] > dP[n-1]" and "dV[n] > dV[n-1]", while the text says three
// times that the actual values are compared with their previous values
// ("compares the actual power transfer value with the previous one"). With
// CMP_PREV_DIFF = 0 (default) "up" means dP[n] > 0 and dV[n] > 0, the text's
// reading and the classic Perturb and Observe rule for a boost converter
// (a larger duty cycle lowers the harvester voltage). With CMP_PREV_DIFF = 1
// "up" means dP[n] > dP[n-1] and dV[n] > dV[n-1], the flow chart taken
// literally; on a concave power curve that reading keeps asking for steps
// down, and in closed-loop simulation it settles well below the maximum
// power point.
//
// Variable step: the compare value moves by STEP_0..STEP_3 (8/4/2/1 by
// default) as |dP[n]| is at least TH_0, TH_1, TH_2 or below TH_2, and
// saturates at 0 and 255. The Clock Request uses the same bands: a large
// power change asks for the fastest tracking clock (2'b00), a change below
// TH_2 (the tracker has settled at the maximum power point) for the slowest
// (2'b11).
//
// Timing: a window of N samples takes N tracking clocks; pwm_cmp and clk_req
// change on the edge that takes the window's last sample and hold for the
// rest of the next window. The first window after reset only records P and
// V; the second also records dP and dV and sets clk_req; the duty cycle moves
// from the second window on (CMP_PREV_DIFF = 0) or the third (= 1), the first
// window whose decision inputs all exist. After reset pwm_cmp = 128 (50 % duty) and
// clk_req = 2'b00.
//
// Follows the paper: the five inputs (clock, reset, voltage, current,
// Averaging) and two outputs (PWM compare value, Clock Request), 8-bit
// samples, averaging of P and V over 1/8/32/64 samples, the decision tree,
// a step size that grows with the power change, and a clock request that
// falls to the slowest clock near the maximum power point. This design's own
// choices: the averaging code mapping, the thresholds and step sizes, the
// warm-up windows, saturation at the ends, the asynchronous reset, and the
// reading of the flow chart's tests described above.
module tracking_system
  import mppt_pkg::*;
#(
  parameter int unsigned TH_0   = 4096,  // |dP| >= TH_0: step STEP_0, request 00
  parameter int unsigned TH_1   = 512,   // |dP| >= TH_1: step STEP_1, request 01
  parameter int unsigned TH_2   = 64,    // |dP| >= TH_2: step STEP_2, request 10
  parameter int unsigned STEP_0 = 8,     //               otherwise STEP_3, 11
  parameter int unsigned STEP_1 = 4,
  parameter int unsigned STEP_2 = 2,
  parameter int unsigned STEP_3 = 1,
  parameter bit          CMP_PREV_DIFF = 1'b0  // 1: flow chart read literally
) (
  input  logic                clk,
  input  logic                nrst,
  input  logic [SAMPLE_W-1:0] voltage,
  input  logic [SAMPLE_W-1:0] current,
  input  avg_code_e           averaging,
  output logic [CMP_W-1:0]    pwm_cmp,
  output clk_req_e            clk_req
);

  localparam int unsigned PW = 2 * SAMPLE_W;   // instant power width
  localparam int unsigned AW = 6;              // log2 of the largest window

  // ------------------------------------------------------------------ state
  logic [AW-1:0]              samp_cnt_q;
  logic [2:0]                 shift_q;
  logic [PW+AW-1:0]           acc_p_q;
  logic [SAMPLE_W+AW-1:0]     acc_v_q;
  logic [PW-1:0]              p_prev_q;
  logic [SAMPLE_W-1:0]        v_prev_q;
  logic signed [PW:0]         dp_prev_q;
  logic signed [SAMPLE_W:0]   dv_prev_q;
  logic [1:0]                 hist_q;       // windows seen, saturates at 2

  // -------------------------------------------------------- sample and sums
  logic [2:0]                 cur_shift;
  logic                       last;
  logic [PW-1:0]              prod;
  logic [PW+AW-1:0]           sum_p;
  logic [SAMPLE_W+AW-1:0]     sum_v;
  logic [PW-1:0]              avg_p;
  logic [SAMPLE_W-1:0]        avg_v;

  always_comb begin
    cur_shift = (samp_cnt_q == '0) ? avg_shift(averaging) : shift_q;
    last      = ({1'b0, samp_cnt_q} == (7'(1) << cur_shift) - 7'd1);
    prod      = voltage * current;
    sum_p     = acc_p_q + (PW+AW)'(prod);
    sum_v     = acc_v_q + (SAMPLE_W+AW)'(voltage);
    avg_p     = PW'(sum_p >> cur_shift);
    avg_v     = SAMPLE_W'(sum_v >> cur_shift);
  end

  // --------------------------------------------------- differences, decision
  logic signed [PW:0]       dp;
  logic signed [SAMPLE_W:0] dv;
  logic [PW:0]              abs_dp;
  logic                     inc;
  logic [CMP_W:0]           step;
  clk_req_e                 req_next;
  logic [CMP_W:0]           cmp_up;
  logic [CMP_W-1:0]         cmp_next;

  always_comb begin
    dp     = $signed({1'b0, avg_p}) - $signed({1'b0, p_prev_q});
    dv     = $signed({1'b0, avg_v}) - $signed({1'b0, v_prev_q});
    abs_dp = dp[PW] ? (PW+1)'(-dp) : (PW+1)'(dp);

    if (abs_dp >= (PW+1)'(TH_0)) begin
      step = (CMP_W+1)'(STEP_0); req_next = CLK_REQ_DIV2;
    end else if (abs_dp >= (PW+1)'(TH_1)) begin
      step = (CMP_W+1)'(STEP_1); req_next = CLK_REQ_DIV20;
    end else if (abs_dp >= (PW+1)'(TH_2)) begin
      step = (CMP_W+1)'(STEP_2); req_next = CLK_REQ_DIV200;
    end else begin
      step = (CMP_W+1)'(STEP_3); req_next = CLK_REQ_DIV2000;
    end

    if (CMP_PREV_DIFF) inc = (dp > dp_prev_q) ^ (dv > dv_prev_q);
    else               inc = (dp > 0) ^ (dv > 0);
    cmp_up = {1'b0, pwm_cmp} + step;
    if (inc) cmp_next = cmp_up[CMP_W] ? '1 : cmp_up[CMP_W-1:0];
    else     cmp_next = ({1'b0, pwm_cmp} < step) ? '0 : CMP_W'({1'b0, pwm_cmp} - step);
  end

  // ------------------------------------------------------------- registers
  always_ff @(posedge clk or negedge nrst) begin
    if (!nrst) begin
      samp_cnt_q <= '0;
      shift_q    <= '0;
      acc_p_q    <= '0;
      acc_v_q    <= '0;
      p_prev_q   <= '0;
      v_prev_q   <= '0;
      dp_prev_q  <= '0;
      dv_prev_q  <= '0;
      hist_q     <= '0;
      pwm_cmp    <= CMP_RESET;
      clk_req    <= CLK_REQ_DIV2;
    end else begin
      if (samp_cnt_q == '0) shift_q <= cur_shift;
      if (last) begin
        samp_cnt_q <= '0;
        acc_p_q    <= '0;
        acc_v_q    <= '0;
        p_prev_q   <= avg_p;
        v_prev_q   <= avg_v;
        if (hist_q != 2'd0) begin
          dp_prev_q <= dp;
          dv_prev_q <= dv;
          clk_req   <= req_next;
        end
        if (hist_q == 2'd2 || (!CMP_PREV_DIFF && hist_q == 2'd1)) pwm_cmp <= cmp_next;
        if (hist_q != 2'd2) hist_q <= hist_q + 2'd1;
      end else begin
        samp_cnt_q <= samp_cnt_q + 1'b1;
        acc_p_q    <= sum_p;
        acc_v_q    <= sum_v;
      end
    end
  end

  // The outputs change only at the end of a window.
  a_hold_between_windows: assert property (
    @(posedge clk) disable iff (!nrst) !last |=> ($stable(pwm_cmp) && $stable(clk_req)));

endmodule
