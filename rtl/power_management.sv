// power_management: clock distribution of the MPPT.
//
// Two counter-based dividers run on the rising edge of System Clock.
//
// Tracking clock (clk_ts): a counter toggles clk_ts every HALF sys_clk edges,
// so clk_ts has a 50 % duty and a period of 2*HALF sys_clk cycles. HALF is
// 1, 10, 100 or 1000 for the Clock Request codes 00, 01, 10, 11, giving the
// division ratios 2, 20, 200 and 2000 of the paper. The request is sampled
// only when clk_ts falls, at the end of a full low-high period counted from
// reset, so a change of ratio never produces a short pulse: the high phase in
// progress keeps the old ratio and the next low phase has the new one. The
// tracking system launches its request on a rising edge of clk_ts, half a
// tracking period before it is sampled here.
// After reset clk_ts is low and the ratio is 2 (the fastest tracking clock).
//
// PWM clock (clk_pwm): a second counter toggles clk_pwm once it has counted
// pwm_freq+1 sys_clk edges, so clk_pwm has a period of 2*(pwm_freq+1)
// sys_clk cycles; pwm_freq = 0 gives sys_clk/2. The comparison is ">=" so a
// smaller pwm_freq written while the counter is above it takes effect on the
// next edge instead of after a counter wrap.
//
// Follows the paper: the four tracking ratios 2/20/200/2000, the 2-bit
// request with 00 = fastest ... 11 = slowest, dividers built from counters
// clocked on the rising edge, and a static 8-bit PWM frequency input. This
// design's own choices: the way pwm_freq maps to a divider ratio, sampling the
// request at the period boundary, and the asynchronous active-low reset.
// The "response" of the request/response scheme is the tracking clock itself;
// the paper shows no separate response signal.
//
// Both output clocks are registered (flip-flop outputs), so they are glitch
// free. They are generated clocks; in a physical design they are declared as
// such for timing analysis.
module power_management
  import mppt_pkg::*;
#(
  parameter int unsigned TS_RATIO_0 = 2,     // Clock Request 2'b00
  parameter int unsigned TS_RATIO_1 = 20,    // Clock Request 2'b01
  parameter int unsigned TS_RATIO_2 = 200,   // Clock Request 2'b10
  parameter int unsigned TS_RATIO_3 = 2000,  // Clock Request 2'b11
  parameter int unsigned PF_W       = 8      // width of the PWM frequency input
) (
  input  logic            sys_clk,
  input  logic            nrst,
  input  logic [PF_W-1:0] pwm_freq,
  input  clk_req_e        clk_req,
  output logic            clk_ts,
  output logic            clk_pwm
);

  localparam int unsigned TS_CNT_W = $clog2(TS_RATIO_3 / 2 + 1);

  initial begin
    assert (TS_RATIO_0 >= 2 && TS_RATIO_0 % 2 == 0 &&
            TS_RATIO_1 % 2 == 0 && TS_RATIO_2 % 2 == 0 && TS_RATIO_3 % 2 == 0 &&
            TS_RATIO_0 <= TS_RATIO_1 && TS_RATIO_1 <= TS_RATIO_2 &&
            TS_RATIO_2 <= TS_RATIO_3)
      else $error("power_management: ratios must be even, >= 2 and ascending");
  end

  // ------------------------------------------------------------------ TS clock
  clk_req_e              req_q;
  logic [TS_CNT_W-1:0]   ts_cnt_q;
  logic [TS_CNT_W-1:0]   ts_half_m1;

  always_comb begin
    unique case (req_q)
      CLK_REQ_DIV2:   ts_half_m1 = TS_CNT_W'(TS_RATIO_0 / 2 - 1);
      CLK_REQ_DIV20:  ts_half_m1 = TS_CNT_W'(TS_RATIO_1 / 2 - 1);
      CLK_REQ_DIV200: ts_half_m1 = TS_CNT_W'(TS_RATIO_2 / 2 - 1);
      default:        ts_half_m1 = TS_CNT_W'(TS_RATIO_3 / 2 - 1);
    endcase
  end

  always_ff @(posedge sys_clk or negedge nrst) begin
    if (!nrst) begin
      ts_cnt_q <= '0;
      clk_ts   <= 1'b0;
      req_q    <= CLK_REQ_DIV2;
    end else if (ts_cnt_q >= ts_half_m1) begin
      ts_cnt_q <= '0;
      clk_ts   <= ~clk_ts;
      if (clk_ts) req_q <= clk_req;     // falling edge: a full period is done
    end else begin
      ts_cnt_q <= ts_cnt_q + 1'b1;
    end
  end

  // ----------------------------------------------------------------- PWM clock
  logic [PF_W-1:0] pwm_cnt_q;

  always_ff @(posedge sys_clk or negedge nrst) begin
    if (!nrst) begin
      pwm_cnt_q <= '0;
      clk_pwm   <= 1'b0;
    end else if (pwm_cnt_q >= pwm_freq) begin
      pwm_cnt_q <= '0;
      clk_pwm   <= ~clk_pwm;
    end else begin
      pwm_cnt_q <= pwm_cnt_q + 1'b1;
    end
  end

endmodule
