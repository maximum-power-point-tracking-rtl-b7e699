// mppt_top: digital maximum power point tracker for an energy harvester.
//
// Three blocks, wired as in the block diagram of the design:
//   power_management  divides System Clock into the tracking clock (ratio
//                     2/20/200/2000 on the tracker's Clock Request) and the
//                     PWM clock (set by the static PWM frequency input);
//   tracking_system   Perturb and Observe on averaged voltage and power,
//                     producing the PWM compare value and the Clock Request;
//   pwm_generator     8-bit counter and comparator producing the Output that
//                     switches the DC-DC converter.
// NRST (active low, asynchronous) resets all three.
//
// Ports: sys_clk (System Clock), nrst (NRST), pwm_freq (PWM frequency,
// 8 bits), voltage and current (8-bit samples of the harvester's operating
// point, taken on each tracking clock edge), averaging (2-bit Averaging
// code), pwm_out (Output).
//
// Timing: one PWM period is 256 PWM clocks = 512*(pwm_freq+1) sys_clk
// cycles. One tracking decision takes N tracking clocks for an averaging
// window of N samples, that is 2*N .. 2000*N sys_clk cycles depending on the
// current Clock Request. The compare value crosses from the tracking clock to
// the PWM clock; both are flip-flop outputs of the same System Clock, and the
// PWM block only loads it at its counter overflow.
module mppt_top
  import mppt_pkg::*;
(
  input  logic                sys_clk,
  input  logic                nrst,
  input  logic [7:0]          pwm_freq,
  input  logic [SAMPLE_W-1:0] voltage,
  input  logic [SAMPLE_W-1:0] current,
  input  avg_code_e           averaging,
  output logic                pwm_out
);

  logic             clk_ts;
  logic             clk_pwm;
  clk_req_e         clk_req;
  logic [CMP_W-1:0] pwm_cmp;

  power_management u_pm (
    .sys_clk (sys_clk),
    .nrst    (nrst),
    .pwm_freq(pwm_freq),
    .clk_req (clk_req),
    .clk_ts  (clk_ts),
    .clk_pwm (clk_pwm)
  );

  tracking_system u_ts (
    .clk      (clk_ts),
    .nrst     (nrst),
    .voltage  (voltage),
    .current  (current),
    .averaging(averaging),
    .pwm_cmp  (pwm_cmp),
    .clk_req  (clk_req)
  );

  pwm_generator #(.CW(CMP_W), .CMP_RST(CMP_RESET)) u_pwm (
    .clk    (clk_pwm),
    .nrst   (nrst),
    .cmp_in (pwm_cmp),
    .pwm_out(pwm_out)
  );

endmodule
