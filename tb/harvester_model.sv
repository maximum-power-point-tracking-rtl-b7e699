// harvester_model: behavioural model of an energy harvester behind a boost
// DC-DC converter, for simulation only (not synthesizable logic).
//
// The source is a Thevenin equivalent: open-circuit voltage VOC and internal
// resistance rs_ohm (an input, so a test can move the maximum power point).
// The converter, switched by the PWM signal with duty D, presents the input
// resistance Rin = RL * (1 - D)^2 to the source. The harvester voltage and
// current are then V = VOC * Rin / (Rs + Rin) and I = VOC / (Rs + Rin), and
// the power V*I is largest where Rin = Rs, i.e. at D = 1 - sqrt(Rs / RL).
//
// The duty cycle is measured from the PWM signal itself: high and total
// System Clock cycles between two rising edges of pwm_in. If no rising edge
// comes for TIMEOUT cycles (duty 0 or 100 %), the level of pwm_in is taken.
// The ideal values V * V_SCALE and I * I_SCALE are updated once per
// measured PWM period. voltage and current are their 8-bit conversions with
// a fresh uniform error of up to +/-NOISE_LSB codes on every System Clock
// cycle (clipped to 0..255), as a noisy ADC in front of the tracker would
// deliver them; this noise is what the tracker's averaging is for.
module harvester_model #(
  parameter real         VOC     = 1.0,
  parameter real         RL      = 40.0,
  parameter real         V_SCALE = 255.0,
  parameter real         I_SCALE = 1600.0,
  parameter int unsigned TIMEOUT = 300_000,
  parameter int          NOISE_LSB = 1
) (
  input  logic       sys_clk,
  input  logic       pwm_in,
  input  int         rs_ohm,
  output logic [7:0] voltage,
  output logic [7:0] current,
  output real        duty
);

  int   high_cnt = 0, total_cnt = 0;
  logic pwm_d = 1'b0;

  real v_ideal, i_ideal;

  function automatic logic [7:0] to_code(real x);
    real y;
    y = x + real'(int'($urandom_range(0, 2 * NOISE_LSB)) - NOISE_LSB);
    if (y <= 0.0) return 8'd0;
    if (y >= 255.0) return 8'd255;
    return 8'($rtoi(y + 0.5));
  endfunction

  task automatic update(real d);
    real rin, rs;
    rs      = real'(rs_ohm);
    rin     = RL * (1.0 - d) * (1.0 - d);
    duty    = d;
    v_ideal = V_SCALE * VOC * rin / (rs + rin);
    i_ideal = I_SCALE * VOC / (rs + rin);
  endtask

  always @(posedge sys_clk) begin
    voltage <= to_code(v_ideal);
    current <= to_code(i_ideal);
  end

  initial update(0.5);

  always @(posedge sys_clk) begin
    pwm_d <= pwm_in;
    if (pwm_in && !pwm_d && total_cnt > 0) begin
      update(real'(high_cnt) / real'(total_cnt));
      high_cnt  <= 1;
      total_cnt <= 1;
    end else if (total_cnt >= TIMEOUT) begin
      update(pwm_in ? 1.0 : 0.0);
      high_cnt  <= 0;
      total_cnt <= 0;
    end else begin
      high_cnt  <= high_cnt + (pwm_in ? 1 : 0);
      total_cnt <= total_cnt + 1;
    end
  end

endmodule
