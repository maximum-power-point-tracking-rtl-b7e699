// pwm_generator: the PWM output stage of the MPPT.
//
// An 8-bit counter runs from 0 to 255 on every rising edge of the PWM clock
// and wraps, so one PWM period is 256 PWM-clock cycles. A comparator drives
// the output high while the counter is below the compare value and low
// otherwise, so the duty cycle is cmp/256 (0 gives a constant low, 255 gives
// 255/256). The compare value from the tracking system is copied into the
// comparator's register only in the cycle in which the counter overflows
// (255 -> 0); a new value therefore takes effect at the start of the next
// period and never changes a period that has begun. After reset the compare
// register holds 128, a 50 % duty cycle.
//
// Follows the paper: the counter/comparator structure, the 0..255 count, the
// "counter < compare value" rule, the update only at overflow and the 50 %
// reset duty. This design's own choices: the asynchronous active-low reset,
// a combinational output taken from the two registers (no output flop), and
// saturation-free wrap of the counter.
//
// Ports: clk (Clock to PWM), nrst (active-low reset), cmp_in (PWM compare
// value from the tracking system), pwm_out (Output, to the DC-DC converter).
module pwm_generator #(
  parameter int unsigned     CW        = 8,
  parameter logic [CW-1:0]   CMP_RST   = CW'(1) << (CW - 1)
) (
  input  logic          clk,
  input  logic          nrst,
  input  logic [CW-1:0] cmp_in,
  output logic          pwm_out
);

  logic [CW-1:0] cnt_q;
  logic [CW-1:0] cmp_q;

  always_ff @(posedge clk or negedge nrst) begin
    if (!nrst) begin
      cnt_q <= '0;
      cmp_q <= CMP_RST;
    end else begin
      cnt_q <= cnt_q + 1'b1;
      if (cnt_q == '1) cmp_q <= cmp_in;   // reload only at overflow
    end
  end

  assign pwm_out = (cnt_q < cmp_q);

endmodule
