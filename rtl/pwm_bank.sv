// pwm_bank: synchronous multi-channel PWM for the strip and dose switches.
//
// Each output drives one analog switch that connects the DAC voltage U to
// a discharge resistor R for the on-time t of every PWM period, so the
// charge delivered per period is Q = (U / R) * t. One shared counter runs
// from 0 to PWM_STEPS-1, advancing once every PRESCALE clocks; channel i
// is high while the counter is below its duty value, so a duty of d gives
// an on-time of d / PWM_STEPS of the period (d >= PWM_STEPS keeps the
// switch closed). All channels start their on-time together at the period
// start. The period is PWM_STEPS * PRESCALE clocks: 1000 x 1 at a 100 MHz
// clock gives 10 us, the longest period that still puts ten periods into
// a 100 us integration window of the chamber read-out. The shared counter,
// the 0.1 % step and the 100 MHz clock are this design's choices.
//
// Duty values are sampled into shadow registers at the start of each
// period, so an output never shows a cut or doubled pulse when the host
// moves the beam or switches a channel off (duty 0). period_start pulses
// for one clock when the counter is at 0; pwm[] is registered, so each
// on-time begins on the clock after period_start and lasts duty clocks
// (times PRESCALE).
module pwm_bank
  import ote_pkg::*;
#(
  parameter int unsigned NUM_CH    = NUM_STRIPS_DEF,
  parameter int unsigned PWM_STEPS = PWM_STEPS_DEF,
  parameter int unsigned PRESCALE  = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  duty_t       duty [NUM_CH],
  output logic        pwm  [NUM_CH],
  output logic        period_start
);

  localparam int unsigned CNT_W = $clog2(PWM_STEPS);
  localparam int unsigned PRE_W = (PRESCALE > 1) ? $clog2(PRESCALE) : 1;

  logic [PRE_W-1:0] pre;
  logic [CNT_W-1:0] cnt;
  logic             tick, wrap;
  duty_t            duty_act [NUM_CH];

  assign tick = (PRESCALE <= 1) || (pre == PRE_W'(PRESCALE - 1));
  assign wrap = tick && (cnt == CNT_W'(PWM_STEPS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pre <= '0;
      cnt <= CNT_W'(PWM_STEPS - 1);   // first tick starts a period
    end else begin
      if (tick) pre <= '0;
      else      pre <= pre + 1'b1;
      if (wrap)      cnt <= '0;
      else if (tick) cnt <= cnt + 1'b1;
    end
  end

  // Shadow registers, loaded at the last tick of a period.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_CH; i++) duty_act[i] <= '0;
    end else if (wrap) begin
      for (int i = 0; i < NUM_CH; i++) duty_act[i] <= duty[i];
    end
  end

  logic start_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_q <= 1'b0;
      for (int i = 0; i < NUM_CH; i++) pwm[i] <= 1'b0;
    end else begin
      start_q <= wrap;
      for (int i = 0; i < NUM_CH; i++)
        pwm[i] <= (32'(cnt) < 32'(duty_act[i]));
    end
  end

  assign period_start = start_q;

endmodule
