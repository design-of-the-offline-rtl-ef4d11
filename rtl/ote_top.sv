// ote_top: programmable-logic part of the offline test electronics that
// stands in for a proton beam crossing the nozzle's ionisation chamber.
//
// The processing system writes the beam centre, the DAC codes and the dose
// duty over AXI4-Lite (host_regs). strip_pattern_gen rounds the centre to
// a quarter strip and lays the matching 13-entry Gaussian table onto the
// 128 strips; pwm_bank turns the 128 strip duties and the dose duty into
// 129 switch-control signals with a common period (10 us at 100 MHz).
// Each switch gates a DAC voltage into a resistor on the daughter cards or
// the dose circuit, so the charge per period follows the duty.
// dac8532_ctrl sends the DAC codes that set the overall amplitudes;
// ads8691_ctrl reads the chamber high voltage back for the host.
//
// pwm_strip[i] drives strip i+1; beam_on = 0 forces all strip duties to 0
// and dose_on = 0 does so for the dose output, both from the next PWM
// period on. A new position reaches the switches at the start of the first
// PWM period that begins at least three clocks after the register write.
// The partition follows the hardware description (core card logic driving
// 128 PWM lines, the DAC8532 and the ADC); the bus, register map, clock
// and timing are this design's choices.
module ote_top
  import ote_pkg::*;
#(
  parameter int unsigned NUM_STRIPS = NUM_STRIPS_DEF,
  parameter int unsigned PWM_STEPS  = PWM_STEPS_DEF,
  parameter int unsigned PRESCALE   = 1,
  parameter int unsigned SPI_HALF   = 2,
  parameter int unsigned ADC_CONV   = 80
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite from the processing system
  input  logic [8:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [8:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // switch controls to the daughter cards and the dose circuit
  output logic        pwm_strip [NUM_STRIPS],
  output logic        pwm_dose,
  output logic        pwm_period_start,
  // DAC8532
  output logic        dac_sync_n,
  output logic        dac_sclk,
  output logic        dac_din,
  // ADS8691 (HV sample)
  output logic        adc_cs_n,
  output logic        adc_sclk,
  output logic        adc_sdi,
  input  logic        adc_sdo
);

  logic        beam_on, dose_on, adc_en, pos_load;
  logic [11:0] pos;
  duty_t       dose_duty;
  logic        dac_wr_a, dac_wr_b, dac_busy, dac_done;
  logic [15:0] dac_code_a, dac_code_b;
  logic        lut_wr_en;
  situation_e  lut_wr_sit, situation;
  logic [3:0]  lut_wr_tap;
  duty_t       lut_wr_data;
  logic [17:0] hv_sample;
  logic        hv_valid;
  logic [8:0]  ref_strip;
  logic        edge_clip;

  duty_t       pattern [NUM_STRIPS];
  duty_t       duty    [NUM_STRIPS + 1];
  logic        pwm     [NUM_STRIPS + 1];

  host_regs u_regs (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .beam_on, .dose_on, .adc_en, .pos_load, .pos, .dose_duty,
    .dac_wr_a, .dac_code_a, .dac_wr_b, .dac_code_b,
    .lut_wr_en, .lut_wr_sit, .lut_wr_tap, .lut_wr_data,
    .hv_sample, .hv_valid, .situation, .ref_strip, .edge_clip, .dac_busy
  );

  strip_pattern_gen #(.NUM_STRIPS(NUM_STRIPS), .FRAC_W(4), .INT_W(8)) u_pattern (
    .clk, .rst_n,
    .load        (pos_load),
    .pos_in      (pos),
    .lut_wr_en, .lut_wr_sit, .lut_wr_tap, .lut_wr_data,
    .duty        (pattern),
    .situation,
    .ref_strip,
    .edge_clip
  );

  always_comb begin
    for (int i = 0; i < NUM_STRIPS; i++) duty[i] = beam_on ? pattern[i] : '0;
    duty[NUM_STRIPS] = dose_on ? dose_duty : '0;
  end

  pwm_bank #(.NUM_CH(NUM_STRIPS + 1), .PWM_STEPS(PWM_STEPS), .PRESCALE(PRESCALE)) u_pwm (
    .clk, .rst_n,
    .duty,
    .pwm,
    .period_start (pwm_period_start)
  );

  always_comb begin
    for (int i = 0; i < NUM_STRIPS; i++) pwm_strip[i] = pwm[i];
    pwm_dose = pwm[NUM_STRIPS];
  end

  dac8532_ctrl #(.HALF(SPI_HALF)) u_dac (
    .clk, .rst_n,
    .wr_a   (dac_wr_a), .code_a (dac_code_a),
    .wr_b   (dac_wr_b), .code_b (dac_code_b),
    .sync_n (dac_sync_n), .sclk (dac_sclk), .din (dac_din),
    .busy   (dac_busy), .done (dac_done)
  );

  ads8691_ctrl #(.HALF(SPI_HALF), .CONV_CLKS(ADC_CONV)) u_adc (
    .clk, .rst_n,
    .enable       (adc_en),
    .cs_n         (adc_cs_n),
    .sclk         (adc_sclk),
    .sdi          (adc_sdi),
    .sdo          (adc_sdo),
    .sample       (hv_sample),
    .sample_valid (hv_valid)
  );

endmodule
