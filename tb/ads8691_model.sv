// ads8691_model: behavioural model of the serial side of an ADS8691, for
// testbenches only. A rising edge of cs_n samples the input code and
// starts a conversion lasting TCONV_NS; cs_n falling before it ends is
// counted as a timing error. With cs_n low the result comes out MSB first
// on sdo: the first bit when cs_n falls, the next on each falling edge of
// sclk. The input is a code, not a voltage.
`timescale 1ns/1ps
module ads8691_model #(
  parameter real TCONV_NS = 665.0
) (
  input  logic        cs_n,
  input  logic        sclk,
  input  logic        sdi,
  output logic        sdo,
  input  logic [17:0] vin_code,
  output int          conversions,
  output int          timing_errors
);
  logic [17:0] result = 0, sh;
  realtime t_conv = -1.0e9;
  int idx;

  initial begin sdo = 0; conversions = 0; timing_errors = 0; end

  always @(posedge cs_n) begin
    result <= vin_code;
    t_conv = $realtime;
    conversions++;
  end

  always @(negedge cs_n) begin
    if ($realtime - t_conv < TCONV_NS) timing_errors++;
    if (sdi !== 1'b0) timing_errors++;
    sh = result;
    idx = 17;
    sdo = sh[17];
  end

  always @(negedge sclk) if (!cs_n && idx > 0) begin
    idx--;
    sdo = sh[idx];
  end
endmodule
