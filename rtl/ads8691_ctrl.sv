// ads8691_ctrl: read-out driver for the ADS8691 18-bit SAR ADC.
//
// The ADC digitises the chamber high voltage taken from the HV sample
// circuit, so the host can check the bias. While enable is high the
// driver runs back-to-back conversions: cs_n high starts a conversion and
// is held high for CONV_CLKS clocks (longer than the ADC's conversion
// time), then cs_n goes low and 18 sclk pulses read the result, MSB
// first. The ADC puts each bit out on the falling edge of sclk (the
// first one when cs_n falls), the driver samples sdo at each rising edge;
// sdi is held low, which the ADC reads as a no-operation command. Frame
// and timing follow the ADS8691 data sheet's default SPI mode (clock
// polarity and phase 0); the paper names the ADC and its job only.
//
// Timing: sclk = clk / (2 * HALF). One sample takes CONV_CLKS + 36*HALF
// clocks. sample_valid pulses for one clock with the new sample.
module ads8691_ctrl #(
  parameter int unsigned HALF      = 2,
  parameter int unsigned CONV_CLKS = 80
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  output logic        cs_n,
  output logic        sclk,
  output logic        sdi,
  input  logic        sdo,
  output logic [17:0] sample,
  output logic        sample_valid
);

  localparam int unsigned CW = $clog2(CONV_CLKS + 2 * HALF + 1);

  typedef enum logic [1:0] {S_CONV, S_LOW, S_HIGH} state_e;

  state_e       state;
  logic [CW-1:0] tcnt;
  logic [4:0]   bits;
  logic [17:0]  shreg;

  assign sdi = 1'b0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_CONV;
      tcnt         <= '0;
      bits         <= '0;
      shreg        <= '0;
      cs_n         <= 1'b1;
      sclk         <= 1'b0;
      sample       <= '0;
      sample_valid <= 1'b0;
    end else begin
      sample_valid <= 1'b0;
      unique case (state)
        S_CONV: begin
          cs_n <= 1'b1;
          sclk <= 1'b0;
          if (!enable) tcnt <= '0;
          else if (tcnt == CW'(CONV_CLKS - 1)) begin
            tcnt  <= '0;
            bits  <= '0;
            cs_n  <= 1'b0;
            state <= S_LOW;
          end else tcnt <= tcnt + 1'b1;
        end
        S_LOW: begin
          if (tcnt == CW'(HALF - 1)) begin
            tcnt  <= '0;
            sclk  <= 1'b1;
            shreg <= {shreg[16:0], sdo};   // rising edge: take the bit
            bits  <= bits + 1'b1;
            state <= S_HIGH;
          end else tcnt <= tcnt + 1'b1;
        end
        default: begin  // S_HIGH
          if (tcnt == CW'(HALF - 1)) begin
            tcnt <= '0;
            sclk <= 1'b0;
            if (bits == 5'd18) begin
              cs_n         <= 1'b1;   // ends the read, starts the next conversion
              sample       <= shreg;
              sample_valid <= 1'b1;
              state        <= S_CONV;
            end else state <= S_LOW;
          end else tcnt <= tcnt + 1'b1;
        end
      endcase
    end
  end

endmodule
