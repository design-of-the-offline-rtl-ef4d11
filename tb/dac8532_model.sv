// dac8532_model: behavioural model of the serial side of a DAC8532, for
// testbenches only. While sync_n is low it shifts din in on each falling
// edge of sclk; after 24 bits it decodes the frame: bit 18 picks buffer A
// or B, bits 20 and 21 copy buffer A / B to output A / B, bits 23:22 and
// 17:16 must be zero (normal operation). A frame cut short by sync_n going
// high is discarded and counted. Outputs are codes, not voltages.
module dac8532_model (
  input  logic sync_n,
  input  logic sclk,
  input  logic din,
  output logic [15:0] out_a,
  output logic [15:0] out_b,
  output int          frames,
  output int          bad_frames,
  output logic [23:0] last_frame
);
  logic [15:0] buf_a = 0, buf_b = 0;
  logic [23:0] sh;
  int nbits = 0;

  initial begin out_a = 0; out_b = 0; frames = 0; bad_frames = 0; last_frame = 0; end

  always @(negedge sync_n) nbits = 0;

  always @(posedge sync_n) if (nbits != 0 && nbits != 24) bad_frames++;

  always @(negedge sclk) begin
    if (!sync_n && nbits < 24) begin
      sh = {sh[22:0], din};
      nbits++;
      if (nbits == 24) begin
        frames++;
        last_frame = sh;
        if (sh[23:22] != 0 || sh[17:16] != 0) bad_frames++;
        if (sh[18]) buf_b = sh[15:0]; else buf_a = sh[15:0];
        if (sh[20]) out_a = buf_a;
        if (sh[21]) out_b = buf_b;
      end
    end
  end
endmodule
