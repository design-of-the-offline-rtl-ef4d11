// gauss_lut: the strip lookup tables of the beam-position simulator.
//
// Holds one 13-entry row of strip duty cycles (per mille of the PWM period)
// for each of the four beam-centre situations: centre of a strip, gap
// between two strips, left quarter and right quarter of a strip. Entry 0
// is strip n-6, entry 6 strip n, entry 12 strip n+6. At reset the rows
// take the sigma = 4 mm (100 MeV) values of the chamber tables; the host
// may overwrite single entries to load tables for another beam size.
// Keeping the table writable is this design's choice: the published tables
// cover sigma = 4 mm only.
//
// Interface: wr_en/wr_sit/wr_tap/wr_data write one entry on the clock
// edge (taps above 12 are ignored). rd_sit selects a row; rd_row shows it
// combinationally. No latency on the read side, one cycle on the write.
module gauss_lut
  import ote_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  situation_e  wr_sit,
  input  logic [3:0]  wr_tap,
  input  duty_t       wr_data,
  input  situation_e  rd_sit,
  output lut_row_t    rd_row
);

  lut_row_t mem [4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < 4; s++)
        for (int t = 0; t < LUT_TAPS; t++)
          mem[s][t] <= lut_default(situation_e'(s), t);
    end else if (wr_en && (wr_tap < 4'(LUT_TAPS))) begin
      mem[wr_sit][wr_tap] <= wr_data;
    end
  end

  assign rd_row = mem[rd_sit];

endmodule
