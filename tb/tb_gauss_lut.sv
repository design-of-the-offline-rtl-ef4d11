// tb_gauss_lut: checks the reset contents of the four strip tables against
// the sigma = 4 mm chamber tables (percent of peak x 10, typed here on
// their own), then single-entry writes, an ignored out-of-range write and
// a second reset.
module tb_gauss_lut;
  import ote_pkg::*;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  situation_e wr_sit = SIT_CENTER, rd_sit = SIT_CENTER;
  logic [3:0] wr_tap = 0;
  duty_t wr_data = 0;
  lut_row_t rd_row;
  int checks = 0, failures = 0;

  gauss_lut dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_tab [4][13] = '{
    '{ 12,  47, 142, 334, 608,  885, 1000, 885, 608, 334, 142,  47, 12},  // centre
    '{ 26,  86, 230, 479, 783, 1000, 1000, 783, 479, 230,  86,  26,  6},  // gap
    '{ 17,  64, 180, 399, 693,  941, 1000, 832, 542, 277, 110,  35,  9},  // left quarter
    '{  9,  35, 110, 277, 542,  832, 1000, 941, 693, 399, 180,  64, 17}   // right quarter
  };

  task automatic check_all(string tag);
    for (int s = 0; s < 4; s++) begin
      rd_sit = situation_e'(s);
      #1;
      for (int t = 0; t < 13; t++) begin
        checks++;
        if (int'(rd_row[t]) != ref_tab[s][t]) begin
          failures++;
          $display("%s: sit %0d tap %0d got %0d want %0d", tag, s, t, rd_row[t], ref_tab[s][t]);
        end
      end
    end
  endtask

  task automatic write(int s, int t, int v);
    @(negedge clk);
    wr_en = 1; wr_sit = situation_e'(s); wr_tap = 4'(t); wr_data = duty_t'(v);
    @(negedge clk);
    wr_en = 0;
    if (t < 13) ref_tab[s][t] = v;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    check_all("reset");
    // The tables are symmetric where the paper says they are.
    for (int t = 0; t < 13; t++) begin
      checks++;
      if (ref_tab[2][t] != ref_tab[3][12 - t]) failures++;
    end
    write(0, 6, 900);
    write(1, 12, 11);
    write(3, 0, 1);
    write(2, 13, 555);   // no such tap: ignored
    write(2, 15, 777);   // ignored
    check_all("after writes");
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    ref_tab[0][6] = 1000; ref_tab[1][12] = 6; ref_tab[3][0] = 9;
    check_all("after reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
