// tb_position_scan: the position-error scan run on the real electronics,
// repeated in simulation. The beam centre is stepped from x = -100 mm to
// +100 mm in 4.5 mm steps (45 points); the host conversion S = x / 2 mm +
// 64.5 turns it into a strip coordinate. For each point the on-times of
// all 128 strip outputs over one whole PWM period are counted and the
// beam position and size are recovered from them (centroid and second
// moment, the strip width's 1/12 strip^2 taken out). Checks: position
// within +/-0.33 mm of x (quarter-strip rounding, +/-0.25 mm, plus the
// read-out), within 0.05 mm of the rounded position, and sigma within
// 0.1 mm of the nominal value.
//
// The scan runs at four beam energies. 100 MeV (sigma 4 mm) uses the
// tables held at reset. For 70, 180 and 230 MeV (sigma 4.41, 3.38,
// 3.28 mm) the testbench first loads new tables through the table window,
// computed here as the share of a Gaussian beam falling on each strip.
// The design runs at its default size, 128 strips and a 1000-step period.
`timescale 1ns/1ps
module tb_position_scan;
  import ote_pkg::*;

  localparam int N = 128;

  logic clk = 0, rst_n = 0;
  logic [8:0]  s_awaddr = 0, s_araddr = 0;
  logic        s_awvalid = 0, s_wvalid = 0, s_bready = 0, s_arvalid = 0, s_rready = 0;
  logic [31:0] s_wdata = 0;
  logic [3:0]  s_wstrb = 4'hF;
  logic        s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0]  s_bresp, s_rresp;
  logic [31:0] s_rdata;
  logic        pwm_strip [N];
  logic        pwm_dose, pwm_period_start;
  logic        dac_sync_n, dac_sclk, dac_din;
  logic        adc_cs_n, adc_sclk, adc_sdi;
  logic        adc_sdo = 0;

  ote_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axi_write(logic [8:0] addr, logic [31:0] data);
    @(negedge clk);
    s_awaddr = addr; s_awvalid = 1; s_wdata = data; s_wvalid = 1;
    #1;
    while (!(s_awready && s_wready)) begin @(negedge clk); #1; end
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    #1;
    while (!s_bvalid) begin @(negedge clk); #1; end
    @(negedge clk);
    s_bready = 0;
  endtask

  // On-time counters, one whole period at a time.
  int hi [N], last [N];
  event period_done;
  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      for (int i = 0; i < N; i++) if (pwm_strip[i]) hi[i]++;
      if (pwm_period_start) begin
        last = hi;
        foreach (hi[i]) hi[i] = 0;
        -> period_done;
      end
    end
  end

  function automatic real gauss_int(real a, real b, real sigma);
    real h, acc, x;
    int steps = 64;
    h = (b - a) / steps;
    acc = 0.0;
    for (int k = 0; k <= steps; k++) begin
      x = a + k * h;
      acc += ((k == 0 || k == steps) ? 1.0 : ((k % 2 == 1) ? 4.0 : 2.0)) *
             $exp(-(x * x) / (2.0 * sigma * sigma));
    end
    return acc * h / 3.0;
  endfunction

  // Load tables for beam size sig_mm. Beam centre relative to the
  // reference strip: centre 0, gap -1/2, left quarter -1/4, right +1/4.
  task automatic load_tables(real sig_mm);
    real off [4] = '{0.0, -0.5, -0.25, 0.25};
    real sig, g [13], gmax;
    sig = sig_mm / 2.0;
    for (int s = 0; s < 4; s++) begin
      gmax = 0.0;
      for (int t = 0; t < 13; t++) begin
        g[t] = gauss_int(t - 6 - 0.5 - off[s], t - 6 + 0.5 - off[s], sig);
        if (g[t] > gmax) gmax = g[t];
      end
      for (int t = 0; t < 13; t++)
        axi_write(9'h100 + 9'(4 * (16 * s + t)), 32'($rtoi(1000.0 * g[t] / gmax + 0.5)));
    end
  endtask

  task automatic scan(int mev, real sig_mm);
    real worst_pos = 0.0, worst_sig = 0.0;
    for (int k = 0; k < 45; k++) begin
      real x, sx, m0, m1, m2, mean, var_s, x_fit, sig_fit, xq;
      int p;
      x  = -100.0 + 4.5 * k;
      sx = x / 2.0 + 64.5;
      p  = $rtoi(sx * 16.0 + 0.5);
      axi_write(9'h004, 32'(p));
      @(period_done);
      @(period_done);
      m0 = 0.0; m1 = 0.0; m2 = 0.0;
      for (int s = 1; s <= N; s++) begin
        m0 += last[s - 1];
        m1 += last[s - 1] * s;
      end
      mean = m1 / m0;
      for (int s = 1; s <= N; s++) m2 += last[s - 1] * (s - mean) * (s - mean);
      var_s   = m2 / m0 - 1.0 / 12.0;
      x_fit   = (mean - 64.5) * 2.0;
      sig_fit = $sqrt(var_s) * 2.0;
      xq      = ((p + 2) / 4 / 4.0 - 64.5) * 2.0;    // after quarter-strip rounding
      checks += 3;
      if (x_fit - x > 0.33 || x - x_fit > 0.33) begin
        failures++; $display("%0d MeV x %.2f: fitted %.3f", mev, x, x_fit);
      end
      if (x_fit - xq > 0.05 || xq - x_fit > 0.05) begin
        failures++; $display("%0d MeV x %.2f: fitted %.3f, rounded %.3f", mev, x, x_fit, xq);
      end
      if (sig_fit - sig_mm > 0.1 || sig_mm - sig_fit > 0.1) begin
        failures++; $display("%0d MeV x %.2f: sigma %.3f want %.2f", mev, x, sig_fit, sig_mm);
      end
      if ((x_fit - x > 0 ? x_fit - x : x - x_fit) > worst_pos) worst_pos = (x_fit - x > 0 ? x_fit - x : x - x_fit);
      if ((sig_fit - sig_mm > 0 ? sig_fit - sig_mm : sig_mm - sig_fit) > worst_sig)
        worst_sig = (sig_fit - sig_mm > 0 ? sig_fit - sig_mm : sig_mm - sig_fit);
    end
    $display("%0d MeV (sigma %.2f mm): worst position error %.3f mm, worst sigma error %.3f mm",
             mev, sig_mm, worst_pos, worst_sig);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    axi_write(9'h000, 32'h1);     // beam on
    scan(100, 4.0);               // tables held at reset
    load_tables(4.41);  scan(70, 4.41);
    load_tables(3.38);  scan(180, 3.38);
    load_tables(3.28);  scan(230, 3.28);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
