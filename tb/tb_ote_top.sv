// tb_ote_top: end-to-end test of the whole signal generator at its default
// size (128 strips, 1000-step PWM period of 10 us at 100 MHz), driven the
// way the processing system drives it, over AXI4-Lite, with bit-level
// models of the DAC8532 and the ADS8691 on the serial pins.
//
// For every beam centre tried, it waits until the new pattern is in force
// and then counts, over one whole PWM period, the clocks each of the 128
// strip outputs and the dose output is high. The expected on-times are
// worked out here from the chamber tables and the quarter-strip rule.
// Mechanisms counted, each of which must occur: the four beam-centre
// situations, a pattern clipped at the edge of the strip plane, beam off,
// a position write in mid-period that must not disturb the running period,
// a lookup-table reload, DAC writes to both outputs, and HV read-back.
`timescale 1ns/1ps
module tb_ote_top;
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
  logic        adc_cs_n, adc_sclk, adc_sdi, adc_sdo;

  ote_top dut (.*);

  logic [15:0] dac_out_a, dac_out_b;
  int dac_frames, dac_bad;
  logic [23:0] dac_last;
  dac8532_model dac (.sync_n(dac_sync_n), .sclk(dac_sclk), .din(dac_din),
                     .out_a(dac_out_a), .out_b(dac_out_b), .frames(dac_frames),
                     .bad_frames(dac_bad), .last_frame(dac_last));

  logic [17:0] hv_code = 18'h1C0DE;
  int adc_convs, adc_errs;
  ads8691_model adc (.cs_n(adc_cs_n), .sclk(adc_sclk), .sdi(adc_sdi), .sdo(adc_sdo),
                     .vin_code(hv_code), .conversions(adc_convs), .timing_errors(adc_errs));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- tables
  int tab [4][13] = '{
    '{ 12,  47, 142, 334, 608,  885, 1000, 885, 608, 334, 142,  47, 12},  // centre
    '{ 26,  86, 230, 479, 783, 1000, 1000, 783, 479, 230,  86,  26,  6},  // gap
    '{ 17,  64, 180, 399, 693,  941, 1000, 832, 542, 277, 110,  35,  9},  // left quarter
    '{  9,  35, 110, 277, 542,  832, 1000, 941, 693, 399, 180,  64, 17}   // right quarter
  };

  // Expected on-time of strip s for a centre p (1/16 strips).
  function automatic int expected(int p, int s);
    int q, d, idx, t;
    q = (p + 2) / 4;
    d = 4 * s - q;               // strip minus beam, quarter strips
    case (q % 4)
      0: begin t = 0; idx = d / 4 + 6; end
      1: begin t = 3; idx = (d + 1) / 4 + 6; end
      2: begin t = 1; idx = (d - 2) / 4 + 6; end
      default: begin t = 2; idx = (d - 1) / 4 + 6; end
    endcase
    if (idx < 0 || idx > 12) return 0;
    return tab[t][idx];
  endfunction

  // ------------------------------------------------------------ AXI tasks
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

  task automatic axi_read(logic [8:0] addr, output logic [31:0] data);
    @(negedge clk);
    s_araddr = addr; s_arvalid = 1;
    #1;
    while (!s_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_arvalid = 0;
    #1;
    while (!s_rvalid) begin @(negedge clk); #1; end
    data = s_rdata;
    s_rready = 1;
    @(negedge clk);
    s_rready = 0;
  endtask

  // ------------------------------------------------ on-time measurement
  int hi [N + 1];
  int last [N + 1];
  int periods = 0;
  realtime t_prev = 0;
  bit measuring = 0;
  event period_done;

  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      for (int i = 0; i < N; i++) if (pwm_strip[i]) hi[i]++;
      if (pwm_dose) hi[N]++;
      if (pwm_period_start) begin
        if (periods > 1) begin
          checks++;
          if ($realtime - t_prev != 10000.0) begin
            failures++; $display("PWM period %.1f ns", $realtime - t_prev);
          end
        end
        t_prev = $realtime;
        last = hi;
        foreach (hi[i]) hi[i] = 0;
        periods++;
        -> period_done;
      end
    end
  end

  // Wait for the end of the next whole period and compare it.
  task automatic measure(int p, bit beam, int dose, string tag);
    int bad = 0;
    @(period_done);        // period now starting is whole
    @(period_done);
    for (int s = 1; s <= N; s++) begin
      int want;
      want = beam ? expected(p, s) : 0;
      checks++;
      if (last[s - 1] != want) begin
        bad++;
        if (bad < 5) $display("%s: pos %0d strip %0d on %0d want %0d", tag, p, s, last[s - 1], want);
      end
    end
    checks++;
    if (last[N] != dose) begin bad++; $display("%s: dose on %0d want %0d", tag, last[N], dose); end
    failures += bad;
  endtask

  // ------------------------------------------------------ mechanism counts
  int n_sit [4];
  int n_edge = 0, n_off = 0, n_midwrite = 0, n_reload = 0, n_dac = 0, n_hv = 0;

  task automatic set_pos(int p);
    logic [31:0] st;
    int q;
    axi_write(9'h004, 32'(p));
    repeat (4) @(negedge clk);
    axi_read(9'h018, st);
    q = (p + 2) / 4;
    checks++;
    if (st[1:0] != 2'(q % 4 == 0 ? SIT_CENTER : q % 4 == 1 ? SIT_RIGHTQ :
                      q % 4 == 2 ? SIT_GAP : SIT_LEFTQ)) begin
      failures++; $display("pos %0d: situation %0d", p, st[1:0]);
    end
    n_sit[st[1:0]]++;
    if (st[11]) n_edge++;
  endtask

  task automatic run_pos(int p, int dose, string tag);
    set_pos(p);
    measure(p, 1, dose, tag);
  endtask

  // ------------------------------------------------------------- sequence
  initial begin
    logic [31:0] d;
    int dose;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Amplitudes: DAC output A (strip voltage) and B (dose voltage).
    axi_write(9'h00C, 32'h0000_6000);
    axi_write(9'h010, 32'h0000_2A00);
    repeat (200) @(negedge clk);
    checks += 2;
    if (dac_out_a != 16'h6000) begin failures++; $display("DAC A %h", dac_out_a); end
    if (dac_out_b != 16'h2A00) begin failures++; $display("DAC B %h", dac_out_b); end
    if (dac_out_a == 16'h6000 && dac_out_b == 16'h2A00) n_dac += 2;

    dose = 500;
    axi_write(9'h008, 32'(dose));
    axi_write(9'h000, 32'h7);    // beam on, dose on, HV read-out on

    // The four situations around strip 17 (as in the chamber tables).
    run_pos(17 * 16,      dose, "centre");
    run_pos(17 * 16 + 4,  dose, "right quarter");
    run_pos(17 * 16 + 8,  dose, "gap");
    run_pos(17 * 16 + 12, dose, "left quarter");
    // Beam on the chamber axis (x = 0 mm, S = 64.5) and rounding cases.
    run_pos(64 * 16 + 8,  dose, "axis");
    run_pos(90 * 16 + 1,  dose, "round down");
    run_pos(90 * 16 + 6,  dose, "round up");
    // Clipped at both edges.
    run_pos(2 * 16 + 4,   dose, "left edge");
    run_pos(127 * 16 + 12, dose, "right edge");

    // Position write in mid-period: the running period keeps the old beam.
    set_pos(40 * 16);
    @(period_done);
    repeat (400) @(negedge clk);
    axi_write(9'h004, 32'(80 * 16 + 8));
    @(period_done);
    begin
      int bad = 0;
      for (int s = 1; s <= N; s++) begin
        checks++;
        if (last[s - 1] != expected(40 * 16, s)) bad++;
      end
      failures += bad;
      if (bad == 0) n_midwrite++;
      else $display("mid-period write disturbed the running period (%0d strips)", bad);
    end
    measure(80 * 16 + 8, 1, dose, "after mid-period write");

    // Beam off: strips silent, dose keeps running.
    axi_write(9'h000, 32'h6);
    measure(80 * 16 + 8, 0, dose, "beam off");
    n_off++;
    dose = 1000;
    axi_write(9'h008, 32'(dose));
    axi_write(9'h000, 32'h5);    // beam back on, dose off
    measure(80 * 16 + 8, 1, 0, "dose off");

    // Reload one table entry: gap table, strip n+1, and check it takes.
    axi_write(9'h100 + 4 * (16 * int'(SIT_GAP) + 7), 32'd700);
    tab[1][7] = 700;
    measure(80 * 16 + 8, 1, 0, "table reload");
    checks++;
    if (last[81 - 1 + 1] == 700) n_reload++;
    else begin failures++; $display("table reload not seen: %0d", last[81]); end

    // Random beam centres over the whole plane.
    for (int k = 0; k < 6; k++) begin
      int p;
      p = 16 + int'($urandom_range(0, 127 * 16));
      run_pos(p, 0, "random");
    end

    // HV read-back through the ADC.
    axi_read(9'h01C, d);
    checks++;
    if (d == 0) begin failures++; $display("no HV samples"); end
    axi_read(9'h014, d);
    checks++;
    if (d[17:0] != hv_code) begin failures++; $display("HV %h want %h", d[17:0], hv_code); end
    else n_hv++;
    checks++;
    if (adc_errs != 0 || dac_bad != 0) begin failures++; $display("serial timing errors"); end

    // Every mechanism must have happened.
    foreach (n_sit[i]) begin
      checks++;
      if (n_sit[i] == 0) begin failures++; $display("situation %0d never seen", i); end
    end
    checks += 6;
    if (n_edge == 0)     begin failures++; $display("no edge clip"); end
    if (n_off == 0)      begin failures++; $display("no beam off"); end
    if (n_midwrite == 0) begin failures++; $display("no clean mid-period write"); end
    if (n_reload == 0)   begin failures++; $display("no table reload"); end
    if (n_dac < 2)       begin failures++; $display("DAC writes missing"); end
    if (n_hv == 0)       begin failures++; $display("no HV read-back"); end
    $display("mechanisms: centre %0d right-q %0d gap %0d left-q %0d edge %0d off %0d mid-write %0d reload %0d dac %0d hv %0d",
             n_sit[SIT_CENTER], n_sit[SIT_RIGHTQ], n_sit[SIT_GAP], n_sit[SIT_LEFTQ],
             n_edge, n_off, n_midwrite, n_reload, n_dac, n_hv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
