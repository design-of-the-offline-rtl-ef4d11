// tb_strip_pattern_gen: drives beam centres over the whole 128-strip axis
// (random 1/16-strip coordinates, plus hand-picked points) and checks the
// 128 duties. Expected values are worked out independently: the charge of
// a Gaussian beam (sigma = 4 mm = 2 strips) falling on each 2 mm strip,
// found by numerical integration and scaled to the peak strip, must agree
// with the duty within 0.7 % of the peak; strips outside the 13-strip window
// must be exactly 0. Hand-picked points check exact table values, the
// rounding rule, the situation and edge flags, and the two-clock latency.
module tb_strip_pattern_gen;
  import ote_pkg::*;

  localparam int N = 128;

  logic clk = 0, rst_n = 0;
  logic load = 0;
  logic [11:0] pos_in = 0;
  logic lut_wr_en = 0;
  situation_e lut_wr_sit = SIT_CENTER;
  logic [3:0] lut_wr_tap = 0;
  duty_t lut_wr_data = 0;
  duty_t duty [N];
  situation_e situation;
  logic [8:0] ref_strip;
  logic edge_clip;
  int checks = 0, failures = 0;
  int edge_pos [7] = '{16, 17 * 16, 64 * 16 + 8, 128 * 16, 128 * 16 + 7, 3 * 16 + 5, 125 * 16 + 12};

  strip_pattern_gen #(.NUM_STRIPS(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Fraction of a unit Gaussian (sigma in strips) between a and b.
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

  task automatic do_load(int p);
    @(negedge clk);
    load = 1; pos_in = 12'(p);
    @(negedge clk);
    load = 0;
    @(posedge clk);     // second edge after the load edge
    #1;
  endtask

  task automatic check_pattern(int p);
    int q, n, frac, refs, lo, hi;
    real c, g [N+1], gmax, want;
    q    = (p + 2) / 4;          // quarter strips, halves round up
    n    = q / 4;
    frac = q % 4;
    refs = (frac < 2) ? n : n + 1;
    c    = q / 4.0;
    gmax = 0.0;
    for (int s = 1; s <= N; s++) begin
      g[s] = gauss_int(s - 0.5 - c, s + 0.5 - c, 2.0);
    end
    // Peak strip value (the peak may lie outside the array near the edges).
    gmax = gauss_int(-0.5 - (c - refs), 0.5 - (c - refs), 2.0);
    lo = refs - 6; hi = refs + 6;
    for (int s = 1; s <= N; s++) begin
      checks++;
      if (s < lo || s > hi) begin
        if (duty[s-1] != 0) begin
          failures++;
          $display("pos %0d strip %0d: got %0d want 0", p, s, duty[s-1]);
        end
      end else begin
        want = 1000.0 * g[s] / gmax;
        if (real'(duty[s-1]) - want > 7.0 || want - real'(duty[s-1]) > 7.0) begin
          failures++;
          $display("pos %0d strip %0d: got %0d want %.1f", p, s, duty[s-1], want);
        end
      end
    end
    checks++;
    if (ref_strip != 9'(refs)) begin
      failures++;
      $display("pos %0d: ref %0d want %0d", p, ref_strip, refs);
    end
    checks++;
    if (edge_clip != (lo < 1 || hi > N)) begin
      failures++;
      $display("pos %0d: edge_clip %0b", p, edge_clip);
    end
  endtask

  task automatic expect_duty(int s, int v, string tag);
    checks++;
    if (int'(duty[s-1]) != v) begin
      failures++;
      $display("%s: strip %0d got %0d want %0d", tag, s, duty[s-1], v);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;

    // Latency: nothing changes one edge after the load edge.
    do_load(17 * 16);
    @(negedge clk);
    load = 1; pos_in = 12'(40 * 16);
    @(negedge clk);
    load = 0;
    expect_duty(40, 0, "latency, 1 edge");
    @(posedge clk); #1;
    expect_duty(40, 1000, "latency, 2 edges");

    // Centre of strip 17: table 1.
    do_load(17 * 16);
    checks++; if (situation != SIT_CENTER) failures++;
    expect_duty(17, 1000, "centre"); expect_duty(16, 885, "centre");
    expect_duty(11, 12, "centre");   expect_duty(23, 12, "centre");
    expect_duty(10, 0, "centre");    expect_duty(24, 0, "centre");
    // 17 + 1/16 rounds down to the centre.
    do_load(17 * 16 + 1);
    checks++; if (situation != SIT_CENTER) failures++;
    // 17 + 2/16 rounds up to the right quarter of 17: table 4.
    do_load(17 * 16 + 2);
    checks++; if (situation != SIT_RIGHTQ) failures++;
    expect_duty(17, 1000, "rightq"); expect_duty(18, 941, "rightq");
    expect_duty(16, 832, "rightq");  expect_duty(11, 9, "rightq");
    // Gap between 17 and 18: table 2 with n = 18.
    do_load(17 * 16 + 8);
    checks++; if (situation != SIT_GAP) failures++;
    expect_duty(17, 1000, "gap"); expect_duty(18, 1000, "gap");
    expect_duty(12, 26, "gap");   expect_duty(24, 6, "gap");
    expect_duty(11, 0, "gap");    expect_duty(25, 0, "gap");
    // Left quarter of 18: table 3.
    do_load(17 * 16 + 12);
    checks++; if (situation != SIT_LEFTQ) failures++;
    expect_duty(18, 1000, "leftq"); expect_duty(17, 941, "leftq");
    expect_duty(19, 832, "leftq");  expect_duty(24, 9, "leftq");

    // Table write: changes the pattern two clocks later.
    @(negedge clk);
    lut_wr_en = 1; lut_wr_sit = SIT_LEFTQ; lut_wr_tap = 4'd7; lut_wr_data = 10'd500;
    @(negedge clk);
    lut_wr_en = 0;
    @(posedge clk); #1;
    expect_duty(19, 500, "table write");
    rst_n = 0; #1; rst_n = 1;

    // Edges and the whole axis.
    foreach (edge_pos[i]) begin do_load(edge_pos[i]); check_pattern(edge_pos[i]); end
    for (int k = 0; k < 300; k++) begin
      int p;
      p = 8 + int'($urandom_range(0, 128 * 16));
      do_load(p);
      check_pattern(p);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
