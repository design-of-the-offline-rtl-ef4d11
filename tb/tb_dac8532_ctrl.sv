// tb_dac8532_ctrl: drives write requests into the DAC driver and checks,
// through a bit-level model of the DAC, the codes that reach outputs A and
// B, the 24-bit frame layout, that A goes first when both are requested,
// that a request made while busy is kept and sent with its newest code,
// the 25 MHz serial clock and the frame length (48 * HALF clocks).
`timescale 1ns/1ps
module tb_dac8532_ctrl;
  logic clk = 0, rst_n = 0;
  logic wr_a = 0, wr_b = 0;
  logic [15:0] code_a = 0, code_b = 0;
  logic sync_n, sclk, din, busy, done;
  logic [15:0] out_a, out_b;
  int frames, bad_frames;
  logic [23:0] last_frame;
  int checks = 0, failures = 0;

  dac8532_ctrl #(.HALF(2)) dut (.*);
  dac8532_model dac (.sync_n, .sclk, .din, .out_a, .out_b, .frames, .bad_frames, .last_frame);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sclk period and sync_n low time.
  realtime t_rise = 0, t_sync = 0;
  always @(posedge sclk) begin
    if (t_rise > t_sync && !sync_n) begin
      checks++;
      if ($realtime - t_rise != 40.0) begin
        failures++; $display("sclk period %.1f", $realtime - t_rise);
      end
    end
    t_rise = $realtime;
  end
  always @(negedge sync_n) t_sync = $realtime;
  always @(posedge sync_n) if (t_sync > 0) begin
    checks++;
    if ($realtime - t_sync != 960.0) begin
      failures++; $display("frame length %.1f ns", $realtime - t_sync);
    end
  end

  task automatic req(bit a, bit b, logic [15:0] ca, logic [15:0] cb);
    @(negedge clk);
    wr_a = a; wr_b = b;
    if (a) code_a = ca;
    if (b) code_b = cb;
    @(negedge clk);
    wr_a = 0; wr_b = 0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy || dut.pend_a || dut.pend_b) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  task automatic expect_out(logic [15:0] a, logic [15:0] b, int nframes, string tag);
    checks += 3;
    if (out_a != a) begin failures++; $display("%s: out_a %h want %h", tag, out_a, a); end
    if (out_b != b) begin failures++; $display("%s: out_b %h want %h", tag, out_b, b); end
    if (frames != nframes) begin failures++; $display("%s: %0d frames want %0d", tag, frames, nframes); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    req(1, 0, 16'h8000, 0);
    wait_idle();
    expect_out(16'h8000, 16'h0000, 1, "A");
    checks++; if (last_frame != 24'h308000) begin failures++; $display("frame A %h", last_frame); end
    req(0, 1, 0, 16'h1234);
    wait_idle();
    expect_out(16'h8000, 16'h1234, 2, "B");
    checks++; if (last_frame != 24'h341234) begin failures++; $display("frame B %h", last_frame); end
    // Both at once: A first, then B.
    req(1, 1, 16'hFFFF, 16'h0001);
    @(negedge sync_n);
    @(posedge sync_n);
    checks++; if (last_frame != 24'h30FFFF) begin failures++; $display("first of two %h", last_frame); end
    wait_idle();
    expect_out(16'hFFFF, 16'h0001, 4, "A+B");
    // Requests while busy: the newest code of each is sent.
    req(1, 0, 16'h1111, 0);
    repeat (10) @(negedge clk);
    req(0, 1, 0, 16'h2222);
    req(1, 0, 16'h3333, 0);
    wait_idle();
    expect_out(16'h3333, 16'h2222, 7, "busy");
    for (int k = 0; k < 20; k++) begin
      logic [15:0] ca, cb;
      ca = 16'($urandom); cb = 16'($urandom);
      req(1, 1, ca, cb);
      wait_idle();
      expect_out(ca, cb, 9 + 2 * k, "random");
    end
    checks++; if (bad_frames != 0) begin failures++; $display("%0d bad frames", bad_frames); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
