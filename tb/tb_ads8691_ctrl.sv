// tb_ads8691_ctrl: runs the HV read-out against a bit-level ADC model fed
// with random 18-bit codes. Checks that each sample equals the code the
// model converted at the start of that conversion, that cs_n stays high
// for at least the conversion time, that no samples appear while enable
// is low, and the sample rate: one sample every 80 + 36*2 = 152 clocks.
`timescale 1ns/1ps
module tb_ads8691_ctrl;
  logic clk = 0, rst_n = 0, enable = 0;
  logic cs_n, sclk, sdi, sdo;
  logic [17:0] sample, vin_code = 0;
  logic sample_valid;
  int conversions, timing_errors;
  int checks = 0, failures = 0;

  ads8691_ctrl #(.HALF(2), .CONV_CLKS(80)) dut (.*);
  ads8691_model adc (.cs_n, .sclk, .sdi, .sdo, .vin_code, .conversions, .timing_errors);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // The code sampled at each conversion start, in order.
  logic [17:0] expq [$];
  always @(posedge cs_n) if (rst_n) begin
    expq.push_back(vin_code);
  end
  // New analog value now and then.
  always @(posedge clk) vin_code <= 18'($urandom);

  int nsamples = 0;
  realtime t_last = 0;
  always @(posedge clk) if (rst_n && sample_valid) begin
    nsamples++;
    checks++;
    if (expq.size() < 2) begin
      failures++; $display("sample with no conversion");
    end else begin
      logic [17:0] want;
      want = expq.pop_front();
      if (sample != want) begin failures++; $display("sample %h want %h", sample, want); end
    end
    if (!enable) begin failures++; $display("sample while disabled"); end
    if (t_last > 0) begin
      checks++;
      if ($realtime - t_last != 1520.0) begin
        failures++; $display("sample spacing %.1f ns", $realtime - t_last);
      end
    end
    t_last = $realtime;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // First conversion: the one started by cs_n rising out of reset is not
    // seen, so the model queue starts with the first cs_n rising edge.
    repeat (50) @(posedge clk);
    checks++; if (nsamples != 0) failures++;
    // cs_n has been high since reset: the next read gives whatever the model
    // held, so prime the queue with it.
    expq.push_back(adc.result);
    @(negedge clk) enable = 1;
    wait (nsamples == 20);
    @(negedge clk) enable = 0;
    repeat (400) @(posedge clk);
    checks++; if (nsamples > 21) begin failures++; $display("samples kept coming"); end
    checks++; if (timing_errors != 0) begin failures++; $display("%0d timing errors", timing_errors); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
