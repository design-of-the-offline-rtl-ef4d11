// tb_pwm_bank: 8 channels at the default 1000-step period and a 100 MHz
// clock. Checks that the period is 10 us (1000 clocks between
// period_start pulses), that every channel is high for exactly its duty
// in clocks, starting on the clock after period_start and without gaps,
// that duty 0 and duty >= 1000 give off and always-on, and that a duty
// change in mid-period shows only from the next period on.
`timescale 1ns/1ps
module tb_pwm_bank;
  import ote_pkg::*;

  localparam int NCH = 8;

  logic clk = 0, rst_n = 0;
  duty_t duty [NCH];
  logic pwm [NCH];
  logic period_start;
  int checks = 0, failures = 0;

  pwm_bank #(.NUM_CH(NCH)) dut (.*);

  always #5 clk = ~clk;   // 100 MHz

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Duty in force for the period now running, as the model sees it.
  int cur [NCH];
  int high_cnt [NCH], first_hi [NCH], last_hi [NCH];
  int cyc;           // clocks since the last period_start
  realtime t_start, t_prev;
  int periods = 0;

  task automatic close_period();
    for (int i = 0; i < NCH; i++) begin
      int want;
      want = (cur[i] > 1000) ? 1000 : cur[i];
      checks++;
      if (high_cnt[i] != want) begin
        failures++;
        $display("period %0d ch %0d: high %0d clocks, want %0d", periods, i, high_cnt[i], want);
      end
      if (want > 0) begin
        checks++;
        if (first_hi[i] != 1 || last_hi[i] != want) begin
          failures++;
          $display("period %0d ch %0d: high from %0d to %0d", periods, i, first_hi[i], last_hi[i]);
        end
      end
    end
  endtask

  // Sample after each edge. The clock of period_start still shows the
  // last clock of the old period's on-time.
  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      int k;
      k = period_start ? 1000 : cyc + 1;
      for (int i = 0; i < NCH; i++)
        if (pwm[i] && periods > 0) begin
          high_cnt[i]++;
          if (first_hi[i] < 0) first_hi[i] = k;
          last_hi[i] = k;
        end
      cyc++;
      if (period_start) begin
        if (periods > 0) begin
          close_period();
          checks++;
          if ($realtime - t_prev != 10000.0) begin
            failures++;
            $display("period length %.1f ns", $realtime - t_prev);
          end
        end
        t_prev = $realtime;
        periods++;
        for (int i = 0; i < NCH; i++) begin
          cur[i] = int'(duty[i]); high_cnt[i] = 0; first_hi[i] = -1; last_hi[i] = -1;
        end
        cyc = 0;
      end
    end
  end

  initial begin
    duty = '{0, 1, 12, 500, 885, 999, 1000, 1023};
    repeat (2) @(posedge clk);
    #2 rst_n = 1;
    wait (periods == 3);
    // Change in mid-period: period 3 keeps the old duties.
    repeat (300) @(posedge clk);
    #2 duty = '{1000, 0, 608, 1, 47, 334, 12, 6};
    wait (periods == 6);
    #2 duty = '{142, 142, 142, 142, 0, 0, 0, 0};
    wait (periods == 9);
    @(posedge clk);
    checks++;
    if (periods != 9) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
