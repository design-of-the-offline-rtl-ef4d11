// tb_host_regs: AXI4-Lite master tasks exercise the register bank. Checks
// read-back of every read-write register, the one-clock load and write
// strobes with their data, the decoding of lookup-table writes, the
// read-only status and HV registers, the sample counter, address and data
// arriving on different clocks, held responses under back-pressure and an
// unmapped read returning 0.
`timescale 1ns/1ps
module tb_host_regs;
  import ote_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [8:0]  s_awaddr = 0, s_araddr = 0;
  logic        s_awvalid = 0, s_wvalid = 0, s_bready = 0, s_arvalid = 0, s_rready = 0;
  logic [31:0] s_wdata = 0;
  logic [3:0]  s_wstrb = 4'hF;
  logic        s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0]  s_bresp, s_rresp;
  logic [31:0] s_rdata;
  logic        beam_on, dose_on, adc_en, pos_load, dac_wr_a, dac_wr_b, lut_wr_en;
  logic [11:0] pos;
  duty_t       dose_duty, lut_wr_data;
  logic [15:0] dac_code_a, dac_code_b;
  situation_e  lut_wr_sit;
  logic [3:0]  lut_wr_tap;
  logic [17:0] hv_sample = 0;
  logic        hv_valid = 0;
  situation_e  situation = SIT_GAP;
  logic [8:0]  ref_strip = 9'd77;
  logic        edge_clip = 1'b1, dac_busy = 1'b0;
  int checks = 0, failures = 0;

  host_regs dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Strobe monitors: count pulses and remember the data seen with them.
  int n_pos = 0, n_dac_a = 0, n_dac_b = 0, n_lut = 0;
  logic [11:0] seen_pos;
  logic [15:0] seen_a, seen_b;
  int seen_lut [$];
  always @(posedge clk) if (rst_n) begin
    if (pos_load)  begin n_pos++;   seen_pos = pos; end
    if (dac_wr_a)  begin n_dac_a++; seen_a = dac_code_a; end
    if (dac_wr_b)  begin n_dac_b++; seen_b = dac_code_b; end
    if (lut_wr_en) begin n_lut++;   seen_lut.push_back({int'(lut_wr_sit), int'(lut_wr_tap), int'(lut_wr_data)} ); end
  end

  task automatic axi_write(logic [8:0] addr, logic [31:0] data, int aw_delay = 0, int b_delay = 0);
    @(negedge clk);
    s_wdata = data; s_wvalid = 1;
    if (aw_delay == 0) begin s_awaddr = addr; s_awvalid = 1; end
    repeat (aw_delay) @(negedge clk);
    s_awaddr = addr; s_awvalid = 1;
    #1;
    while (!(s_awready && s_wready)) begin @(negedge clk); #1; end
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    repeat (b_delay) begin
      checks++;
      if (!s_bvalid) begin failures++; $display("bvalid dropped before bready"); end
      @(negedge clk);
    end
    s_bready = 1;
    while (!s_bvalid) @(negedge clk);
    @(negedge clk);
    s_bready = 0;
  endtask

  task automatic axi_read(logic [8:0] addr, output logic [31:0] data, input int r_delay = 0);
    @(negedge clk);
    s_araddr = addr; s_arvalid = 1;
    #1;
    while (!s_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    data = s_rdata;
    repeat (r_delay) begin
      @(negedge clk);
      checks++;
      if (!s_rvalid || s_rdata != data) begin failures++; $display("read response changed"); end
    end
    s_rready = 1;
    @(negedge clk);
    s_rready = 0;
  endtask

  task automatic expect_read(logic [8:0] addr, logic [31:0] want, string tag, int r_delay = 0);
    logic [31:0] got;
    axi_read(addr, got, r_delay);
    checks++;
    if (got != want) begin failures++; $display("%s: read %h want %h", tag, got, want); end
  endtask

  task automatic expect_eq(int got, int want, string tag);
    checks++;
    if (got != want) begin failures++; $display("%s: %0d want %0d", tag, got, want); end
  endtask

  initial begin
    logic [31:0] d;
    repeat (2) @(posedge clk);
    rst_n = 1;
    expect_read(9'h000, 0, "CTRL reset");
    expect_read(9'h004, 32'd1024, "POS reset");

    axi_write(9'h000, 32'h7);
    expect_eq({beam_on, dose_on, adc_en}, 3'b111, "ctrl outputs");
    expect_read(9'h000, 7, "CTRL");
    axi_write(9'h000, 32'hFFFF_FFFA);
    expect_eq({beam_on, dose_on, adc_en}, 3'b010, "ctrl outputs 2");

    axi_write(9'h004, 32'h0000_0118, 3);
    expect_eq(n_pos, 1, "pos strobes");
    expect_eq(seen_pos, 12'h118, "pos data");
    expect_read(9'h004, 32'h118, "POS");

    axi_write(9'h008, 32'd608, 0, 4);
    expect_read(9'h008, 608, "DOSE");
    expect_eq(dose_duty, 608, "dose output");

    axi_write(9'h00C, 32'hABCD_8001);
    axi_write(9'h010, 32'h0000_4321);
    expect_eq(n_dac_a, 1, "dac a strobes");
    expect_eq(n_dac_b, 1, "dac b strobes");
    expect_eq(seen_a, 16'h8001, "dac a data");
    expect_eq(seen_b, 16'h4321, "dac b data");
    expect_read(9'h00C, 32'h8001, "DAC_A");
    expect_read(9'h010, 32'h4321, "DAC_B", 3);

    // Lookup-table window.
    axi_write(9'h100 + 4 * (16 * 2 + 7), 32'd512);
    axi_write(9'h100 + 4 * (16 * 3 + 12), 32'd1000);
    expect_eq(n_lut, 2, "lut strobes");
    expect_eq(seen_lut[0], {32'd2, 32'd7, 32'd512}, "lut write 1");
    expect_eq(seen_lut[1], {32'd3, 32'd12, 32'd1000}, "lut write 2");

    // Status and HV.
    expect_read(9'h018, {19'd0, 1'b0, 1'b1, 9'd77, 2'(SIT_GAP)}, "STATUS");
    for (int k = 0; k < 5; k++) begin
      @(negedge clk);
      hv_sample = 18'h2A5A5 + 18'(k); hv_valid = 1;
      @(negedge clk);
      hv_valid = 0;
    end
    expect_read(9'h014, 32'h2A5A9, "HV");
    expect_read(9'h01C, 5, "ADC_COUNT");
    expect_read(9'h0F0, 0, "unmapped");
    expect_eq(n_pos + n_dac_a + n_dac_b, 3, "no stray strobes");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
