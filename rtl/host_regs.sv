// host_regs: AXI4-Lite register bank between the processing system and
// the real-time logic.
//
// The processor side receives the irradiation settings from the host PC
// (beam position, beam size, dose, beam current, energy), converts them
// and writes the results here; the logic side generates the signals in
// real time. 32-bit registers, byte addresses:
//   0x00 CTRL      rw  [0] beam_on (strip PWM)  [1] dose_on (dose PWM)
//                      [2] adc_en (HV read-out)
//   0x04 POSITION  rw  [11:0] beam centre strip coordinate, 8.4 fixed point;
//                      a write loads it into the pattern generator
//   0x08 DOSE_DUTY rw  [9:0] dose switch on-time, per mille of the period
//   0x0C DAC_A     rw  [15:0] DAC output A code; a write sends it to the DAC
//   0x10 DAC_B     rw  [15:0] DAC output B code; a write sends it to the DAC
//   0x14 HV_ADC    ro  [17:0] latest HV sample
//   0x18 STATUS    ro  [1:0] situation  [10:2] reference strip
//                      [11] edge_clip  [12] dac_busy
//   0x1C ADC_COUNT ro  number of HV samples taken (wraps)
//   0x100 + 4*(16*sit + tap)  wo  lookup-table entry, [9:0] per mille
// The map and the bus are this design's choice; the paper only says that
// the processing system talks to the host and the logic does the real-time
// control. Unmapped reads return 0; writes there are ignored.
//
// Bus timing: a write is taken in the cycle where awvalid and wvalid are
// both high and no response is waiting (awready = wready then), with the
// response one clock later. A read is answered one clock after arvalid.
// Responses are always OKAY. Write strobes are ignored: every write is a
// full 32-bit word.
module host_regs
  import ote_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [8:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [8:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // towards the signal generators
  output logic        beam_on,
  output logic        dose_on,
  output logic        adc_en,
  output logic        pos_load,
  output logic [11:0] pos,
  output duty_t       dose_duty,
  output logic        dac_wr_a,
  output logic [15:0] dac_code_a,
  output logic        dac_wr_b,
  output logic [15:0] dac_code_b,
  output logic        lut_wr_en,
  output situation_e  lut_wr_sit,
  output logic [3:0]  lut_wr_tap,
  output duty_t       lut_wr_data,
  // status from the generators
  input  logic [17:0] hv_sample,
  input  logic        hv_valid,
  input  situation_e  situation,
  input  logic [8:0]  ref_strip,
  input  logic        edge_clip,
  input  logic        dac_busy
);

  localparam logic [8:0] A_CTRL = 9'h000, A_POS = 9'h004, A_DOSE = 9'h008,
                         A_DACA = 9'h00C, A_DACB = 9'h010, A_HV  = 9'h014,
                         A_STAT = 9'h018, A_CNT  = 9'h01C;

  logic        wr_fire;
  logic [31:0] adc_count;
  logic [17:0] hv_reg;

  assign wr_fire   = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_fire;
  assign s_wready  = wr_fire;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;

  // Writes.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid   <= 1'b0;
      beam_on    <= 1'b0;
      dose_on    <= 1'b0;
      adc_en     <= 1'b0;
      pos_load   <= 1'b0;
      pos        <= 12'(64 << 4);
      dose_duty  <= '0;
      dac_wr_a   <= 1'b0;
      dac_code_a <= '0;
      dac_wr_b   <= 1'b0;
      dac_code_b <= '0;
      lut_wr_en  <= 1'b0;
      lut_wr_sit <= SIT_CENTER;
      lut_wr_tap <= '0;
      lut_wr_data <= '0;
    end else begin
      pos_load  <= 1'b0;
      dac_wr_a  <= 1'b0;
      dac_wr_b  <= 1'b0;
      lut_wr_en <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        if (s_awaddr[8]) begin
          lut_wr_en   <= 1'b1;
          lut_wr_sit  <= situation_e'(s_awaddr[7:6]);
          lut_wr_tap  <= s_awaddr[5:2];
          lut_wr_data <= s_wdata[DUTY_W-1:0];
        end else begin
          unique case ({s_awaddr[8:2], 2'b00})
            A_CTRL: {adc_en, dose_on, beam_on} <= s_wdata[2:0];
            A_POS:  begin pos <= s_wdata[11:0]; pos_load <= 1'b1; end
            A_DOSE: dose_duty <= s_wdata[DUTY_W-1:0];
            A_DACA: begin dac_code_a <= s_wdata[15:0]; dac_wr_a <= 1'b1; end
            A_DACB: begin dac_code_b <= s_wdata[15:0]; dac_wr_b <= 1'b1; end
            default: ;
          endcase
        end
      end
    end
  end

  // HV samples.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hv_reg    <= '0;
      adc_count <= '0;
    end else if (hv_valid) begin
      hv_reg    <= hv_sample;
      adc_count <= adc_count + 1'b1;
    end
  end

  // Reads.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        unique case ({s_araddr[8:2], 2'b00})
          A_CTRL: s_rdata <= {29'd0, adc_en, dose_on, beam_on};
          A_POS:  s_rdata <= {20'd0, pos};
          A_DOSE: s_rdata <= 32'(dose_duty);
          A_DACA: s_rdata <= {16'd0, dac_code_a};
          A_DACB: s_rdata <= {16'd0, dac_code_b};
          A_HV:   s_rdata <= {14'd0, hv_reg};
          A_STAT: s_rdata <= {19'd0, dac_busy, edge_clip, ref_strip, situation};
          A_CNT:  s_rdata <= adc_count;
          default: s_rdata <= '0;
        endcase
      end
    end
  end

  // Bus rules: a response stays valid, unchanged, until it is taken.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                   s_bvalid && !s_bready |=> s_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                   s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
