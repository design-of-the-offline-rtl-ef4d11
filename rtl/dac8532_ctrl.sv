// dac8532_ctrl: serial driver for the DAC8532 dual 16-bit DAC.
//
// The DAC sets the voltage U behind the strip switches (overall strip
// amplitude, set from the beam current) and behind the dose and
// environment outputs. A write request for output A or B is held pending
// until it has been sent, so the host may request both at once; A goes
// first. Each write is one 24-bit frame, MSB first, framed by sync_n low:
//   [23:22] 00   [21] LD B   [20] LD A   [19] 0   [18] buffer select (0 A, 1 B)
//   [17:16] 00 (normal power)   [15:0] code
// Both load bits are set, so the code reaches the output at the end of
// the frame. din changes with the rising edge of sclk and is taken by the
// DAC on the falling edge; sclk idles low. The frame layout comes from the
// DAC8532 data sheet; the paper names the part only.
//
// Timing: sclk runs at clk / (2 * HALF) (25 MHz for a 100 MHz clock and
// HALF = 2). A frame takes 48*HALF clocks plus 2*HALF clocks of sync_n
// high before the next one. done pulses when a frame ends; busy is high
// while a frame is on the wire.
module dac8532_ctrl #(
  parameter int unsigned HALF = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_a,
  input  logic [15:0] code_a,
  input  logic        wr_b,
  input  logic [15:0] code_b,
  output logic        sync_n,
  output logic        sclk,
  output logic        din,
  output logic        busy,
  output logic        done
);

  localparam logic [7:0] CTRL_A = 8'h30;
  localparam logic [7:0] CTRL_B = 8'h34;
  localparam int unsigned HW = (HALF > 1) ? $clog2(HALF) + 1 : 1;

  typedef enum logic [1:0] {S_IDLE, S_HIGH, S_LOW, S_GAP} state_e;

  state_e       state;
  logic         pend_a, pend_b;
  logic [15:0]  hold_a, hold_b;
  logic [23:0]  shreg;
  logic [4:0]   bitcnt;
  logic [HW-1:0] tcnt;
  logic          tlast;

  assign tlast = (tcnt == HW'(HALF - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      pend_a <= 1'b0;
      pend_b <= 1'b0;
      hold_a <= '0;
      hold_b <= '0;
      shreg  <= '0;
      bitcnt <= '0;
      tcnt   <= '0;
      sync_n <= 1'b1;
      sclk   <= 1'b0;
      din    <= 1'b0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (wr_a) begin pend_a <= 1'b1; hold_a <= code_a; end
      if (wr_b) begin pend_b <= 1'b1; hold_b <= code_b; end
      unique case (state)
        S_IDLE: begin
          tcnt <= '0;
          if (pend_a || pend_b) begin
            logic [23:0] frame;
            if (pend_a) begin
              frame = {CTRL_A, hold_a};
              if (!wr_a) pend_a <= 1'b0;
            end else begin
              frame = {CTRL_B, hold_b};
              if (!wr_b) pend_b <= 1'b0;
            end
            sync_n <= 1'b0;
            sclk   <= 1'b1;
            din    <= frame[23];
            shreg  <= {frame[22:0], 1'b0};
            bitcnt <= 5'd23;
            state  <= S_HIGH;
          end
        end
        S_HIGH: begin
          tcnt <= tlast ? '0 : tcnt + 1'b1;
          if (tlast) begin
            sclk  <= 1'b0;                 // DAC samples din here
            state <= S_LOW;
          end
        end
        S_LOW: begin
          tcnt <= tlast ? '0 : tcnt + 1'b1;
          if (tlast) begin
            if (bitcnt == 0) begin
              sync_n <= 1'b1;
              done   <= 1'b1;
              state  <= S_GAP;
            end else begin
              sclk   <= 1'b1;
              din    <= shreg[23];
              shreg  <= {shreg[22:0], 1'b0};
              bitcnt <= bitcnt - 1'b1;
              state  <= S_HIGH;
            end
          end
        end
        default: begin  // S_GAP: sync_n high between frames
          tcnt <= tcnt + 1'b1;
          if (tcnt == HW'(2 * HALF - 1)) begin
            tcnt  <= '0;
            state <= S_IDLE;
          end
        end
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
