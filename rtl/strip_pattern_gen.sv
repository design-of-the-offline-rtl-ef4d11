// strip_pattern_gen: beam-centre coordinate to per-strip duty cycles.
//
// The host gives the beam centre as a strip coordinate S (strip k has its
// centre at S = k, strips numbered 1..NUM_STRIPS, so the chamber axis is
// at S = 64.5 for 128 strips; the host derives S from the beam position x
// as S = x / 2 mm + 64.5). S is unsigned fixed point with FRAC_W fraction
// bits. Following the proximity principle, S is rounded to the nearest
// quarter strip (halves round up); the quarter left over selects one of
// four situations, each with its own lookup table:
//   S = n        centre of strip n      table "centre",        peak at n
//   S = n + 1/4  right quarter of n     table "right quarter", peak at n
//   S = n + 1/2  gap between n and n+1  table "gap",           n+1 as reference
//   S = n + 3/4  left quarter of n+1    table "left quarter",  n+1 as reference
// The 13 table entries are laid onto strips reference-6 .. reference+6;
// every other strip gets duty 0, and entries that fall outside
// 1..NUM_STRIPS are dropped (edge_clip flags that). Rounding to a quarter
// strip (0.5 mm) bounds the position error at +/-0.25 mm.
//
// The quarter-strip method, the tables and the 13-strip width follow the
// chamber description; the fixed-point format, the round-half-up rule and
// the register timing are this design's choices.
//
// Timing: load captures pos_in; two clock edges later duty[] shows the new
// pattern. duty[] is re-evaluated every cycle, so a table write also shows
// two cycles later. duty[i] belongs to strip i+1.
module strip_pattern_gen
  import ote_pkg::*;
#(
  parameter int unsigned NUM_STRIPS = NUM_STRIPS_DEF,
  parameter int unsigned FRAC_W     = 4,
  parameter int unsigned INT_W      = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // new beam centre
  input  logic                    load,
  input  logic [INT_W+FRAC_W-1:0] pos_in,
  // table write port (host)
  input  logic                    lut_wr_en,
  input  situation_e              lut_wr_sit,
  input  logic [3:0]              lut_wr_tap,
  input  duty_t                   lut_wr_data,
  // pattern
  output duty_t                   duty [NUM_STRIPS],
  output situation_e              situation,
  output logic [INT_W:0]          ref_strip,
  output logic                    edge_clip
);

  localparam int unsigned POS_W = INT_W + FRAC_W;
  localparam int unsigned Q_W   = INT_W + 2;   // quarter-strip units

  logic [POS_W-1:0] pos_r;
  logic [Q_W:0]     q;          // rounded position, quarter strips
  logic [INT_W:0]   n_floor;
  situation_e       sit;
  logic [INT_W:0]   ref_c;
  lut_row_t         row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pos_r <= POS_W'(64 << FRAC_W);
    else if (load) pos_r <= pos_in;
  end

  // Round to the nearest quarter strip.
  always_comb begin
    logic [POS_W:0] sum;
    sum = {1'b0, pos_r} + (POS_W+1)'(1 << (FRAC_W - 3));
    q   = sum[POS_W:FRAC_W-2];
    n_floor = q[Q_W:2];
    unique case (q[1:0])
      2'd0: begin sit = SIT_CENTER; ref_c = n_floor;        end
      2'd1: begin sit = SIT_RIGHTQ; ref_c = n_floor;        end
      2'd2: begin sit = SIT_GAP;    ref_c = n_floor + 1'b1; end
      default: begin sit = SIT_LEFTQ; ref_c = n_floor + 1'b1; end
    endcase
  end

  gauss_lut u_lut (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (lut_wr_en),
    .wr_sit  (lut_wr_sit),
    .wr_tap  (lut_wr_tap),
    .wr_data (lut_wr_data),
    .rd_sit  (sit),
    .rd_row  (row)
  );

  // Lay the table onto the strips: strip s = i+1 takes tap s - ref + 6.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_STRIPS; i++) duty[i] <= '0;
      situation <= SIT_CENTER;
      ref_strip <= '0;
      edge_clip <= 1'b0;
    end else begin
      for (int i = 0; i < NUM_STRIPS; i++) begin
        int tap;
        tap = i + 1 - int'(ref_c) + int'(LUT_HALF);
        if (tap >= 0 && tap < int'(LUT_TAPS)) duty[i] <= row[tap];
        else                                   duty[i] <= '0;
      end
      situation <= sit;
      ref_strip <= ref_c;
      edge_clip <= (int'(ref_c) < int'(LUT_HALF) + 1) ||
                   (int'(ref_c) + int'(LUT_HALF) > int'(NUM_STRIPS));
    end
  end

endmodule
