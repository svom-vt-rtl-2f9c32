// pixel_calibrator -- real-time dark / flat correction of one pixel per clock.
//
// For every pixel the calibrator computes
//     out = OFFSET + (raw - dark) * 2^FLAT_SHIFT / flat
// where dark is the master dark pixel, flat the normalised master flat pixel
// stored with 2^FLAT_SHIFT = 32768 meaning a gain of 1.0, and OFFSET = 512
// keeps faint, dark-subtracted pixels above zero.  The result is a 16-bit
// unsigned integer.
//
// How it works: stage 1 subtracts the dark and splits the signed difference
// into sign and magnitude; the magnitude, shifted left by FLAT_SHIFT, is
// divided by the flat in a pipelined restoring divider (pipe_divider, QW
// quotient bits, one bit per stage); the last stage re-applies the sign,
// adds the offset and clamps to 0..65535.  The quotient is truncated toward
// zero.  A result above 65535 saturates to 65535 and raises out_sat; a
// result below zero clamps to 0 and raises out_clip.  A zero flat value is
// treated as an infinite gain correction: 65535 for raw >= dark, 0 below.
// An arbitrary TAG_W sideband (band and frame-store address in this design)
// travels with the pixel.
//
// Timing: results appear QW+3 clocks after the operands (20 clocks at the
// defaults), one per clock, in order -- the calibration keeps pace with the
// camera readout.
//
// The subtract-then-divide order, the 32768 flat scale, the 512 offset and
// integer output follow the instrument description.  Truncation, clamping
// and the divider structure are this design's choices.
module pixel_calibrator
  import vt_pkg::*;
#(
  parameter int PIX_W      = vt_pkg::PIX_W,
  parameter int FLAT_SHIFT = vt_pkg::FLAT_SHIFT,
  parameter int OFFSET     = vt_pkg::CAL_OFFSET,
  parameter int QW         = 17,
  parameter int TAG_W      = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [PIX_W-1:0] raw,
  input  logic [PIX_W-1:0] dark,
  input  logic [PIX_W-1:0] flat,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [PIX_W-1:0] out_pix,
  output logic [TAG_W-1:0] out_tag,
  output logic             out_sat,
  output logic             out_clip
);

  localparam int NW   = PIX_W + FLAT_SHIFT;   // |raw - dark| << FLAT_SHIFT
  localparam int PMAX = (1 << PIX_W) - 1;
  localparam logic signed [QW+1:0] OFS_S  = (QW+2)'(OFFSET);
  localparam logic signed [QW+1:0] PMAX_S = (QW+2)'(PMAX);

  // ---- stage 1: dark subtraction ------------------------------------------
  logic             s1_valid, s1_neg;
  logic [PIX_W-1:0] s1_mag, s1_flat;
  logic [TAG_W-1:0] s1_tag;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_neg   <= 1'b0;
      s1_mag   <= '0;
      s1_flat  <= '0;
      s1_tag   <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_neg   <= raw < dark;
      s1_mag   <= (raw < dark) ? dark - raw : raw - dark;
      s1_flat  <= flat;
      s1_tag   <= in_tag;
    end
  end

  // ---- stages 2 .. QW+2: division by the flat --------------------------------
  logic             d_valid, d_ovf, d_neg;
  logic [QW-1:0]    d_quo;
  logic [TAG_W-1:0] d_tag;

  pipe_divider #(.NW(NW), .DW(PIX_W), .QW(QW), .TAG_W(TAG_W + 1)) u_div (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (s1_valid),
    .in_num   ({s1_mag, {FLAT_SHIFT{1'b0}}}),
    .in_den   (s1_flat),
    .in_tag   ({s1_neg, s1_tag}),
    .out_valid(d_valid),
    .out_quo  (d_quo),
    .out_ovf  (d_ovf),
    .out_tag  ({d_neg, d_tag})
  );

  // ---- last stage: sign, offset, clamp ---------------------------------------
  logic signed [QW+1:0] res;
  logic                 sat_c, clip_c;

  always_comb begin
    if (d_neg) res = OFS_S - $signed({2'b00, d_quo});
    else       res = OFS_S + $signed({2'b00, d_quo});
    // A zero flat or an oversized quotient: positive saturates, negative clips.
    sat_c  = d_ovf ? !d_neg : (res > PMAX_S);
    clip_c = d_ovf ? d_neg  : (res < 0);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pix   <= '0;
      out_tag   <= '0;
      out_sat   <= 1'b0;
      out_clip  <= 1'b0;
    end else begin
      out_valid <= d_valid;
      out_tag   <= d_tag;
      out_sat   <= sat_c;
      out_clip  <= clip_c;
      if (sat_c)       out_pix <= PIX_W'(PMAX);
      else if (clip_c) out_pix <= '0;
      else             out_pix <= PIX_W'(res);
    end
  end

endmodule
