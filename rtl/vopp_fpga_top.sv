// vopp_fpga_top -- FPGA front end of the VT onboard data processing unit.
//
// The VT camera reads out one exposure as a single stream in which lines of
// the blue and the red band alternate.  This top calibrates that stream in
// real time and judges its quality, so that the processor that follows only
// ever works on clean, single-band, quality-checked frames:
//
//   raw stream --> band_deinterlacer --+--> pixel_calibrator --> cal_* (to SDRAM)
//                  (band, row, col,    |    (dark, flat, +512)
//                   frame-store addr)  |
//                                      +--> image_quality_assessor --> qa_* (to CPU)
//   image header (stable seconds) -------->  (stability, 5-window background)
//
// Interface: one raw pixel per clock (raw_valid, raw_sof on the first pixel
// of an exposure).  dark_pix[b] and flat_pix[b] are the master dark and the
// normalised master flat (32768 = 1.0) of band b at the row and column of
// raw_pix, presented in the same clock by the frame-store reader outside this
// block (one calibration pixel per band, e.g. from per-band line buffers);
// the top picks the pair of the band it has identified for the line.  The
// calibrated pixel leaves on cal_* with the word address at which it belongs
// in the de-interlaced frame store (blue frame first, then red), CAL_LATENCY
// = 21 clocks after it entered.  The quality assessment works on the
// raw pixels, as its background threshold includes the dark current; a
// verdict per band frame leaves on qa_valid/qa about 110 clocks after that
// band's last pixel.  cfg holds the run-time thresholds and window positions.
//
// Timing: no back-pressure anywhere; every stage accepts one pixel per clock
// so the whole front end keeps pace with the readout.
//
// The split into calibration and quality assessment, the calibration
// arithmetic and the two quality tests follow the instrument description.
// The external interfaces (pixel stream with a start flag, calibration pixels
// in lock-step, address/data towards the frame store, plain configuration and
// verdict ports towards the processor bus) are this design's choices; the
// LVDS receiver, the SDRAM and its controller and the processor bus are not
// part of it.
module vopp_fpga_top
  import vt_pkg::*;
#(
  parameter int IMG_W = vt_pkg::IMG_W,
  parameter int IMG_H = vt_pkg::IMG_H
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // image header
  input  logic                      hdr_valid,
  input  logic [STAB_W-1:0]         hdr_stab_count,
  // raw interlaced pixel stream and matching calibration pixels
  input  logic                      raw_valid,
  input  logic                      raw_sof,
  input  pix_t                      raw_pix,
  input  pix_t [N_BANDS-1:0]        dark_pix,
  input  pix_t [N_BANDS-1:0]        flat_pix,
  // configuration
  input  qa_cfg_t                   cfg,
  // calibrated, de-interlaced output towards the frame store
  output logic                      cal_valid,
  output pix_t                      cal_pix,
  output band_e                     cal_band,
  output logic [ADDR_W-1:0]         cal_addr,
  output logic                      cal_sat,
  output logic                      cal_clip,
  output logic                      sync_err,
  // quality verdicts towards the processor
  output logic [N_BANDS-1:0]        qa_valid,
  output qa_result_t [N_BANDS-1:0]  qa
);

  // CAL_LATENCY = 1 (deinterlacer) + CAL_QW + 3 (calibrator) = 21 clocks.
  localparam int CAL_QW = 17;
  localparam int TAG_W  = 1 + ADDR_W;

  // ---- band identification and de-interlacing --------------------------------
  logic     pos_valid;
  pix_pos_t pos;

  band_deinterlacer #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_deint (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (raw_valid),
    .in_sof   (raw_sof),
    .in_pix   (raw_pix),
    .out_valid(pos_valid),
    .out      (pos),
    .sync_err (sync_err)
  );

  // The calibration pixels travel one register along with the raw pixel;
  // the band found for the line then selects its own dark and flat.
  pix_t [N_BANDS-1:0] dark_q, flat_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dark_q <= '0;
      flat_q <= '0;
    end else begin
      dark_q <= dark_pix;
      flat_q <= flat_pix;
    end
  end

  // ---- calibration -----------------------------------------------------------
  logic [TAG_W-1:0] cal_tag;

  pixel_calibrator #(.QW(CAL_QW), .TAG_W(TAG_W)) u_cal (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (pos_valid),
    .raw      (pos.pix),
    .dark     (dark_q[pos.band]),
    .flat     (flat_q[pos.band]),
    .in_tag   ({pos.band, pos.addr}),
    .out_valid(cal_valid),
    .out_pix  (cal_pix),
    .out_tag  (cal_tag),
    .out_sat  (cal_sat),
    .out_clip (cal_clip)
  );

  always_comb begin
    cal_band = band_e'(cal_tag[TAG_W-1]);
    cal_addr = cal_tag[ADDR_W-1:0];
  end

  // ---- quality assessment ----------------------------------------------------
  image_quality_assessor #(.N_BANDS(N_BANDS)) u_qa (
    .clk      (clk),
    .rst_n    (rst_n),
    .hdr_valid(hdr_valid),
    .hdr_count(hdr_stab_count),
    .cfg      (cfg),
    .in_valid (pos_valid),
    .in       (pos),
    .qa_valid (qa_valid),
    .qa       (qa)
  );

  // ---- stream rules ----------------------------------------------------------
  // Every calibrated pixel lands inside the two band frames.
  a_addr_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    cal_valid |-> (int'(cal_addr) < 2 * IMG_W * IMG_H));
  // The band encoded in the address agrees with the band flag.
  a_addr_band: assert property (@(posedge clk) disable iff (!rst_n)
    cal_valid |-> ((int'(cal_addr) >= IMG_W * IMG_H) == (cal_band == BAND_RED)));

endmodule
