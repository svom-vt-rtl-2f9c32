// image_quality_assessor -- per-band verdict on each exposure.
//
// An exposure is worth processing only if the platform was steady and the
// sky background is low.  The stability test comes first: when the stable-
// seconds count in the image header is below its threshold the exposure is
// discarded; otherwise its background decides.  This block holds one
// stability_check for the exposure and one background_estimator per band,
// because the two bands of an exposure arrive line-interlaced in the same
// stream and each band frame has its own background.
//
// How it works: the stability verdict is sampled at the first pixel of each
// band frame, so a header for the next exposure may arrive while the current
// one is still being read out, and is held from the frame's last pixel until
// its background result is ready, so the next frame may already have begun.
// Each band's estimator sees only the pixels of its band.  When an estimator
// finishes, the band's qa_valid pulses for one clock with the verdict
// (QA_REJ_STABILITY, QA_REJ_BACKGROUND or QA_ACCEPT), the stability count
// and the background statistics, which are always reported.  The frame's
// pixels are still calibrated and stored; the verdict tells the processor
// whether to use them.
//
// Timing: qa_valid[b] pulses 109 clocks after band b's last pixel arrives
// here (see background_estimator).  The order of the two tests follows the instrument
// description; sharing one header count between the two bands is this
// design's reading of the interlaced readout.
module image_quality_assessor
  import vt_pkg::*;
#(
  parameter int N_BANDS = vt_pkg::N_BANDS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      hdr_valid,
  input  logic [STAB_W-1:0]         hdr_count,
  input  qa_cfg_t                   cfg,
  input  logic                      in_valid,
  input  pix_pos_t                  in,
  output logic [N_BANDS-1:0]        qa_valid,
  output qa_result_t [N_BANDS-1:0]  qa
);

  logic              stab_ok;
  logic [STAB_W-1:0] stab_count;

  stability_check u_stab (
    .clk      (clk),
    .rst_n    (rst_n),
    .hdr_valid(hdr_valid),
    .hdr_count(hdr_count),
    .threshold(cfg.stab_thresh),
    .stab_ok  (stab_ok),
    .count    (stab_count)
  );

  for (genvar b = 0; b < N_BANDS; b++) begin : g_band
    logic              sel;
    logic              frame_stab_ok, done_stab_ok;
    logic [STAB_W-1:0] frame_stab_count, done_stab_count;
    logic              bg_valid;
    bg_stats_t         bg;

    always_comb sel = in_valid && (int'(in.band) == b);

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        frame_stab_ok    <= 1'b0;
        frame_stab_count <= '0;
        done_stab_ok     <= 1'b0;
        done_stab_count  <= '0;
      end else if (sel) begin
        if (in.sof) begin
          frame_stab_ok    <= stab_ok;
          frame_stab_count <= stab_count;
        end
        // Held for the verdict while the next frame may already start.
        if (in.eof) begin
          done_stab_ok     <= in.sof ? stab_ok : frame_stab_ok;
          done_stab_count  <= in.sof ? stab_count : frame_stab_count;
        end
      end
    end

    background_estimator u_bg (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (sel),
      .in       (in),
      .flux_cut (cfg.flux_cut),
      .bg_thresh(cfg.bg_thresh),
      .win_x    (cfg.win_x),
      .win_y    (cfg.win_y),
      .res_valid(bg_valid),
      .res      (bg),
      .busy     ()
    );

    always_comb begin
      qa_valid[b]      = bg_valid;
      qa[b].stab_count = done_stab_count;
      qa[b].bg         = bg;
      if (!done_stab_ok)   qa[b].verdict = QA_REJ_STABILITY;
      else if (!bg.bg_ok)  qa[b].verdict = QA_REJ_BACKGROUND;
      else                 qa[b].verdict = QA_ACCEPT;
    end
  end

endmodule
