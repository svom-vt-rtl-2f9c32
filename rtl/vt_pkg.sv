// vt_pkg -- types and constants shared by the VT onboard FPGA pipeline.
//
// The VT camera delivers one exposure as a single stream in which lines of
// the blue band (400-650 nm) and the red band (650-1000 nm) alternate.  Each
// band frame is 2048 x 2048 pixels of 16 bits.  The FPGA calibrates every
// pixel against a master dark and a normalised master flat (the flat is
// stored with 32768 meaning 1.0), adds 512 so that no calibrated value is
// negative, and writes the result de-interlaced into one frame per band.  In
// parallel it judges the frame: the platform-stability count from the image
// header, and a background level taken from five windows.
//
// The frame size, the 32768 flat scale, the 512 offset, the five windows and
// the two bands follow the description of the instrument.  The field widths
// of the stability count and window coordinates, the window size and the
// encodings below are this design's own choices.
package vt_pkg;

  localparam int PIX_W      = 16;     // pixel word
  localparam int IMG_W      = 2048;   // pixels per line of one band
  localparam int IMG_H      = 2048;   // lines per band frame
  localparam int N_BANDS    = 2;
  localparam int N_WIN      = 5;      // background windows
  localparam int WIN_SIZE   = 64;     // window side in pixels (own choice)
  localparam int COORD_W    = 12;     // row / column field, holds 0..4095
  localparam int STAB_W     = 8;      // header stability count, seconds
  localparam int CAL_OFFSET = 512;    // added to every calibrated pixel
  localparam int FLAT_SHIFT = 15;     // flat value 1 << 15 = 32768 means 1.0
  localparam int ADDR_W     = 23;     // word address into the two band frames

  typedef logic [PIX_W-1:0]   pix_t;
  typedef logic [COORD_W-1:0] coord_t;

  // Band of a line.  Lines alternate, starting with FIRST_BAND.
  typedef enum logic {
    BAND_BLUE = 1'b0,
    BAND_RED  = 1'b1
  } band_e;

  // One raw pixel with its place in its own (de-interlaced) band frame.
  typedef struct packed {
    pix_t              pix;
    band_e             band;
    coord_t            row;    // line within the band frame
    coord_t            col;    // pixel within the line
    logic              sof;    // first pixel of this band frame
    logic              eof;    // last pixel of this band frame
    logic [ADDR_W-1:0] addr;   // band*W*H + row*W + col
  } pix_pos_t;

  // Run-time settings, written by the CPU.
  typedef struct packed {
    logic [STAB_W-1:0]          stab_thresh;  // minimum stable seconds
    pix_t                       flux_cut;     // background sample: pix < flux_cut
    pix_t                       bg_thresh;    // accept if mean <= bg_thresh
    logic [N_WIN-1:0][COORD_W-1:0] win_x;     // window origins (column)
    logic [N_WIN-1:0][COORD_W-1:0] win_y;     // window origins (row)
  } qa_cfg_t;

  // Number of sampled pixels: at most N_WIN windows of WIN_SIZE^2.
  localparam int CNT_W = $clog2(N_WIN * WIN_SIZE * WIN_SIZE + 1);
  localparam int SUM_W = PIX_W + CNT_W;

  typedef struct packed {
    logic [N_WIN-1:0][PIX_W-1:0] win_mean;   // mean of each window, 0 if empty
    logic [N_WIN-1:0][CNT_W-1:0] win_count;  // sampled pixels per window
    pix_t                        mean;       // mean over all windows
    logic [CNT_W-1:0]            count;      // sampled pixels in all windows
    logic                        bg_ok;      // count > 0 and mean <= bg_thresh
  } bg_stats_t;

  typedef enum logic [1:0] {
    QA_ACCEPT         = 2'd0,
    QA_REJ_STABILITY  = 2'd1,   // header count below threshold: discarded
    QA_REJ_BACKGROUND = 2'd2    // stable, but background too high
  } qa_verdict_e;

  typedef struct packed {
    qa_verdict_e       verdict;
    logic [STAB_W-1:0] stab_count;
    bg_stats_t         bg;
  } qa_result_t;

endpackage
