// band_deinterlacer -- band identification and de-interlacing addresses.
//
// The camera stream carries both bands of one exposure with their lines
// interlaced: 2*IMG_H lines of IMG_W pixels, the first line belonging to
// FIRST_BAND and the bands alternating line by line.  This block counts
// columns and interlaced lines, names the band of each line, and gives each
// pixel its row and column inside its own single-band frame together with
// the word address at which it is stored in a band-major frame store
// (address = band*IMG_W*IMG_H + row*IMG_W + col).  It also marks the first
// and last pixel of each band frame so downstream per-frame logic can start
// and close its statistics.
//
// Interface: one pixel per clock when in_valid is high, no back-pressure;
// in_sof marks the first pixel of an exposure.  A start marker that arrives
// before the previous exposure is complete restarts the counters and pulses
// sync_err.  Pixels before the first start marker are dropped.
// Timing: out/out_valid are registered, one cycle after the input.
//
// The line interlacing, the per-line band decision and the 2048 x 2048 band
// frame follow the instrument description; strict alternation from a start
// marker and the band-major address layout are this design's choices.
module band_deinterlacer
  import vt_pkg::*;
#(
  parameter int    IMG_W      = vt_pkg::IMG_W,
  parameter int    IMG_H      = vt_pkg::IMG_H,
  parameter band_e FIRST_BAND = BAND_BLUE
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  logic     in_sof,
  input  pix_t     in_pix,
  output logic     out_valid,
  output pix_pos_t out,
  output logic     sync_err
);

  localparam int LINES = 2 * IMG_H;

  coord_t col_q;               // next column
  logic [COORD_W:0] line_q;    // next interlaced line, 0 .. 2*IMG_H-1
  logic   active_q;            // inside an exposure

  // Position of the current input pixel.
  coord_t          col_c;
  logic [COORD_W:0] line_c;
  logic            take;

  always_comb begin
    col_c  = in_sof ? '0 : col_q;
    line_c = in_sof ? '0 : line_q;
    take   = in_valid && (in_sof || active_q);
  end

  band_e  band_c;
  coord_t row_c;
  logic   last_col, last_band_line;

  always_comb begin
    band_c         = band_e'(line_c[0] ^ FIRST_BAND);
    row_c          = coord_t'(line_c >> 1);
    last_col       = (int'(col_c) == IMG_W - 1);
    last_band_line = (int'(line_c) >= LINES - 2);   // last line of either band
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      col_q     <= '0;
      line_q    <= '0;
      active_q  <= 1'b0;
      out_valid <= 1'b0;
      out       <= '0;
      sync_err  <= 1'b0;
    end else begin
      out_valid <= take;
      sync_err  <= in_valid && in_sof && active_q;
      if (take) begin
        out.pix  <= in_pix;
        out.band <= band_c;
        out.row  <= row_c;
        out.col  <= col_c;
        out.sof  <= (row_c == '0) && (col_c == '0);
        out.eof  <= last_band_line && last_col;
        out.addr <= ADDR_W'(int'(band_c) * IMG_W * IMG_H + int'(row_c) * IMG_W + int'(col_c));
        if (last_col) begin
          col_q <= '0;
          if (int'(line_c) == LINES - 1) begin
            line_q   <= '0;
            active_q <= 1'b0;          // exposure complete
          end else begin
            line_q   <= line_c + 1'b1;
            active_q <= 1'b1;
          end
        end else begin
          col_q    <= col_c + 1'b1;
          line_q   <= line_c;
          active_q <= 1'b1;
        end
      end
    end
  end

endmodule
