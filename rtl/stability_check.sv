// stability_check -- platform-stability test of an exposure.
//
// During an exposure the attitude control system reports once per second
// whether the platform met its stability requirement, and the imaging
// software writes the number of such stable seconds into the image header.
// This block latches that count when the header is presented (hdr_valid)
// and compares it with a programmable threshold: an exposure whose count is
// below the threshold is to be discarded, otherwise it goes on to the
// background test.  The count stays valid until the next header.
//
// Interface: hdr_valid/hdr_count from the header decoder, threshold from the
// configuration; stab_ok and count are registered and valid from the clock
// after hdr_valid.  Reset clears the count, so an exposure without a header
// fails any non-zero threshold.
//
// The rule (count below threshold -> discard) follows the instrument
// description; the 8-bit count width and the reset behaviour are this
// design's choices.
module stability_check
  import vt_pkg::*;
#(
  parameter int STAB_W = vt_pkg::STAB_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              hdr_valid,
  input  logic [STAB_W-1:0] hdr_count,
  input  logic [STAB_W-1:0] threshold,
  output logic              stab_ok,
  output logic [STAB_W-1:0] count
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      count <= '0;
    end else if (hdr_valid) begin
      count <= hdr_count;
    end
  end

  // The threshold may be rewritten at any time; the verdict follows it.
  always_comb stab_ok = (count >= threshold);

endmodule
