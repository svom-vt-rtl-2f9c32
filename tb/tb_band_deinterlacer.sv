// tb_band_deinterlacer -- self-checking test of band identification.
//
// Runs band_deinterlacer on a small 8 x 4 frame (8 interlaced lines of 8
// pixels).  The checker keeps its own line and column count and expects for
// each pixel: band = line parity (blue first), row = line / 2, col, the
// band-major address band*W*H + row*W + col, sof on the first pixel of each
// band frame, eof on the last, and a latency of one clock.  It sends three
// exposures with idle gaps, then a start marker in the middle of an exposure
// (sync_err must pulse once and the count must restart), then one more
// complete exposure, and checks that pixels before any start are dropped.
module tb_band_deinterlacer;
  import vt_pkg::*;

  localparam int W = 8;
  localparam int H = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     in_valid = 1'b0, in_sof = 1'b0;
  pix_t     in_pix = '0;
  logic     out_valid, sync_err;
  pix_pos_t out;

  band_deinterlacer #(.IMG_W(W), .IMG_H(H)) dut (
    .clk, .rst_n, .in_valid, .in_sof, .in_pix, .out_valid, .out, .sync_err
  );

  int checks = 0, failures = 0;
  int n_sync = 0, n_sof = 0, n_eof = 0;
  pix_pos_t exp_q[$];

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", msg);
    end
  endtask

  // Reference: position of pixel number n (line l, column c) of an exposure.
  function automatic pix_pos_t ref_pos(int l, int c, pix_t p);
    pix_pos_t e;
    e.pix  = p;
    e.band = band_e'(l % 2);
    e.row  = coord_t'(l / 2);
    e.col  = coord_t'(c);
    e.sof  = (l / 2 == 0) && (c == 0);
    e.eof  = (l / 2 == H - 1) && (c == W - 1);
    e.addr = ADDR_W'((l % 2) * W * H + (l / 2) * W + c);
    return e;
  endfunction

  task automatic send(logic sof, pix_t p, bit expect_out, int l, int c);
    @(negedge clk);
    in_valid = 1'b1;
    in_sof   = sof;
    in_pix   = p;
    if (expect_out) exp_q.push_back(ref_pos(l, c, p));
    @(negedge clk);
    in_valid = 1'b0;
    in_sof   = 1'b0;
  endtask

  // One exposure, pixels back to back, optionally cut short after n pixels.
  task automatic exposure(int n_pix);
    for (int n = 0; n < n_pix; n++) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_sof   = (n == 0);
      in_pix   = pix_t'($urandom);
      exp_q.push_back(ref_pos(n / W, n % W, in_pix));
    end
    @(negedge clk);
    in_valid = 1'b0;
    in_sof   = 1'b0;
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      if (sync_err) n_sync++;
      if (out_valid) begin
        pix_pos_t e;
        if (exp_q.size() == 0) begin
          check(0, "output without input");
        end else begin
          e = exp_q.pop_front();
          check(out == e, $sformatf("pixel: got band %0d row %0d col %0d addr %0d sof %0d eof %0d, exp band %0d row %0d col %0d addr %0d sof %0d eof %0d",
                out.band, out.row, out.col, out.addr, out.sof, out.eof,
                e.band, e.row, e.col, e.addr, e.sof, e.eof));
          if (out.sof) n_sof++;
          if (out.eof) n_eof++;
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // pixels before any start marker are dropped
    send(1'b0, 16'h1234, 0, 0, 0);
    send(1'b0, 16'h1235, 0, 0, 0);
    repeat (3) exposure(2 * W * H);
    // a stray pixel after a complete exposure is also dropped
    send(1'b0, 16'h4321, 0, 0, 0);
    // an exposure cut short by a new start marker
    exposure(W * 3 + 5);
    exposure(2 * W * H);
    repeat (4) @(posedge clk);
    check(exp_q.size() == 0, "pixels missing at the output");
    check(n_sync == 1, $sformatf("sync_err pulsed %0d times, expected 1", n_sync));
    check(n_sof == 2 * 5, $sformatf("band sof seen %0d times", n_sof));
    check(n_eof == 2 * 4, $sformatf("band eof seen %0d times", n_eof));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
