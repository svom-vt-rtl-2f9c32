// tb_vopp_fpga_full -- end-to-end test of the FPGA front end at full size.
//
// Same stimulus and checks as tb_vopp_fpga_top, but with vopp_fpga_top at
// its default parameters: 2048 x 2048 pixels per band, 8.4 million pixels
// per exposure, and the five background windows spread over the frame.
//
// Streams whole interlaced exposures (IMG_W x IMG_H per band, blue and red
// lines alternating) into vopp_fpga_top, with master dark and flat pixels of
// the line's band (and unrelated values for the other band) supplied in the
// same clock, and an image header before each exposure.
// Sky level, stars, hot dark pixels (which drive the calibrated value below
// zero) and dead flat pixels (zero or very small flat: saturation) are drawn
// at random.  For every pixel the checker predicts the calibrated value
// 512 + trunc((raw - dark) * 32768 / flat) clamped to 0..65535, its band,
// its de-interlaced frame-store address and its clamp flags, and requires it
// CAL_LATENCY = 21 clocks after the raw pixel.  For every band frame it
// predicts the five-window background, the stability and background verdict
// and requires it 110 clocks after the frame's last pixel.
//
// Exposures: unstable platform; stable with dark sky (accepted); an exposure
// cut short by a new start marker (sync error); stable with a bright red band
// (red rejected for background); stable with a bright sky everywhere.  Every
// mechanism -- stability rejection, background rejection, acceptance, pixels
// excluded by the flux cut, saturation, clipping, sync error, both bands --
// is counted and must occur at least once.
module tb_vopp_fpga_full;
  import vt_pkg::*;

  localparam int W = IMG_W;
  localparam int H = IMG_H;
  localparam int CAL_LATENCY = 21;
  localparam int QA_LATENCY  = 110;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              hdr_valid = 1'b0;
  logic [STAB_W-1:0] hdr_stab_count = '0;
  logic              raw_valid = 1'b0, raw_sof = 1'b0;
  pix_t              raw_pix = '0;
  pix_t [1:0]        dark_pix = '0, flat_pix = '0;
  qa_cfg_t           cfg;
  logic              cal_valid, cal_sat, cal_clip, sync_err;
  pix_t              cal_pix;
  band_e             cal_band;
  logic [ADDR_W-1:0] cal_addr;
  logic [1:0]        qa_valid;
  qa_result_t [1:0]  qa;

  vopp_fpga_top dut (
    .clk, .rst_n, .hdr_valid, .hdr_stab_count, .raw_valid, .raw_sof, .raw_pix,
    .dark_pix, .flat_pix, .cfg, .cal_valid, .cal_pix, .cal_band, .cal_addr,
    .cal_sat, .cal_clip, .sync_err, .qa_valid, .qa
  );

  typedef struct {
    int     pix;
    bit     sat, clip, band;
    longint addr;
    longint cyc;
  } cal_exp_t;

  typedef struct {
    qa_result_t r;
    longint     cyc;
  } qa_exp_t;

  cal_exp_t cal_q[$];
  qa_exp_t  qa_q[2][$];
  longint   cycle = 0;
  int       checks = 0, failures = 0;
  int       n_sat = 0, n_clip = 0, n_sync = 0, n_excl = 0;
  int       n_verdict[2][3];

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", msg);
    end
  endtask

  function automatic cal_exp_t cal_model(int r, int d, int f);
    cal_exp_t e;
    longint v, q, res;
    v = r - d;
    e.sat = 0;
    e.clip = 0;
    if (f == 0) begin
      res = (v >= 0) ? 65535 : 0;
    end else begin
      q   = ((v < 0) ? -v : v) * 32768 / f;
      res = (v < 0) ? 512 - q : 512 + q;
    end
    if (res > 65535 || (f == 0 && v >= 0)) begin res = 65535; e.sat = 1; end
    if (res < 0 || (f == 0 && v < 0))      begin res = 0;     e.clip = 1; end
    e.pix = int'(res);
    return e;
  endfunction

  function automatic void push_qa(int b, int stab, longint s[N_WIN], longint c[N_WIN]);
    qa_exp_t x;
    longint ts = 0, tc = 0;
    for (int w = 0; w < N_WIN; w++) begin
      ts += s[w];
      tc += c[w];
      x.r.bg.win_count[w] = CNT_W'(c[w]);
      x.r.bg.win_mean[w]  = (c[w] == 0) ? '0 : pix_t'(s[w] / c[w]);
    end
    x.r.bg.count = CNT_W'(tc);
    x.r.bg.mean  = (tc == 0) ? '0 : pix_t'(ts / tc);
    x.r.bg.bg_ok = (tc != 0) && (ts / tc <= longint'(cfg.bg_thresh));
    x.r.stab_count = STAB_W'(stab);
    if (stab < int'(cfg.stab_thresh)) x.r.verdict = QA_REJ_STABILITY;
    else if (!x.r.bg.bg_ok)           x.r.verdict = QA_REJ_BACKGROUND;
    else                              x.r.verdict = QA_ACCEPT;
    x.cyc = cycle;
    qa_q[b].push_back(x);
  endfunction

  task automatic header(int c);
    @(negedge clk);
    hdr_valid = 1'b1;
    hdr_stab_count = STAB_W'(c);
    @(negedge clk);
    hdr_valid = 1'b0;
  endtask

  // One exposure of n_pix pixels (2*W*H for a complete one).
  task automatic exposure(int stab, int sky_b, int sky_r, int n_pix);
    longint s[2][N_WIN];
    longint c[2][N_WIN];
    for (int b = 0; b < 2; b++) for (int w = 0; w < N_WIN; w++) begin s[b][w] = 0; c[b][w] = 0; end
    for (int n = 0; n < n_pix; n++) begin
      int l, col, b, r, p, d, f;
      cal_exp_t e;
      l   = n / W;
      col = n % W;
      b   = l % 2;
      r   = l / 2;
      p   = (b == 0 ? sky_b : sky_r) + $urandom_range(0, 60);
      if ($urandom_range(0, 60) == 0) p = $urandom_range(8000, 65535);        // star
      d   = 150 + $urandom_range(0, 100);
      if ($urandom_range(0, 400) == 0) d = 4000 + $urandom_range(0, 2000);    // hot dark pixel
      f   = $urandom_range(28000, 37000);
      case ($urandom_range(0, 999))
        0:       f = 0;                                                      // dead flat pixel
        1, 2:    f = $urandom_range(1, 400);                                 // very low response
        default: ;
      endcase
      @(negedge clk);
      raw_valid = 1'b1;
      raw_sof   = (n == 0);
      raw_pix   = pix_t'(p);
      // the other band's slot carries unrelated values: the top must pick by band
      dark_pix[b]     = pix_t'(d);
      flat_pix[b]     = pix_t'(f);
      dark_pix[1 - b] = pix_t'($urandom_range(0, 65535));
      flat_pix[1 - b] = pix_t'($urandom_range(0, 65535));
      e      = cal_model(p, d, f);
      e.band = b[0];
      e.addr = longint'(b) * W * H + longint'(r) * W + col;
      e.cyc  = cycle;
      cal_q.push_back(e);
      for (int w = 0; w < N_WIN; w++)
        if (col >= int'(cfg.win_x[w]) && col < int'(cfg.win_x[w]) + WIN_SIZE &&
            r >= int'(cfg.win_y[w]) && r < int'(cfg.win_y[w]) + WIN_SIZE) begin
          if (p < int'(cfg.flux_cut)) begin
            s[b][w] += p;
            c[b][w] += 1;
          end else begin
            n_excl++;
          end
        end
      if (r == H - 1 && col == W - 1) push_qa(b, stab, s[b], c[b]);
    end
    @(negedge clk);
    raw_valid = 1'b0;
    raw_sof   = 1'b0;
  endtask

  // ---- checkers ----------------------------------------------------------------
  always @(posedge clk) begin
    if (rst_n && sync_err) n_sync++;
    if (rst_n && cal_valid) begin
      cal_exp_t e;
      if (cal_q.size() == 0) begin
        check(0, "calibrated pixel without input");
      end else begin
        e = cal_q.pop_front();
        check(int'(cal_pix) == e.pix && cal_sat == e.sat && cal_clip == e.clip &&
              cal_band == band_e'(e.band) && longint'(cal_addr) == e.addr &&
              cycle - e.cyc == CAL_LATENCY,
              $sformatf("cal pixel: got %0d sat%0d clip%0d band %0d addr %0d lat %0d; exp %0d sat%0d clip%0d band %0d addr %0d",
                        cal_pix, cal_sat, cal_clip, cal_band, cal_addr, cycle - e.cyc,
                        e.pix, e.sat, e.clip, e.band, e.addr));
        if (cal_sat)  n_sat++;
        if (cal_clip) n_clip++;
      end
    end
  end

  for (genvar b = 0; b < 2; b++) begin : g_qa
    always @(posedge clk) begin
      if (rst_n && qa_valid[b]) begin
        qa_exp_t x;
        if (qa_q[b].size() == 0) begin
          check(0, $sformatf("band %0d verdict without frame", b));
        end else begin
          x = qa_q[b].pop_front();
          check(qa[b].verdict == x.r.verdict,
                $sformatf("band %0d verdict %s, expected %s", b, qa[b].verdict.name(), x.r.verdict.name()));
          check(qa[b] == x.r, $sformatf("band %0d statistics: mean %0d count %0d, expected %0d %0d",
                b, qa[b].bg.mean, qa[b].bg.count, x.r.bg.mean, x.r.bg.count));
          check(cycle - x.cyc == QA_LATENCY,
                $sformatf("band %0d verdict latency %0d, expected %0d", b, cycle - x.cyc, QA_LATENCY));
          n_verdict[b][int'(x.r.verdict)]++;
        end
      end
    end
  end

  initial begin
    for (int b = 0; b < 2; b++) for (int v = 0; v < 3; v++) n_verdict[b][v] = 0;
    cfg.stab_thresh = 8'd40;
    cfg.flux_cut    = 16'd5000;
    cfg.bg_thresh   = 16'd800;
    cfg.win_x = {COORD_W'(W / 4), COORD_W'(W / 2), COORD_W'(0), COORD_W'(W / 2), COORD_W'(0)};
    cfg.win_y = {COORD_W'(H / 4), COORD_W'(H / 2), COORD_W'(H / 2), COORD_W'(0), COORD_W'(0)};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    header(25);
    exposure(25, 300, 300, 2 * W * H);     // unstable: both bands discarded
    header(80);
    exposure(80, 300, 350, 2 * W * H);     // stable, dark sky: accepted
    header(80);
    exposure(80, 300, 300, 3 * W + 7);     // cut short by the next start marker
    exposure(80, 300, 2500, 2 * W * H);    // red band bright: red rejected
    header(90);
    exposure(90, 1800, 1800, 2 * W * H);   // bright everywhere: both rejected
    repeat (QA_LATENCY + CAL_LATENCY + 10) @(posedge clk);
    check(cal_q.size() == 0, $sformatf("%0d calibrated pixels missing", cal_q.size()));
    check(qa_q[0].size() == 0 && qa_q[1].size() == 0, "verdicts missing");
    check(n_sat > 0,  "saturation never happened");
    check(n_clip > 0, "clipping never happened");
    check(n_sync == 1, $sformatf("sync error seen %0d times, expected 1", n_sync));
    check(n_excl > 0, "no pixel was excluded by the flux cut");
    for (int b = 0; b < 2; b++)
      check(n_verdict[b][0] > 0 && n_verdict[b][1] > 0 && n_verdict[b][2] > 0,
            $sformatf("band %0d verdicts: accept %0d stability %0d background %0d",
                      b, n_verdict[b][0], n_verdict[b][1], n_verdict[b][2]));
    $display("mechanisms: saturated %0d clipped %0d sync_err %0d flux-cut exclusions %0d",
             n_sat, n_clip, n_sync, n_excl);
    for (int b = 0; b < 2; b++)
      $display("band %0d: accepted %0d, stability rejects %0d, background rejects %0d",
               b, n_verdict[b][0], n_verdict[b][1], n_verdict[b][2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5 * 2 * W * H + 2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
