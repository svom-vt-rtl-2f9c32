// tb_image_quality_assessor -- self-checking test of the per-band verdict.
//
// Drives image_quality_assessor with interlaced exposures (128 x 64 pixels
// per band, lines alternating blue / red) and one header per exposure.  The
// header of the next exposure is sent in the middle of the current readout,
// so the verdict must use the count latched at the band frame's start.  The
// checker computes each band's five-window background (pixels below the flux
// cut only) and the expected verdict: stability first (count below threshold
// -> QA_REJ_STABILITY), then background (mean above threshold or no sample
// -> QA_REJ_BACKGROUND), else QA_ACCEPT.  Exposures cover: unstable with a
// dark sky, stable with a dark blue and a bright red band, stable with both
// bright, and unstable with a bright sky (stability must win).
module tb_image_quality_assessor;
  import vt_pkg::*;

  localparam int W = 128;
  localparam int H = 64;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              hdr_valid = 1'b0;
  logic [STAB_W-1:0] hdr_count = '0;
  qa_cfg_t           cfg;
  logic              in_valid = 1'b0;
  pix_pos_t          in = '0;
  logic [1:0]        qa_valid;
  qa_result_t [1:0]  qa;

  image_quality_assessor dut (.clk, .rst_n, .hdr_valid, .hdr_count, .cfg, .in_valid, .in, .qa_valid, .qa);

  int checks = 0, failures = 0;
  int n_verdict[3] = '{0, 0, 0};
  qa_result_t exp_q[2][$];

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", msg);
    end
  endtask

  task automatic header(int c);
    @(negedge clk);
    hdr_valid = 1'b1;
    hdr_count = STAB_W'(c);
    @(negedge clk);
    hdr_valid = 1'b0;
  endtask

  function automatic void push_expected(int b, int stab, longint s[N_WIN], longint c[N_WIN]);
    qa_result_t e;
    longint ts = 0, tc = 0;
    for (int w = 0; w < N_WIN; w++) begin
      ts += s[w];
      tc += c[w];
      e.bg.win_count[w] = CNT_W'(c[w]);
      e.bg.win_mean[w]  = (c[w] == 0) ? '0 : pix_t'(s[w] / c[w]);
    end
    e.bg.count = CNT_W'(tc);
    e.bg.mean  = (tc == 0) ? '0 : pix_t'(ts / tc);
    e.bg.bg_ok = (tc != 0) && (ts / tc <= longint'(cfg.bg_thresh));
    e.stab_count = STAB_W'(stab);
    if (stab < int'(cfg.stab_thresh)) e.verdict = QA_REJ_STABILITY;
    else if (!e.bg.bg_ok)             e.verdict = QA_REJ_BACKGROUND;
    else                              e.verdict = QA_ACCEPT;
    exp_q[b].push_back(e);
  endfunction

  // One exposure; next_hdr >= 0 sends the next exposure's header mid-readout.
  task automatic exposure(int stab, int sky_b, int sky_r, int next_hdr);
    longint s[2][N_WIN];
    longint c[2][N_WIN];
    for (int b = 0; b < 2; b++) for (int w = 0; w < N_WIN; w++) begin s[b][w] = 0; c[b][w] = 0; end
    for (int l = 0; l < 2 * H; l++) begin
      for (int col = 0; col < W; col++) begin
        int b, r, p;
        b = l % 2;
        r = l / 2;
        p = (b == 0 ? sky_b : sky_r) + $urandom_range(0, 50);
        if ($urandom_range(0, 40) == 0) p = $urandom_range(10000, 65535);
        @(negedge clk);
        in_valid = 1'b1;
        hdr_valid = (next_hdr >= 0) && (l == H) && (col == 5);
        hdr_count = STAB_W'(next_hdr);
        in.pix  = pix_t'(p);
        in.band = band_e'(b);
        in.row  = coord_t'(r);
        in.col  = coord_t'(col);
        in.sof  = (r == 0 && col == 0);
        in.eof  = (r == H - 1 && col == W - 1);
        in.addr = '0;
        for (int w = 0; w < N_WIN; w++)
          if (col >= int'(cfg.win_x[w]) && col < int'(cfg.win_x[w]) + WIN_SIZE &&
              r >= int'(cfg.win_y[w]) && r < int'(cfg.win_y[w]) + WIN_SIZE &&
              p < int'(cfg.flux_cut)) begin
            s[b][w] += p;
            c[b][w] += 1;
          end
        // The verdict of a band may come before the other band's last line.
        if (r == H - 1 && col == W - 1) push_expected(b, stab, s[b], c[b]);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    hdr_valid = 1'b0;
  endtask

  for (genvar b = 0; b < 2; b++) begin : g_chk
    always @(posedge clk) begin
      if (rst_n && qa_valid[b]) begin
        qa_result_t e;
        if (exp_q[b].size() == 0) begin
          check(0, "verdict without exposure");
        end else begin
          e = exp_q[b].pop_front();
          check(qa[b].verdict == e.verdict,
                $sformatf("band %0d verdict %s, expected %s", b, qa[b].verdict.name(), e.verdict.name()));
          check(qa[b].stab_count == e.stab_count, $sformatf("band %0d stab count %0d exp %0d", b, qa[b].stab_count, e.stab_count));
          check(qa[b].bg == e.bg, $sformatf("band %0d background mean %0d exp %0d", b, qa[b].bg.mean, e.bg.mean));
          n_verdict[int'(e.verdict)]++;
        end
      end
    end
  end

  initial begin
    cfg.stab_thresh = 8'd40;
    cfg.flux_cut    = 16'd3000;
    cfg.bg_thresh   = 16'd600;
    cfg.win_x = {12'd32, 12'd64, 12'd0, 12'd64, 12'd0};
    cfg.win_y = {12'd0,  12'd0,  12'd0, 12'd0,  12'd0};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    header(30);
    exposure(30, 300, 300, 60);     // unstable, dark sky
    exposure(60, 300, 1200, 60);    // blue accepted, red bright
    exposure(60, 1500, 1500, 20);   // both bright
    exposure(20, 1500, 1500, -1);   // unstable and bright: stability wins
    repeat (300) @(posedge clk);
    check(exp_q[0].size() == 0 && exp_q[1].size() == 0, "verdicts missing");
    check(n_verdict[0] > 0 && n_verdict[1] > 0 && n_verdict[2] > 0,
          $sformatf("verdicts seen: accept %0d stability %0d background %0d", n_verdict[0], n_verdict[1], n_verdict[2]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4 * 2 * W * H + 5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
