// tb_background_estimator -- self-checking test of the five-window background.
//
// Feeds background_estimator (default 64-pixel windows) with 128 x 128 band
// frames built from a flat sky level plus noise, bright "stars" and some
// pixels exactly at the flux cut.  The checker computes, for every frame and
// window, the sum and number of pixels below the flux cut inside the window,
// the truncated means per window and over all windows, and the verdict
// (sampled pixels exist and mean <= bg_thresh), and compares them with the
// block's result.  Frames: dark sky (accept), bright sky (reject), sky above
// the flux cut everywhere (empty sample, reject), and one with a window
// partly outside the frame and a changed threshold.  Frames follow each
// other without gaps, so the snapshot must free the accumulators at once.
// The result must arrive 109 clocks after the frame's last pixel.
module tb_background_estimator;
  import vt_pkg::*;

  localparam int W       = 128;
  localparam int H       = 128;
  localparam int LATENCY = 109;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      in_valid = 1'b0;
  pix_pos_t  in = '0;
  pix_t      flux_cut = '0, bg_thresh = '0;
  logic [N_WIN-1:0][COORD_W-1:0] win_x, win_y;
  logic      res_valid, busy;
  bg_stats_t res;

  background_estimator dut (
    .clk, .rst_n, .in_valid, .in, .flux_cut, .bg_thresh, .win_x, .win_y,
    .res_valid, .res, .busy
  );

  int checks = 0, failures = 0;
  int n_excluded = 0, n_ok = 0, n_rej = 0, n_empty = 0;
  longint cycle = 0;
  longint t_eof[$];
  bg_stats_t exp_q[$];

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", msg);
    end
  endtask

  task automatic frame(int sky, int noise, int star_rate);
    longint s[N_WIN];
    longint c[N_WIN];
    longint ts = 0, tc = 0;
    bg_stats_t e;
    for (int w = 0; w < N_WIN; w++) begin s[w] = 0; c[w] = 0; end
    for (int r = 0; r < H; r++) begin
      for (int col = 0; col < W; col++) begin
        int p;
        p = sky + $urandom_range(0, noise);
        if (star_rate > 0 && $urandom_range(0, star_rate - 1) == 0) p = $urandom_range(20000, 65535);
        if ($urandom_range(0, 300) == 0) p = int'(flux_cut);   // exactly at the cut: excluded
        if (p > 65535) p = 65535;
        @(negedge clk);
        in_valid = 1'b1;
        in.pix = pix_t'(p);
        in.row = coord_t'(r);
        in.col = coord_t'(col);
        in.sof = (r == 0 && col == 0);
        in.eof = (r == H - 1 && col == W - 1);
        in.band = BAND_BLUE;
        in.addr = '0;
        for (int w = 0; w < N_WIN; w++) begin
          if (col >= int'(win_x[w]) && col < int'(win_x[w]) + WIN_SIZE &&
              r >= int'(win_y[w]) && r < int'(win_y[w]) + WIN_SIZE) begin
            if (p < int'(flux_cut)) begin
              s[w] += p;
              c[w] += 1;
            end else begin
              n_excluded++;
            end
          end
        end
      end
    end
    for (int w = 0; w < N_WIN; w++) begin
      ts += s[w];
      tc += c[w];
      e.win_count[w] = CNT_W'(c[w]);
      e.win_mean[w]  = (c[w] == 0) ? '0 : pix_t'(s[w] / c[w]);
    end
    e.count = CNT_W'(tc);
    e.mean  = (tc == 0) ? '0 : pix_t'(ts / tc);
    e.bg_ok = (tc != 0) && ((ts / tc) <= longint'(bg_thresh));
    if (tc == 0) n_empty++;
    if (e.bg_ok) n_ok++; else n_rej++;
    exp_q.push_back(e);
  endtask

  always @(posedge clk) begin
    if (rst_n && in_valid && in.eof) t_eof.push_back(cycle);
    if (rst_n && res_valid) begin
      bg_stats_t e;
      longint t;
      if (exp_q.size() == 0) begin
        check(0, "result without frame");
      end else begin
        e = exp_q.pop_front();
        t = t_eof.pop_front();
        check(res == e, $sformatf("frame result: got mean %0d count %0d ok %0d win0 %0d/%0d, exp mean %0d count %0d ok %0d win0 %0d/%0d",
              res.mean, res.count, res.bg_ok, res.win_mean[0], res.win_count[0],
              e.mean, e.count, e.bg_ok, e.win_mean[0], e.win_count[0]));
        check(cycle - t == LATENCY, $sformatf("latency %0d, expected %0d", cycle - t, LATENCY));
      end
    end
  end

  initial begin
    win_x = {12'd32, 12'd64, 12'd0, 12'd64, 12'd0};
    win_y = {12'd32, 12'd64, 12'd64, 12'd0, 12'd0};
    flux_cut  = 16'd1500;
    bg_thresh = 16'd400;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    frame(300, 40, 50);      // dark sky with stars: accepted
    frame(800, 100, 50);     // stray light: rejected
    frame(2000, 100, 0);     // everything above the cut: empty sample
    win_x[2]  = 12'd100;     // window hanging over the frame edge
    bg_thresh = 16'd900;
    frame(800, 100, 30);     // same sky, looser threshold: accepted
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LATENCY + 10) @(posedge clk);
    check(exp_q.size() == 0, "results missing");
    check(n_excluded > 0 && n_ok > 0 && n_rej > 0 && n_empty > 0,
          $sformatf("mechanisms: excluded %0d ok %0d rejected %0d empty %0d", n_excluded, n_ok, n_rej, n_empty));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4 * W * H + 2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
