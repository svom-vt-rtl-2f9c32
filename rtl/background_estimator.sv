// background_estimator -- sky background of one band frame from five windows.
//
// Stray Earth light raises the whole background of an exposure, so the
// background is measured in N_WIN = 5 predefined square windows of WIN_SIZE
// pixels.  Iterative sigma clipping would be too costly in the FPGA; bright
// stars are kept out of the sample instead by a fixed flux cut: only pixels
// below flux_cut are summed and counted.  At the end of the frame the block
// divides each window's sum by its count, and the sum over all windows by
// the total count, to obtain the mean background of each window and of the
// frame, and accepts the frame when the frame mean is at or below bg_thresh.
// A frame in which no pixel passed the flux cut is rejected.
//
// How it works: per-window accumulators follow the pixel stream (a pixel
// inside two overlapping windows counts in both).  On the last pixel (eof)
// the sums and counts are copied to a snapshot, the accumulators restart on
// the next frame's first pixel (sof), and one shared restoring divider
// produces the six means, PIX_W cycles each, one quotient bit per clock.
//
// Interface: in/in_valid is the raw pixel stream of ONE band with its row
// and column inside that band's frame (see band_deinterlacer).  res is
// registered and updated with a one-cycle res_valid pulse
// (N_WIN+1)*(PIX_W+2)+1 = 109 clocks after the eof pixel; frames must
// therefore be longer than that.  busy is high while dividing.
//
// The five windows, the fixed flux cut and the threshold decision follow the
// instrument description.  Using the mean as the statistic, the 64-pixel
// window size, run-time window positions and rejecting an empty sample are
// this design's choices.
module background_estimator
  import vt_pkg::*;
#(
  parameter int N_WIN    = vt_pkg::N_WIN,
  parameter int WIN_SIZE = vt_pkg::WIN_SIZE
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  pix_pos_t                      in,
  input  pix_t                          flux_cut,
  input  pix_t                          bg_thresh,
  input  logic [N_WIN-1:0][COORD_W-1:0] win_x,
  input  logic [N_WIN-1:0][COORD_W-1:0] win_y,
  output logic                          res_valid,
  output bg_stats_t                     res,
  output logic                          busy
);

  localparam int NDIV = N_WIN + 1;   // five windows, then the whole sample

  typedef logic [SUM_W-1:0] sum_t;
  typedef logic [CNT_W-1:0] cnt_t;

  sum_t [N_WIN-1:0] acc_sum, acc_sum_n;
  cnt_t [N_WIN-1:0] acc_cnt, acc_cnt_n;

  // ---- accumulation ----------------------------------------------------------
  logic [N_WIN-1:0] in_win;

  always_comb begin
    for (int w = 0; w < N_WIN; w++) begin
      in_win[w] = ({1'b0, in.col} >= {1'b0, win_x[w]}) &&
                  ({1'b0, in.col} <  {1'b0, win_x[w]} + (COORD_W+1)'(WIN_SIZE)) &&
                  ({1'b0, in.row} >= {1'b0, win_y[w]}) &&
                  ({1'b0, in.row} <  {1'b0, win_y[w]} + (COORD_W+1)'(WIN_SIZE));
      acc_sum_n[w] = in.sof ? '0 : acc_sum[w];
      acc_cnt_n[w] = in.sof ? '0 : acc_cnt[w];
      if (in_win[w] && (in.pix < flux_cut)) begin
        acc_sum_n[w] = acc_sum_n[w] + SUM_W'(in.pix);
        acc_cnt_n[w] = acc_cnt_n[w] + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_sum <= '0;
      acc_cnt <= '0;
    end else if (in_valid) begin
      acc_sum <= acc_sum_n;
      acc_cnt <= acc_cnt_n;
    end
  end

  // ---- end of frame: snapshot and sequential division ------------------------
  sum_t [NDIV-1:0] snap_sum;
  cnt_t [NDIV-1:0] snap_cnt;
  sum_t tot_sum;
  cnt_t tot_cnt;

  always_comb begin
    tot_sum = '0;
    tot_cnt = '0;
    for (int w = 0; w < N_WIN; w++) begin
      tot_sum = tot_sum + acc_sum_n[w];
      tot_cnt = tot_cnt + acc_cnt_n[w];
    end
  end

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_DIV, S_DONE} state_e;
  state_e st;

  logic [$clog2(NDIV)-1:0]  k;       // which mean
  logic [$clog2(PIX_W+1)-1:0] bitn;  // quotient bits still to produce
  logic [CNT_W:0]           rem;
  logic [PIX_W-1:0]         low;     // numerator bits still to bring down
  pix_t                     quo;
  pix_t [NDIV-1:0]          means;

  logic [CNT_W+1:0] trial;
  always_comb trial = {rem, low[PIX_W-1]};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      k         <= '0;
      bitn      <= '0;
      rem       <= '0;
      low       <= '0;
      quo       <= '0;
      means     <= '0;
      snap_sum  <= '0;
      snap_cnt  <= '0;
      res       <= '0;
      res_valid <= 1'b0;
    end else begin
      res_valid <= 1'b0;
      if (in_valid && in.eof) begin
        for (int w = 0; w < N_WIN; w++) begin
          snap_sum[w] <= acc_sum_n[w];
          snap_cnt[w] <= acc_cnt_n[w];
        end
        snap_sum[N_WIN] <= tot_sum;
        snap_cnt[N_WIN] <= tot_cnt;
        k  <= '0;
        st <= S_LOAD;
      end else begin
        unique case (st)
          S_IDLE: ;
          S_LOAD: begin
            // Every mean is below 2^PIX_W, so the high part of the sum is
            // already smaller than the count and seeds the remainder.
            rem  <= (CNT_W+1)'(snap_sum[k] >> PIX_W);
            low  <= snap_sum[k][PIX_W-1:0];
            quo  <= '0;
            bitn <= ($clog2(PIX_W+1))'(PIX_W);
            st   <= S_DIV;
          end
          S_DIV: begin
            if (trial >= {2'b00, snap_cnt[k]}) begin
              rem <= (CNT_W+1)'(trial - {2'b00, snap_cnt[k]});
              quo <= {quo[PIX_W-2:0], 1'b1};
            end else begin
              rem <= (CNT_W+1)'(trial);
              quo <= {quo[PIX_W-2:0], 1'b0};
            end
            low  <= low << 1;
            bitn <= bitn - 1'b1;
            if (bitn == 1) st <= S_DONE;
          end
          S_DONE: begin
            // quo is complete; an empty sample has mean 0.
            means[k] <= (snap_cnt[k] == '0) ? '0 : quo;
            if (int'(k) == NDIV - 1) begin
              st <= S_IDLE;
              res_valid <= 1'b1;
              for (int w = 0; w < N_WIN; w++) begin
                res.win_mean[w]  <= means[w];
                res.win_count[w] <= snap_cnt[w];
              end
              res.mean  <= (snap_cnt[k] == '0) ? '0 : quo;
              res.count <= snap_cnt[k];
              res.bg_ok <= (snap_cnt[k] != '0) && (quo <= bg_thresh);
            end else begin
              k  <= k + 1'b1;
              st <= S_LOAD;
            end
          end
          default: st <= S_IDLE;
        endcase
      end
    end
  end

  assign busy = (st != S_IDLE);

endmodule
