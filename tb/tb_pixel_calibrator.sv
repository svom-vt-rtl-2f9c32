// tb_pixel_calibrator -- self-checking test of the dark/flat calibration.
//
// Streams one operand set per clock into pixel_calibrator: directed corner
// cases (flat exactly 1.0, raw equal to dark, raw below dark, results that
// overflow 16 bits, zero flat, tiny flat) followed by random operands.  Each
// expected result is computed here with plain integer arithmetic,
//   512 + trunc((raw - dark) * 32768 / flat), clamped to 0..65535,
// and compared with the output, together with the saturation/clip flags, the
// sideband tag and the latency (QW+3 = 20 clocks, one result per clock).
module tb_pixel_calibrator;
  import vt_pkg::*;

  localparam int QW      = 17;
  localparam int TAG_W   = 24;
  localparam int LATENCY = QW + 3;
  localparam int N_RAND  = 20000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             in_valid = 1'b0;
  logic [15:0]      raw = '0, dark = '0, flat = '0;
  logic [TAG_W-1:0] in_tag = '0;
  logic             out_valid, out_sat, out_clip;
  logic [15:0]      out_pix;
  logic [TAG_W-1:0] out_tag;

  pixel_calibrator #(.QW(QW), .TAG_W(TAG_W)) dut (
    .clk, .rst_n, .in_valid, .raw, .dark, .flat, .in_tag,
    .out_valid, .out_pix, .out_tag, .out_sat, .out_clip
  );

  typedef struct {
    int unsigned pix;
    bit          sat, clip;
    int unsigned tag;
    longint      cyc;
  } exp_t;

  exp_t   q[$];
  longint cycle = 0;
  int     checks = 0, failures = 0;
  int     n_sat = 0, n_clip = 0;

  always @(posedge clk) cycle <= cycle + 1;

  function automatic exp_t model(int unsigned r, int unsigned d, int unsigned f, int unsigned tag);
    exp_t   e;
    longint v, qt, res;
    v = longint'(r) - longint'(d);
    e.tag = tag;
    e.sat = 0;
    e.clip = 0;
    if (f == 0) begin
      if (v >= 0) begin res = 65535; e.sat = 1; end
      else        begin res = 0;     e.clip = 1; end
    end else begin
      qt  = ((v < 0 ? -v : v) * 32768) / longint'(f);
      res = (v < 0) ? 512 - qt : 512 + qt;
      if (res > 65535) begin res = 65535; e.sat = 1; end
      if (res < 0)     begin res = 0;     e.clip = 1; end
    end
    e.pix = 32'(res);
    return e;
  endfunction

  task automatic push(int unsigned r, int unsigned d, int unsigned f);
    exp_t e;
    @(negedge clk);
    in_valid = 1'b1;
    raw  = 16'(r);
    dark = 16'(d);
    flat = 16'(f);
    in_tag = TAG_W'($urandom);
    e = model(r, d, f, 32'(in_tag));
    e.cyc = cycle;
    q.push_back(e);
  endtask

  // Output checker.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output %0d", out_pix);
      end else begin
        e = q.pop_front();
        if (out_pix != 16'(e.pix) || out_sat != e.sat || out_clip != e.clip ||
            out_tag != TAG_W'(e.tag) || (cycle - e.cyc) != LATENCY) begin
          failures++;
          if (failures < 10)
            $display("FAIL got %0d sat%0d clip%0d lat %0d, exp %0d sat%0d clip%0d lat %0d",
                     out_pix, out_sat, out_clip, cycle - e.cyc, e.pix, e.sat, e.clip, LATENCY);
        end
        if (out_sat)  n_sat++;
        if (out_clip) n_clip++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // directed cases
    push(1000, 100, 32768);   // gain 1.0  -> 1412
    push(100, 100, 32768);    // raw = dark -> 512
    push(50, 400, 32768);     // below dark -> 162
    push(0, 2000, 32768);     // far below -> clip 0
    push(60000, 0, 16384);    // gain 2 -> saturate
    push(1000, 100, 0);       // zero flat -> saturate
    push(10, 100, 0);         // zero flat, negative -> clip
    push(65535, 0, 1);        // huge quotient -> saturate
    push(300, 200, 1);        // quotient 3276800 -> saturate
    push(3, 2, 65535);        // 32768/65535 = 0 -> 512
    push(65535, 65535, 40000);
    push(20000, 300, 30000);
    for (int i = 0; i < N_RAND; i++) begin
      int unsigned r, d, f;
      r = $urandom_range(0, 65535);
      d = $urandom_range(0, 3000);
      f = (i % 7 == 0) ? $urandom_range(0, 65535) : $urandom_range(20000, 45000);
      if (i % 11 == 0) r = d + $urandom_range(0, 40);
      push(r, d, f);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LATENCY + 5) @(posedge clk);
    checks++;
    if (q.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", q.size());
    end
    checks++;
    if (n_sat == 0 || n_clip == 0) begin
      failures++;
      $display("FAIL saturation (%0d) or clipping (%0d) never exercised", n_sat, n_clip);
    end
    $display("saturated %0d, clipped %0d", n_sat, n_clip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N_RAND + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
