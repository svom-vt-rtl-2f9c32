// tb_stability_check -- self-checking test of the header stability test.
//
// Presents a sequence of image headers (random counts, counts equal to the
// threshold, one below and one above it, zero, the maximum) under several
// thresholds, and checks after every header that stab_ok equals
// (count >= threshold) and that the latched count is the header's.  It also
// checks that the count is held between headers and that after reset the
// test fails for any non-zero threshold.
module tb_stability_check;
  import vt_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              hdr_valid = 1'b0;
  logic [STAB_W-1:0] hdr_count = '0, threshold = '0;
  logic              stab_ok;
  logic [STAB_W-1:0] count;

  stability_check dut (.clk, .rst_n, .hdr_valid, .hdr_count, .threshold, .stab_ok, .count);

  int checks = 0, failures = 0;
  int n_pass = 0, n_fail = 0;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", msg);
    end
  endtask

  task automatic header(int c, int t);
    @(negedge clk);
    threshold = STAB_W'(t);
    hdr_valid = 1'b1;
    hdr_count = STAB_W'(c);
    @(negedge clk);
    hdr_valid = 1'b0;
    hdr_count = STAB_W'($urandom);   // must be ignored without hdr_valid
    check(count == STAB_W'(c), $sformatf("count %0d, expected %0d", count, c));
    check(stab_ok == (c >= t), $sformatf("count %0d threshold %0d: stab_ok %0d", c, t, stab_ok));
    if (c >= t) n_pass++; else n_fail++;
    repeat (2) @(negedge clk);
    check(count == STAB_W'(c), "count not held between headers");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    threshold = 8'd1;
    #1 check(!stab_ok, "no header yet, but stab_ok");
    header(40, 40);   // exactly at threshold: kept
    header(39, 40);   // one short: discarded
    header(41, 40);
    header(0, 0);
    header(0, 1);
    header(255, 255);
    header(254, 255);
    header(100, 90);
    header(50, 90);
    for (int i = 0; i < 200; i++) header($urandom_range(0, 255), $urandom_range(0, 255));
    check(n_pass > 0 && n_fail > 0, "both outcomes must occur");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
