// tb_scan_timer: self-checking test of the 64-bit latency timer. Checks
// that the counter starts at zero after reset and advances by one per
// clock, that the two timestamp registers capture it on their strobes and
// that the elapsed value equals the number of clock cycles between the
// offload strobe and the release strobe, for several random gaps.
module tb_scan_timer;
  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;
  logic mo, mr;
  logic [63:0] now, ots, rts, ela;
  int checks = 0, failures = 0;

  scan_timer dut (.clk, .rst_n, .mark_offload(mo), .mark_release(mr),
                  .now, .offload_ts(ots), .release_ts(rts), .elapsed(ela));

  task automatic check(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] t0;
    mo = 1'b0; mr = 1'b0;
    repeat (3) @(posedge clk);
    #1 check(now == 0, "counter held in reset");
    rst_n = 1'b1;
    @(posedge clk); #1 t0 = now;
    repeat (10) @(posedge clk);
    #1 check(now == t0 + 10, "counts one per clock");
    for (int t = 0; t < 20; t++) begin
      int gap;
      logic [63:0] at;
      gap = 1 + int'($urandom % 500);
      @(negedge clk); mo = 1'b1; at = now;
      @(negedge clk); mo = 1'b0;
      check(ots == at, "offload timestamp");
      repeat (gap - 1) @(negedge clk);
      mr = 1'b1;
      @(negedge clk); mr = 1'b0;
      check(rts == at + 64'(gap), "release timestamp");
      check(ela == 64'(gap), $sformatf("elapsed %0d != %0d cycles", ela, gap));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
