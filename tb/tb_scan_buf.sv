// tb_scan_buf: self-checking test of one message slot at its default
// 128-word size. Random writes are mirrored in a reference array; every
// cycle the asynchronous read port is compared with the reference at a
// random address, including the address written in the same cycle (the
// old value must be read until the clock edge).
module tb_scan_buf;
  localparam int WORDS = 128;
  logic clk = 1'b0;
  always #4 clk = ~clk;
  logic        we;
  logic [6:0]  waddr, raddr;
  logic [63:0] wdata, rdata;
  logic [63:0] ref_mem [WORDS];
  int checks = 0, failures = 0;

  scan_buf dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1'b0; waddr = '0; wdata = '0; raddr = '0;
    // fill every word once
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = 7'(a); wdata = {$urandom, $urandom};
      ref_mem[a] = wdata;
    end
    @(negedge clk); we = 1'b0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      we    = ($urandom % 2) == 1;
      waddr = 7'($urandom);
      wdata = {$urandom, $urandom};
      raddr = (t % 3 == 0) ? waddr : 7'($urandom);
      #1;
      checks++;
      if (rdata !== ref_mem[raddr]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d: %h != %h", raddr, rdata, ref_mem[raddr]);
      end
      @(posedge clk);
      if (we) ref_mem[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
