// tb_scan_alu: self-checking test of the streaming MPI_SUM datapath.
// Random operands, with corner values, are applied and each lane of v1 and
// v2 is compared with a + b - c and d + b - c computed modulo 2^32 in the
// testbench. Also checks that a cumulative message minus the cached partial
// gives back the peer's data (the Fig. 3 subtraction).
module tb_scan_alu;
  logic [63:0] a, b, c, d, v1, v2;
  int checks = 0, failures = 0;
  scan_alu dut (.a, .b, .c, .d, .v1, .v2);

  function automatic logic [31:0] lane(logic [63:0] x, int l);
    return l ? x[63:32] : x[31:0];
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      a = {$urandom, $urandom}; b = {$urandom, $urandom};
      c = (t % 2) ? {$urandom, $urandom} : 64'd0;
      d = {$urandom, $urandom};
      if (t == 0) begin a = '1; b = 64'h0000_0001_0000_0001; c = '0; d = '1; end
      if (t == 1) begin a = '0; b = '0; c = 64'h0000_0001_0000_0001; d = '0; end
      #1;
      for (int l = 0; l < 2; l++) begin
        checks++;
        if (lane(v1, l) != lane(a, l) + lane(b, l) - lane(c, l) ||
            lane(v2, l) != lane(d, l) + lane(b, l) - lane(c, l)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d lane %0d", t, l);
        end
      end
    end
    // Fig. 3(b): rank 0 holds 1, receives the cumulative 3 and recovers 2
    a = {32'd1, 32'd5}; b = {32'd3, 32'd12}; c = {32'd1, 32'd5}; d = {32'd1, 32'd5};
    #1;
    checks++;
    if (v2 != {32'd3, 32'd12} || v1 != {32'd3, 32'd12}) failures++;
    a = '0; #1;
    checks++;
    if (v1 != {32'd2, 32'd7}) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
