// tb_scan_out_arb: self-checking test of the output merge. Two sources
// offer random packets (an I/O-queue word with ctrl 8'hFF, then 1..20
// words, the last with a non-zero ctrl) at random times while the output
// accepts at random. Every output packet must be one source's next packet,
// whole and in order; the count of packets from each source must match
// what was sent; and when both sources wait the grant must alternate.
module tb_scan_out_arb;
  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;
  nf_bus_if s0 ();
  nf_bus_if s1 ();
  logic [63:0] out_data;
  logic [7:0]  out_ctrl;
  logic        out_wr, out_rdy;
  int checks = 0, failures = 0;

  scan_out_arb dut (.clk, .rst_n, .in0(s0.dst), .in1(s1.dst),
                    .out_data, .out_ctrl, .out_wr, .out_rdy);

  typedef logic [71:0] w72_t;
  w72_t q [2][$];        // words still to offer
  w72_t exp_q [2][$];    // words expected at the output
  int   pos [2];
  int   sent [2], got [2];
  int   cur, n_alt, both_wait;
  bit   in_pkt;

  task automatic make_pkt(int s, int id);
    int n;
    n = 1 + int'($urandom % 20);
    q[s].push_back({8'hFF, 32'(s), 32'(id)});
    exp_q[s].push_back({8'hFF, 32'(s), 32'(id)});
    for (int i = 0; i < n; i++) begin
      w72_t w;
      w = {(i == n - 1) ? 8'h01 : 8'h00, 16'(s), 16'(id), 32'(i)};
      q[s].push_back(w);
      exp_q[s].push_back(w);
    end
    sent[s]++;
  endtask

  always_comb begin
    s0.wr = q[0].size() > 0;
    s0.data = (q[0].size() > 0) ? q[0][0][63:0] : '0;
    s0.ctrl = (q[0].size() > 0) ? q[0][0][71:64] : '0;
    s1.wr = q[1].size() > 0;
    s1.data = (q[1].size() > 0) ? q[1][0][63:0] : '0;
    s1.ctrl = (q[1].size() > 0) ? q[1][0][71:64] : '0;
  end

  int last_src = -1;
  always @(posedge clk) if (rst_n) begin
    if (!in_pkt && s0.wr && s1.wr) both_wait++;
    if (s0.wr && s0.rdy) void'(q[0].pop_front());
    if (s1.wr && s1.rdy) void'(q[1].pop_front());
    if (out_wr && out_rdy) begin
      if (!in_pkt) begin
        cur = int'(out_data[32]);
        in_pkt = 1'b1;
        if (s0.wr && s1.wr && last_src >= 0) begin
          checks++;
          if (cur == last_src) begin failures++; $display("FAIL no alternation"); end
          n_alt++;
        end
      end else if (out_ctrl != 8'h00) begin
        in_pkt = 1'b0;
        got[cur]++;
        last_src = cur;
      end
      checks++;
      if (exp_q[cur].size() == 0 || {out_ctrl, out_data} != exp_q[cur][0]) begin
        failures++;
        if (failures < 10) $display("FAIL word %h", {out_ctrl, out_data});
      end
      if (exp_q[cur].size() > 0) void'(exp_q[cur].pop_front());
    end
    out_rdy <= ($urandom % 4 != 0);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    out_rdy = 1'b0; in_pkt = 1'b0; n_alt = 0; both_wait = 0;
    sent = '{0, 0}; got = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      @(posedge clk);
      if ($urandom % 3 == 0 && q[0].size() < 30) make_pkt(0, t);
      if ($urandom % 3 == 0 && q[1].size() < 30) make_pkt(1, t);
      repeat ($urandom % 10) @(posedge clk);
    end
    wait (q[0].size() == 0 && q[1].size() == 0 && !in_pkt);
    repeat (5) @(posedge clk);
    checks++;
    if (got[0] != sent[0] || got[1] != sent[1] || n_alt == 0) begin
      failures++;
      $display("FAIL counts sent %p got %p alternations %0d", sent, got, n_alt);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
