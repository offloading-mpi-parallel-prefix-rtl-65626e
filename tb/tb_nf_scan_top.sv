// tb_nf_scan_top: end-to-end test of the MPI_Scan offload on a network of
// eight NetFPGA nodes, every nf_scan_top at its default size.
//
// Each node has a host model and the testbench is the network. A host sends
// an offload packet (UDP, collective header, count MPI_INT elements made by
// a hash of iteration, rank and index), waits for its result packet and,
// after a random pause, issues the next MPI_Scan: back-to-back calls as in
// the benchmark. The network delivers each data or acknowledgement packet
// to the ranks named in its destination-MAC mask, and checks that the
// one-hot output ports are those configured for these ranks. Every result
// is checked element by element against the inclusive prefix sum, and its
// headers (message type, swapped UDP ports, IPv4 checksum, lengths) and
// time word against the node's timestamp registers.
// The four algorithms run one after the other (mode switch), with message
// sizes from 8 to 1024 bytes and an odd element count. A non-collective
// packet is sent through to check reference-NIC forwarding. The output
// queues accept at random. Counted mechanisms: acknowledgement, multicast,
// cumulative-tag subtraction, binomial down-phase messages, forwarding.
module tb_nf_scan_top;
  import nf_scan_pkg::*;

  localparam int P      = 8;
  localparam int ITERS  = 4;
  localparam int NCOUNT = 5;
  localparam int counts [NCOUNT] = '{2, 256, 7, 32, 128};

  typedef logic [71:0] w72_t;   // {ctrl, data}

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;         // 125 MHz

  logic [63:0] in_data  [P];
  logic [7:0]  in_ctrl  [P];
  logic        in_wr    [P];
  logic        in_rdy   [P];
  logic [63:0] out_data [P];
  logic [7:0]  out_ctrl [P];
  logic        out_wr   [P];
  logic        out_rdy  [P];
  logic [1:0]  cfg      [P][8];
  logic [63:0] now_v [P], ots [P], rts [P], ela [P];
  logic        done_v [P], ovs [P];
  logic [3:0]  mech_v [P];

  for (genvar i = 0; i < P; i++) begin : g_node
    nf_scan_top dut (
      .clk, .rst_n,
      .in_data(in_data[i]), .in_ctrl(in_ctrl[i]), .in_wr(in_wr[i]), .in_rdy(in_rdy[i]),
      .out_data(out_data[i]), .out_ctrl(out_ctrl[i]), .out_wr(out_wr[i]), .out_rdy(out_rdy[i]),
      .cfg_rank_port(cfg[i]),
      .now(now_v[i]), .offload_ts(ots[i]), .release_ts(rts[i]), .elapsed(ela[i]),
      .scan_done(done_v[i]), .mech(mech_v[i]), .oversize(ovs[i])
    );
  end

  int checks = 0, failures = 0;
  int n_ack = 0, n_mcast = 0, n_sub = 0, n_down = 0, n_fwd = 0, n_res = 0;
  int n_alg_done [4] = '{0, 0, 0, 0};

  w72_t inq  [P][$];
  w72_t outp [P][$];

  int   alg;                 // algorithm of the current phase
  int   iter    [P];         // iterations finished by each host
  bit   waiting [P];         // host blocked in MPI_Scan
  int   pause   [P];         // cycles before the next call

  function automatic logic [31:0] xval(int n, int r, int e);
    logic [31:0] h;
    h = 32'(n) * 32'h9E3779B1 ^ 32'(r) * 32'h85EBCA77 ^ 32'(e) * 32'hC2B2AE3D;
    h = h ^ (h >> 15);
    return h * 32'h2C1B3C6D;
  endfunction

  function automatic logic [31:0] prefix(int n, int j, int e);
    logic [31:0] s = '0;
    for (int r = 0; r <= j; r++) s += xval(n, r, e);
    return s;
  endfunction

  function automatic int cnt_of(int n);
    return counts[(n + alg) % NCOUNT];
  endfunction

  function automatic logic [15:0] node_role(int r);
    if (r == P - 1) return NODE_ROOT;
    if (r % 2 == 0) return NODE_LEAF;
    return NODE_INTERNAL;
  endfunction

  // independent IPv4 checksum over the header words as they are on the wire
  function automatic logic [15:0] tb_cksum(w72_t w [$]);
    logic [31:0] s = '0;
    logic [7:0] b [64];
    for (int i = 0; i < 8; i++)
      for (int k = 0; k < 8; k++) b[i*8+k] = w[1+i][63-8*k -: 8];
    for (int o = 14; o < 34; o += 2) s += {16'h0, b[o], b[o+1]};
    s = (s & 32'hFFFF) + (s >> 16);
    s = (s & 32'hFFFF) + (s >> 16);
    return ~s[15:0];
  endfunction

  task automatic push_offload(int r, int n);
    scan_hdr_t h;
    hdr_words_t hw;
    int c, nw;
    c  = cnt_of(n);
    nw = (c + 1) / 2;
    h = '0;
    h.dst_mac = 48'h02_00_00_00_01_00 | 48'(r);
    h.src_mac = 48'h02_00_00_00_00_00 | 48'(r);
    h.eth_type = ETH_TYPE_IPV4;
    h.ver = 4'd4; h.ihl = 4'd5; h.ttl = 8'd64; h.protocol = IP_PROTO_UDP;
    h.total_length = 16'(50 + 8 * nw);
    h.identification = 16'(n);
    h.src_ip = 32'h0A00_0000 | 32'(r);
    h.dst_ip = 32'h0A00_0100 | 32'(r);
    h.udp_src = 16'(40000 + r);
    h.udp_dst = SCAN_UDP_PORT;
    h.udp_len = 16'(30 + 8 * nw);
    h.comm_size = 16'(P);
    h.coll_type = COLL_SCAN;
    h.algo_type = 16'(alg);
    h.node_type = node_role(r);
    h.msg_type = {8'h00, MSG_OFFLOAD};
    h.rank = 16'(r);
    h.count = 16'(c);
    hw = hdr_to_words(h);
    inq[r].push_back({IOQ_CTRL, ioq_word(8'h02, 16'(9 + nw), 3'd1, 16'(64 + 8 * nw))});
    for (int i = 0; i < 8; i++)
      inq[r].push_back({(i == 7 && nw == 0) ? 8'h01 : 8'h00, hw[i]});
    for (int wi = 0; wi < nw; wi++) begin
      logic [31:0] lo;
      lo = (2 * wi + 1 < c) ? xval(n, r, 2 * wi + 1) : 32'h0;
      inq[r].push_back({(wi == nw - 1) ? 8'h01 : 8'h00, xval(n, r, 2 * wi), lo});
    end
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL t=%0t %s", $time, what);
    end
  endtask

  // a finished packet leaving node i
  task automatic handle(int i);
    w72_t pk [$];
    hdr_words_t hw;
    scan_hdr_t h;
    logic [7:0] dst_oh, expect_oh;
    pk = outp[i];
    outp[i] = {};
    dst_oh = pk[0][55:48];
    for (int k = 0; k < 8; k++) hw[k] = pk[1+k][63:0];
    h = words_to_hdr(hw);
    if ((dst_oh & 8'hAA) != 8'h00) begin
      // to a CPU port
      if (h.udp_dst == SCAN_UDP_PORT || h.udp_src == SCAN_UDP_PORT) begin
        int c, nw, n;
        n  = iter[i];
        c  = cnt_of(n);
        nw = (c + 1) / 2;
        n_res++;
        check(waiting[i], $sformatf("node %0d: result while not waiting", i));
        check(dst_oh == 8'h02, $sformatf("node %0d: result port %h", i, dst_oh));
        check(h.msg_type[7:0] == MSG_RESULT && h.udp_dst == 16'(40000 + i) &&
              h.udp_src == SCAN_UDP_PORT && h.dst_ip == (32'h0A00_0000 | 32'(i)),
              $sformatf("node %0d: result header", i));
        check(tb_cksum(pk) == 16'h0 || tb_cksum(pk) == 16'hFFFF,
              $sformatf("node %0d: IPv4 checksum", i));
        check(pk.size() == 9 + nw + 1 && h.total_length == 16'(50 + 8 * nw + 8),
              $sformatf("node %0d: result length %0d", i, pk.size()));
        for (int e = 0; e < c; e++) begin
          logic [31:0] got;
          got = (e % 2 == 0) ? pk[9 + e/2][63:32] : pk[9 + e/2][31:0];
          check(got == prefix(n, i, e),
                $sformatf("alg %0d node %0d iter %0d elem %0d: %h != %h",
                          alg, i, n, e, got, prefix(n, i, e)));
        end
        check(pk[pk.size()-1][63:0] == ela[i] && ela[i] > 0 && ela[i] < 64'd100000,
              $sformatf("node %0d: elapsed %0d vs %0d", i, pk[pk.size()-1][63:0], ela[i]));
        waiting[i] = 1'b0;
        iter[i]++;
        pause[i] = int'($urandom % 600);
      end else begin
        // the forwarded plain packet
        n_fwd++;
        check(i == 0 && dst_oh == 8'h02 && pk.size() == 5 && pk[4][71:64] == 8'h10 &&
              pk[3][63:0] == 64'h1122_3344_5566_7788,
              "forwarded packet");
      end
    end else begin
      // to MAC ports: a message between NetFPGAs
      logic [7:0] mask;
      mask = h.dst_mac[7:0];
      expect_oh = '0;
      for (int r = 0; r < P; r++) if (mask[r]) expect_oh |= mac_port_bit(cfg[i][r]);
      check(mask != 0 && dst_oh == expect_oh && h.rank == 16'(i),
            $sformatf("node %0d: network ports %h mask %h", i, dst_oh, mask));
      check(tb_cksum(pk) == 16'h0 || tb_cksum(pk) == 16'hFFFF, "network checksum");
      for (int r = 0; r < P; r++)
        if (mask[r]) begin
          w72_t c0;
          c0 = pk[0];
          c0[18:16] = 3'(2 * (cfg[r][i]));   // arrives on a MAC port
          inq[r].push_back(c0);
          for (int k = 1; k < pk.size(); k++) inq[r].push_back(pk[k]);
        end
    end
  endtask

  bit running = 1'b0;

  always @(posedge clk) begin
    if (running) begin
      for (int i = 0; i < P; i++) begin
        // input feeder: hold a word until taken
        if (in_wr[i] && in_rdy[i]) begin
          void'(inq[i].pop_front());
          in_wr[i] <= 1'b0;
          if (inq[i].size() > 0 && ($urandom % 8 != 0)) begin
            in_wr[i]   <= 1'b1;
            in_data[i] <= inq[i][0][63:0];
            in_ctrl[i] <= inq[i][0][71:64];
          end
        end else if (!in_wr[i] && inq[i].size() > 0 && ($urandom % 4 != 0)) begin
          in_wr[i]   <= 1'b1;
          in_data[i] <= inq[i][0][63:0];
          in_ctrl[i] <= inq[i][0][71:64];
        end
        // output collector
        if (out_wr[i] && out_rdy[i]) begin
          outp[i].push_back({out_ctrl[i], out_data[i]});
          if (outp[i].size() > 1 && out_ctrl[i] != 8'h00) handle(i);
        end
        out_rdy[i] <= ($urandom % 10 != 0);
        // host
        if (!waiting[i] && iter[i] < ITERS) begin
          if (pause[i] > 0) pause[i]--;
          else begin
            push_offload(i, iter[i]);
            waiting[i] = 1'b1;
          end
        end
        if (mech_v[i][0]) n_ack++;
        if (mech_v[i][1]) n_mcast++;
        if (mech_v[i][2]) n_sub++;
        if (mech_v[i][3]) n_down++;
        if (ovs[i]) check(1'b0, "oversize message");
      end
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog: alg %0d iters %p", alg, iter);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < P; i++) begin
      in_wr[i] = 1'b0; in_data[i] = '0; in_ctrl[i] = '0; out_rdy[i] = 1'b1;
      iter[i] = ITERS; waiting[i] = 1'b0; pause[i] = 0;
      for (int r = 0; r < 8; r++) cfg[i][r] = 2'((i + r) % 4);
    end
    alg = 0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    running = 1'b1;
    // a plain packet from MAC port 0 must reach CPU port 0 unchanged
    inq[0].push_back({IOQ_CTRL, ioq_word(8'h00, 16'd5, 3'd0, 16'd36)});
    inq[0].push_back({8'h00, 64'h0200_0000_0100_0200});
    inq[0].push_back({8'h00, 64'h0000_0000_0800_4500});
    inq[0].push_back({8'h00, 64'h1122_3344_5566_7788});
    inq[0].push_back({8'h10, 64'hAABB_CCDD_0000_0000});
    for (int a = 0; a < 4; a++) begin
      @(posedge clk);
      alg = a;
      for (int i = 0; i < P; i++) begin
        iter[i] = 0;
        pause[i] = (a == 2 && i == 1) ? 3000 : int'($urandom % 400);
      end
      wait (iter[0] == ITERS && iter[1] == ITERS && iter[2] == ITERS && iter[3] == ITERS &&
            iter[4] == ITERS && iter[5] == ITERS && iter[6] == ITERS && iter[7] == ITERS);
      n_alg_done[a] = 1;
      $display("algorithm %0d done at %0t", a, $time);
      repeat (200) @(posedge clk);
    end
    check(n_res == 4 * ITERS * P, $sformatf("results %0d", n_res));
    check(n_ack > 0,   $sformatf("acknowledgements %0d", n_ack));
    check(n_mcast > 0, $sformatf("multicasts %0d", n_mcast));
    check(n_sub > 0,   $sformatf("subtractions %0d", n_sub));
    check(n_down > 0,  $sformatf("down-phase messages %0d", n_down));
    check(n_fwd == 1,  $sformatf("forwarded %0d", n_fwd));
    $display("mechanisms: ack=%0d mcast=%0d sub=%0d down=%0d fwd=%0d results=%0d",
             n_ack, n_mcast, n_sub, n_down, n_fwd, n_res);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
