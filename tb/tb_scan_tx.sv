// tb_scan_tx: self-checking test of the packet generator at default sizes.
// Requests a multicast data packet, an acknowledgement, a result and a
// full 1024-byte data packet. For each packet the testbench decodes the
// words it receives and checks the I/O-queue word (one-hot ports, lengths),
// the Ethernet/IP/UDP/collective header fields, an independently computed
// IPv4 checksum, the payload, the last-word ctrl and, for the result, the
// swapped addresses and the appended time word. The output stalls at
// random except for the last packet, which must leave at line rate: one
// word per clock, 1 + 8 + 128 cycles.
module tb_scan_tx;
  import nf_scan_pkg::*;
  localparam int MR = 8;
  typedef logic [71:0] w72_t;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic req_valid, idle, pl_valid, pl_ready, mark_release;
  tx_kind_e req_kind; logic [MR-1:0] req_mask; logic [7:0] req_tag;
  logic [7:0] req_words;
  scan_hdr_t host_hdr; logic [2:0] host_port; logic [7:0] my_rank;
  logic [1:0] rank_port [MR];
  logic [63:0] elapsed, pl_data;
  nf_bus_if out ();
  bit stall_out = 1'b1;

  scan_tx dut (.clk, .rst_n, .req_valid, .req_kind, .req_mask, .req_tag,
               .req_words, .idle, .host_hdr, .host_port, .my_rank, .rank_port,
               .elapsed, .pl_data, .pl_valid, .pl_ready, .out(out.src), .mark_release);

  int checks = 0, failures = 0;
  w72_t pk [$];
  int pl_idx, n_rel, wr_cycles;

  task automatic check(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  function automatic logic [15:0] cks(w72_t w [$]);
    logic [31:0] s = '0;
    logic [7:0] b [64];
    for (int i = 0; i < 8; i++)
      for (int k = 0; k < 8; k++) b[i*8+k] = w[1+i][63-8*k -: 8];
    for (int o = 14; o < 34; o += 2) s += {16'h0, b[o], b[o+1]};
    s = (s & 32'hFFFF) + (s >> 16);
    s = (s & 32'hFFFF) + (s >> 16);
    return s[15:0];
  endfunction

  function automatic logic [63:0] pw(int i);
    return {32'hCAFE0000 | 32'(i), 32'(i) * 32'd3};
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (out.wr && out.rdy) pk.push_back({out.ctrl, out.data});
    if (out.wr) wr_cycles++;
    if (pl_valid && pl_ready) pl_idx++;
    if (mark_release) n_rel++;
    out.rdy <= stall_out ? ($urandom % 3 != 0) : 1'b1;
  end
  assign pl_data  = pw(pl_idx);
  assign pl_valid = 1'b1;

  task automatic do_req(tx_kind_e k, logic [MR-1:0] m, logic [7:0] t, int nw);
    @(negedge clk);
    pk = {}; pl_idx = 0; wr_cycles = 0;
    req_valid = 1'b1; req_kind = k; req_mask = m; req_tag = t; req_words = 8'(nw);
    @(negedge clk);
    req_valid = 1'b0;
    while (!idle) @(negedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hdr_words_t hw;
    scan_hdr_t h;
    req_valid = 0; req_kind = TX_DATA; req_mask = 0; req_tag = 0; req_words = 0;
    out.rdy = 1'b1; pl_idx = 0; n_rel = 0;
    host_hdr = '0;
    host_hdr.dst_mac = 48'h0200_0000_0100; host_hdr.src_mac = 48'h0200_0000_0001;
    host_hdr.eth_type = ETH_TYPE_IPV4; host_hdr.ver = 4; host_hdr.ihl = 5;
    host_hdr.ttl = 64; host_hdr.protocol = IP_PROTO_UDP; host_hdr.identification = 16'h1234;
    host_hdr.src_ip = 32'h0A00_0001; host_hdr.dst_ip = 32'h0A00_0101;
    host_hdr.udp_src = 16'd40001; host_hdr.udp_dst = SCAN_UDP_PORT;
    host_hdr.comm_size = 8; host_hdr.coll_type = COLL_SCAN; host_hdr.algo_type = ALGO_RD_OPT;
    host_hdr.rank = 16'd1; host_hdr.count = 16'd6;
    host_port = 3'd3; my_rank = 8'd1; elapsed = 64'd4242;
    for (int r = 0; r < MR; r++) rank_port[r] = 2'(r % 4);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // multicast data to ranks 0 and 3, tag [11]
    do_req(TX_DATA, 8'b0000_1001, 8'h03, 3);
    for (int i = 0; i < 8; i++) hw[i] = pk[1+i][63:0];
    h = words_to_hdr(hw);
    check(pk.size() == 12, $sformatf("data size %0d", pk.size()));
    check(pk[0][71:64] == 8'hFF && pk[0][55:48] == (mac_port_bit(2'd0) | mac_port_bit(2'd3)),
          $sformatf("data ports %h", pk[0][55:48]));
    check(pk[0][47:32] == 16'd11 && pk[0][15:0] == 16'd88, "data ioq lengths");
    check(h.dst_mac[7:0] == 8'b0000_1001 && h.msg_type == {8'h03, MSG_DATA} && h.rank == 16'd1,
          "data header");
    check(h.total_length == 16'd74 && h.udp_len == 16'd54 && h.udp_cksum == 0, "data lengths");
    check(h.src_ip == host_hdr.src_ip && h.udp_dst == SCAN_UDP_PORT && h.count == 16'd6,
          "data keeps offload fields");
    check(cks(pk) == 16'hFFFF, "data checksum");
    check(pk[9][63:0] == pw(0) && pk[11][63:0] == pw(2) && pk[11][71:64] == 8'h01 &&
          pk[10][71:64] == 8'h00, "data payload");

    // acknowledgement to rank 0
    do_req(TX_ACK, 8'b0000_0001, 8'h00, 3);
    for (int i = 0; i < 8; i++) hw[i] = pk[1+i][63:0];
    h = words_to_hdr(hw);
    check(pk.size() == 9 && pk[8][71:64] == 8'h01 && pk[1][71:64] == 8'h00, "ack is header only");
    check(h.msg_type[7:0] == MSG_ACK && h.total_length == 16'd50 && cks(pk) == 16'hFFFF, "ack header");
    check(pl_idx == 0, "ack takes no payload");

    // result to the host
    check(n_rel == 0, "no release before a result");
    do_req(TX_RESULT, 8'h00, 8'h00, 3);
    for (int i = 0; i < 8; i++) hw[i] = pk[1+i][63:0];
    h = words_to_hdr(hw);
    check(n_rel == 1, "release strobe");
    check(pk.size() == 13 && pk[0][55:48] == 8'h08, $sformatf("result size %0d port %h", pk.size(), pk[0][55:48]));
    check(h.dst_mac == host_hdr.src_mac && h.src_mac == host_hdr.dst_mac &&
          h.dst_ip == host_hdr.src_ip && h.src_ip == host_hdr.dst_ip &&
          h.udp_dst == host_hdr.udp_src && h.udp_src == host_hdr.udp_dst, "result swaps");
    check(h.msg_type[7:0] == MSG_RESULT && h.total_length == 16'd82 && cks(pk) == 16'hFFFF,
          "result header");
    check(pk[11][63:0] == pw(2) && pk[11][71:64] == 8'h00 &&
          pk[12] == {8'h01, 64'd4242}, "result payload and time word");

    // full-size message at line rate
    stall_out = 1'b0;
    @(negedge clk); @(negedge clk);
    do_req(TX_DATA, 8'b0100_0000, 8'h01, 128);
    check(pk.size() == 137 && wr_cycles == 137 && pl_idx == 128,
          $sformatf("line rate: %0d words in %0d cycles", pk.size(), wr_cycles));
    check(pk[136][63:0] == pw(127) && pk[0][15:0] == 16'd1088, "1024-byte payload");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
