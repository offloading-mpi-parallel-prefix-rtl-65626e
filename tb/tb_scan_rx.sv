// tb_scan_rx: self-checking test of the input parser at its default sizes.
// Sends, with random gaps and a randomly stalling forward path:
//  an offload request from CPU port 0 (odd element count), a tagged data
//  message from rank 3, a header-only acknowledgement from rank 2, a
//  non-collective UDP packet from MAC port 1 and a three-word runt packet,
//  a data message for a slot that is still full (it must be held, not
//  written, until the slot is freed), and a message longer than a slot.
// Checks the slot writes word by word, the events (kind, sender, tag
// level, header, source port), the oversize flag, and that forwarded
// packets come out unchanged apart from the reference-NIC destination port.
module tb_scan_rx;
  import nf_scan_pkg::*;
  localparam int MR = 8, WORDS = 128, NSLOT = MR + 3;
  typedef logic [71:0] w72_t;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic [63:0] in_data;  logic [7:0] in_ctrl;  logic in_wr, in_rdy;
  nf_bus_if byp ();
  logic wr_en; logic [3:0] wr_slot; logic [6:0] wr_addr; logic [63:0] wr_data;
  logic [NSLOT-1:0] slot_full;
  logic ev_valid, ev_oversize; msg_e ev_kind; logic [7:0] ev_sender;
  logic [2:0] ev_level, ev_port; scan_hdr_t ev_hdr;

  scan_rx dut (.clk, .rst_n, .in_data, .in_ctrl, .in_wr, .in_rdy, .byp(byp.src),
               .wr_en, .wr_slot, .wr_addr, .wr_data, .slot_full,
               .ev_valid, .ev_kind, .ev_sender, .ev_level, .ev_hdr, .ev_port,
               .ev_oversize);

  int checks = 0, failures = 0;
  w72_t inq [$];
  w72_t fwd_exp [$];
  logic [63:0] mem [NSLOT][WORDS];
  int nwr [NSLOT];
  int n_ev = 0, n_over = 0, n_fwd_words = 0;
  int held_cycles = 0;

  task automatic check(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL t=%0t %s", $time, s); end
  endtask

  function automatic scan_hdr_t mk_hdr(msg_e mt, int rank, int tag, int cnt, int port);
    scan_hdr_t h = '0;
    h.dst_mac = 48'h0300_0000_0001; h.src_mac = 48'h0200_0000_00AA;
    h.eth_type = ETH_TYPE_IPV4; h.ver = 4; h.ihl = 5; h.ttl = 64;
    h.protocol = IP_PROTO_UDP; h.src_ip = 32'h0A000001; h.dst_ip = 32'h0A000002;
    h.udp_src = 16'd1234; h.udp_dst = 16'(port); h.comm_size = 16'd8;
    h.coll_type = COLL_SCAN; h.msg_type = {8'(tag), mt}; h.rank = 16'(rank);
    h.count = 16'(cnt);
    return h;
  endfunction

  function automatic logic [63:0] pay(int id, int w);
    return {16'hD0D0, 16'(id), 32'(w) * 32'h01010101};
  endfunction

  task automatic send(scan_hdr_t h, int nw, int src, int id, bit fwd);
    hdr_words_t hw;
    w72_t w;
    hw = hdr_to_words(h);
    w = {IOQ_CTRL, ioq_word(8'h00, 16'(9 + nw), 3'(src), 16'(64 + 8 * nw))};
    inq.push_back(w);
    if (fwd) begin w[55:48] = 8'(1) << (3'(src) ^ 3'd1); fwd_exp.push_back(w); end
    for (int i = 0; i < 8; i++) begin
      w = {(i == 7 && nw == 0) ? 8'h01 : 8'h00, hw[i]};
      inq.push_back(w);
      if (fwd) fwd_exp.push_back(w);
    end
    for (int i = 0; i < nw; i++) begin
      w = {(i == nw - 1) ? 8'h01 : 8'h00, pay(id, i)};
      inq.push_back(w);
      if (fwd) fwd_exp.push_back(w);
    end
  endtask

  // feeder and monitors
  always @(posedge clk) if (rst_n) begin
    if (in_wr && !in_rdy && slot_full[5] && in_ctrl == 8'h00) held_cycles++;
    if (in_wr && in_rdy) begin
      void'(inq.pop_front());
      in_wr <= 1'b0;
    end
    if ((in_wr && in_rdy || !in_wr) && inq.size() > 0 && $urandom % 5 != 0) begin
      in_wr   <= 1'b1;
      in_data <= inq[0][63:0];
      in_ctrl <= inq[0][71:64];
    end
    byp.rdy <= ($urandom % 3 != 0);
    if (wr_en) begin
      check(32'(wr_addr) == nwr[wr_slot], $sformatf("slot %0d address %0d", wr_slot, wr_addr));
      mem[wr_slot][wr_addr] = wr_data;
      nwr[wr_slot]++;
    end
    if (byp.wr && byp.rdy) begin
      check(fwd_exp.size() > 0 && {byp.ctrl, byp.data} == fwd_exp[0],
            $sformatf("forwarded word %h", {byp.ctrl, byp.data}));
      if (fwd_exp.size() > 0) void'(fwd_exp.pop_front());
      n_fwd_words++;
    end
    if (ev_valid) n_ev++;
    if (ev_oversize) n_over++;
  end

  task automatic wait_ev();
    int t = 0;
    while (!ev_valid && t < 5000) begin @(posedge clk); t++; end
    check(ev_valid, "event expected");
    #1;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    scan_hdr_t h;
    in_wr = 1'b0; in_data = '0; in_ctrl = '0; byp.rdy = 1'b1; slot_full = '0;
    for (int s = 0; s < NSLOT; s++) nwr[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1. offload request from CPU port 0
    h = mk_hdr(MSG_OFFLOAD, 6, 0, 5, int'(SCAN_UDP_PORT));
    send(h, 3, 1, 1, 1'b0);
    @(posedge clk);
    wait_ev();
    check(ev_kind == MSG_OFFLOAD && ev_hdr == h && ev_port == 3'd1, "offload event");
    check(nwr[MR] == 3 && mem[MR][0] == pay(1, 0) && mem[MR][2] == pay(1, 2), "offload data");
    @(posedge clk);

    // 2. data from rank 3 tagged [11]
    h = mk_hdr(MSG_DATA, 3, 8'h03, 4, int'(SCAN_UDP_PORT));
    send(h, 2, 2, 2, 1'b0);
    wait_ev();
    check(ev_kind == MSG_DATA && ev_sender == 8'd3 && ev_level == 3'd1, "data event");
    check(nwr[3] == 2 && mem[3][1] == pay(2, 1), "data payload in slot 3");
    @(posedge clk);

    // 3. acknowledgement from rank 2
    h = mk_hdr(MSG_ACK, 2, 0, 4, int'(SCAN_UDP_PORT));
    send(h, 0, 4, 3, 1'b0);
    wait_ev();
    check(ev_kind == MSG_ACK && ev_sender == 8'd2 && nwr[2] == 0, "ack event");
    @(posedge clk);

    // 4. plain UDP packet from MAC port 1 and a runt: forwarded to CPU port 1
    h = mk_hdr(MSG_DATA, 1, 0, 8, 80);
    send(h, 4, 2, 4, 1'b1);
    inq.push_back({IOQ_CTRL, ioq_word(8'h00, 16'd3, 3'd4, 16'd20)});
    fwd_exp.push_back({IOQ_CTRL, ioq_word(8'h20, 16'd3, 3'd4, 16'd20)});
    inq.push_back({8'h00, 64'h0102030405060708}); fwd_exp.push_back({8'h00, 64'h0102030405060708});
    inq.push_back({8'h00, 64'h1112131415161718}); fwd_exp.push_back({8'h00, 64'h1112131415161718});
    inq.push_back({8'h08, 64'h2122232425000000}); fwd_exp.push_back({8'h08, 64'h2122232425000000});
    wait (fwd_exp.size() == 0);
    check(n_fwd_words == 13 + 4, $sformatf("forwarded words %0d", n_fwd_words));
    check(n_ev == 3, "forwarded packets raise no event");

    // 5. data for a full slot is held
    slot_full[5] = 1'b1;
    h = mk_hdr(MSG_DATA, 5, 1, 6, int'(SCAN_UDP_PORT));
    send(h, 3, 0, 5, 1'b0);
    repeat (100) @(posedge clk);
    check(nwr[5] == 0 && n_ev == 3 && held_cycles > 50, $sformatf("held %0d", held_cycles));
    slot_full[5] = 1'b0;
    wait_ev();
    check(ev_sender == 8'd5 && nwr[5] == 3 && mem[5][2] == pay(5, 2), "released data");
    @(posedge clk);

    // 6. longer than a slot
    h = mk_hdr(MSG_DATA, 1, 1, 260, int'(SCAN_UDP_PORT));
    send(h, 130, 0, 6, 1'b0);
    wait_ev();
    check(nwr[1] == WORDS && mem[1][WORDS-1] == pay(6, WORDS-1), "slot filled, rest dropped");
    @(posedge clk); @(posedge clk);
    check(n_over == 1, "oversize flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
