// tb_scan_ctrl: self-checking test of the collective controller, run with
// its message slots and pass engine (scan_core) on eight ranks. The
// testbench stands in for the parser and the packet generator and models
// the network at the message level: it takes each packet request with its
// payload words, delivers data and acknowledgements to the ranks in the
// mask through the parser's slot write port (respecting slot_full), and
// checks each result against the inclusive prefix sum it computes itself.
// All four algorithms run on eight ranks and recursive doubling and the
// binomial tree also on four (comm_size 4), several back-to-back calls
// each, with random call times and one rank made late to provoke the
// tagged multicast. Besides the results it checks the number of network
// messages each algorithm sends per call: sequential 7 data + 7 acks;
// recursive doubling p*log2(p) minus one per multicast; binomial 2(p-1).
module tb_scan_ctrl;
  import nf_scan_pkg::*;
  localparam int N = 8, MR = 8, WORDS = 128, NSLOT = MR + 3, ITERS = 3;
  localparam int NCNT = 4;
  localparam int counts [NCNT] = '{3, 256, 10, 64};

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic wr_en [N]; logic [3:0] wr_slot [N]; logic [6:0] wr_addr [N]; logic [63:0] wr_data [N];
  logic ev_valid [N]; msg_e ev_kind [N]; logic [7:0] ev_sender [N]; logic [2:0] ev_level [N];
  scan_hdr_t ev_hdr [N]; logic [2:0] ev_port [N]; logic [NSLOT-1:0] slot_full [N];
  logic t_req [N]; tx_kind_e t_kind [N]; logic [MR-1:0] t_mask [N]; logic [7:0] t_tag [N];
  logic [7:0] t_words [N]; logic t_idle [N];
  logic [63:0] pl_data [N]; logic pl_valid [N], pl_ready [N];
  scan_hdr_t host_hdr [N]; logic [2:0] host_port [N]; logic [7:0] my_rank [N];
  logic mark_offload [N], done_v [N]; logic [3:0] mech [N];

  for (genvar i = 0; i < N; i++) begin : g_core
    scan_core dut (
      .clk, .rst_n,
      .wr_en(wr_en[i]), .wr_slot(wr_slot[i]), .wr_addr(wr_addr[i]), .wr_data(wr_data[i]),
      .ev_valid(ev_valid[i]), .ev_kind(ev_kind[i]), .ev_sender(ev_sender[i]),
      .ev_level(ev_level[i]), .ev_hdr(ev_hdr[i]), .ev_port(ev_port[i]),
      .slot_full(slot_full[i]),
      .t_req(t_req[i]), .t_kind(t_kind[i]), .t_mask(t_mask[i]), .t_tag(t_tag[i]),
      .t_words(t_words[i]), .t_idle(t_idle[i]),
      .pl_data(pl_data[i]), .pl_valid(pl_valid[i]), .pl_ready(pl_ready[i]),
      .host_hdr(host_hdr[i]), .host_port(host_port[i]), .my_rank(my_rank[i]),
      .mark_offload(mark_offload[i]), .done(done_v[i]), .mech(mech[i])
    );
  end

  typedef struct {
    msg_e        kind;
    int          sender;
    int          level;
    scan_hdr_t   hdr;
    logic [63:0] w [$];
  } msg_t;

  msg_t pend [N][$];
  // generator model state
  bit          tx_busy [N];
  tx_kind_e    tx_kind [N];
  logic [MR-1:0] tx_mask [N];
  logic [7:0]  tx_tag [N];
  int          tx_need [N];
  logic [63:0] tx_w [N][$];
  // parser model state
  bit          rx_busy [N];
  int          rx_pos [N];
  msg_t        rx_cur [N];

  int checks = 0, failures = 0;
  int alg, P, iter [N], pause [N];
  bit waiting [N];
  int n_data, n_ack, n_mcast, n_sub, n_down;

  function automatic logic [31:0] xval(int n, int r, int e);
    logic [31:0] h;
    h = 32'(n + 17 * alg + 5 * P) * 32'h9E3779B1 ^ 32'(r) * 32'h85EBCA77 ^ 32'(e) * 32'hC2B2AE3D;
    h = h ^ (h >> 13);
    return h * 32'h27D4EB2F;
  endfunction
  function automatic int cnt_of(int n);
    return counts[(n + alg) % NCNT];
  endfunction

  task automatic check(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL t=%0t %s", $time, s); end
  endtask

  task automatic offload(int r, int n);
    msg_t m;
    int c;
    c = cnt_of(n);
    m.kind = MSG_OFFLOAD; m.sender = r; m.level = 0;
    m.hdr = '0;
    m.hdr.comm_size = 16'(P); m.hdr.algo_type = 16'(alg); m.hdr.rank = 16'(r);
    m.hdr.node_type = (r == P - 1) ? NODE_ROOT : (r % 2 == 0) ? NODE_LEAF : NODE_INTERNAL;
    m.hdr.count = 16'(c);
    m.w = {};
    for (int wi = 0; wi < (c + 1) / 2; wi++)
      m.w.push_back({xval(n, r, 2 * wi), (2 * wi + 1 < c) ? xval(n, r, 2 * wi + 1) : 32'h0});
    pend[r].push_back(m);
  endtask

  task automatic deliver(int i);
    if (tx_kind[i] == TX_RESULT) begin
      int n, c;
      n = iter[i]; c = cnt_of(n);
      check(waiting[i] && tx_w[i].size() == (c + 1) / 2, $sformatf("rank %0d result size", i));
      for (int e = 0; e < c && e / 2 < tx_w[i].size(); e++) begin
        logic [31:0] s, got;
        s = '0;
        for (int r = 0; r <= i; r++) s += xval(n, r, e);
        got = (e % 2 == 0) ? tx_w[i][e/2][63:32] : tx_w[i][e/2][31:0];
        check(got == s, $sformatf("alg %0d p %0d rank %0d iter %0d elem %0d", alg, P, i, n, e));
      end
      waiting[i] = 1'b0;
      iter[i]++;
      pause[i] = int'($urandom % 300);
    end else begin
      check(tx_mask[i] != 0 && (tx_mask[i] >> P) == 0, "destinations inside the communicator");
      for (int r = 0; r < P; r++)
        if (tx_mask[i][r]) begin
          msg_t m;
          m.kind   = (tx_kind[i] == TX_ACK) ? MSG_ACK : MSG_DATA;
          m.sender = i;
          m.level  = int'(level_of_tag(tx_tag[i]));
          m.hdr    = '0;
          m.w      = tx_w[i];
          pend[r].push_back(m);
        end
      if (tx_kind[i] == TX_ACK) n_ack++; else n_data++;
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      // generator model
      if (t_req[i]) begin
        tx_busy[i] = 1'b1; tx_kind[i] = t_kind[i]; tx_mask[i] = t_mask[i];
        tx_tag[i] = t_tag[i]; tx_need[i] = (t_kind[i] == TX_ACK) ? 0 : int'(t_words[i]);
        tx_w[i] = {};
      end else if (tx_busy[i]) begin
        if (pl_valid[i] && pl_ready[i]) tx_w[i].push_back(pl_data[i]);
        if (tx_w[i].size() == tx_need[i]) begin
          tx_busy[i] = 1'b0;
          deliver(i);
        end
      end
      t_idle[i]   <= !tx_busy[i];
      pl_ready[i] <= tx_busy[i] && ($urandom % 4 != 0);
      // parser model
      wr_en[i] <= 1'b0; ev_valid[i] <= 1'b0;
      if (rx_busy[i]) begin
        if (rx_pos[i] < rx_cur[i].w.size()) begin
          wr_en[i]   <= 1'b1;
          wr_slot[i] <= (rx_cur[i].kind == MSG_OFFLOAD) ? 4'(MR) : 4'(rx_cur[i].sender);
          wr_addr[i] <= 7'(rx_pos[i]);
          wr_data[i] <= rx_cur[i].w[rx_pos[i]];
          rx_pos[i]++;
        end else begin
          ev_valid[i]  <= 1'b1;
          ev_kind[i]   <= rx_cur[i].kind;
          ev_sender[i] <= 8'(rx_cur[i].sender);
          ev_level[i]  <= 3'(rx_cur[i].level);
          ev_hdr[i]    <= rx_cur[i].hdr;
          ev_port[i]   <= 3'd1;
          rx_busy[i]   = 1'b0;
        end
      end else if (pend[i].size() > 0 && !ev_valid[i] && $urandom % 2 == 0) begin
        msg_t m;
        int s;
        m = pend[i][0];
        s = (m.kind == MSG_OFFLOAD) ? MR : m.sender;
        if (m.kind == MSG_ACK || !slot_full[i][s]) begin
          void'(pend[i].pop_front());
          rx_cur[i] = m; rx_pos[i] = 0; rx_busy[i] = 1'b1;
          if (m.kind == MSG_ACK) rx_cur[i].w = {};
        end
      end
      // host model
      if (i < P && !waiting[i] && iter[i] < ITERS) begin
        if (pause[i] > 0) pause[i]--;
        else begin offload(i, iter[i]); waiting[i] = 1'b1; end
      end
      if (mech[i][1]) n_mcast++;
      if (mech[i][2]) n_sub++;
      if (mech[i][3]) n_down++;
    end
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog alg %0d p %0d", alg, P);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit all_done();
    for (int i = 0; i < P; i++) if (iter[i] < ITERS) return 1'b0;
    return 1'b1;
  endfunction

  task automatic phase(int a, int p, int late);
    int lg;
    lg = (p == 8) ? 3 : 2;
    @(posedge clk);
    alg = a; P = p;
    n_data = 0; n_ack = 0; n_mcast = 0; n_sub = 0; n_down = 0;
    for (int i = 0; i < N; i++) begin
      iter[i] = (i < p) ? 0 : ITERS;
      pause[i] = (i == late) ? 2500 : int'($urandom % 200);
    end
    while (!all_done()) @(posedge clk);
    repeat (300) @(posedge clk);
    $display("alg %0d p %0d: data %0d ack %0d mcast %0d sub %0d down %0d",
             a, p, n_data, n_ack, n_mcast, n_sub, n_down);
    case (a)
      ALGO_SEQ: check(n_data == ITERS * (p - 1) && n_ack == ITERS * (p - 1), "sequential messages");
      ALGO_RD:  check(n_data == ITERS * p * lg && n_mcast == 0, "recursive doubling messages");
      ALGO_RD_OPT: check(n_data == ITERS * p * lg - n_mcast && n_mcast > 0 && n_sub > 0,
                         "optimised recursive doubling messages");
      default:  check(n_data == ITERS * 2 * (p - 1) && n_down == ITERS * (p - 1),
                      "binomial messages");
    endcase
    for (int i = 0; i < N; i++)
      check(slot_full[i] == '0 && pend[i].size() == 0, $sformatf("rank %0d drained", i));
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      wr_en[i] = 0; wr_slot[i] = 0; wr_addr[i] = 0; wr_data[i] = 0; ev_valid[i] = 0;
      ev_kind[i] = MSG_OFFLOAD; ev_sender[i] = 0; ev_level[i] = 0; ev_hdr[i] = '0; ev_port[i] = 0;
      t_idle[i] = 1; pl_ready[i] = 0; tx_busy[i] = 0; rx_busy[i] = 0;
      iter[i] = ITERS; waiting[i] = 0; pause[i] = 0;
    end
    alg = 0; P = N;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    phase(ALGO_SEQ, 8, -1);
    phase(ALGO_RD, 8, -1);
    phase(ALGO_RD_OPT, 8, 1);
    phase(ALGO_BINOMIAL, 8, -1);
    phase(ALGO_RD_OPT, 4, 2);
    phase(ALGO_BINOMIAL, 4, -1);
    phase(ALGO_SEQ, 4, -1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
