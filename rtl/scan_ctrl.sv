// scan_ctrl: collective controller, the network-level MPI_Scan state machines.
//
// The host's offload request (its header and data, stored by scan_rx in the
// host slot) starts a collective. Rank, comm_size, algo_type and node_type
// come from that request, as the paper lets software assign node roles.
// Messages from peers are in the slot of the sending rank; each slot has a
// full flag (rx waits on it) and the tag level of its message. The
// controller drives the arithmetic as passes of scan_pass over the slots
// (A = accumulated partial, R = result) and asks scan_tx for packets.
//
//  ALGO_SEQ (sequential, Sec. III.B): rank j waits for rank j-1's partial,
//    adds its own data, sends the sum to j+1, acknowledges j-1 once that
//    slot is consumed, and releases its result to the host only after the
//    acknowledgement from j+1, so one buffer per sender suffices.
//  ALGO_RD (recursive doubling, Sec. II.B): in stage k rank j exchanges its
//    partial with j ^ 2^k; the received data enter the partial always and
//    the result when j & 2^k is set.
//  ALGO_RD_OPT (Sec. III.C, Fig. 3): as ALGO_RD, but a rank that enters
//    stage k after its stage-k peer's message has arrived adds it first and
//    multicasts the cumulative partial, tagged one level higher, to its
//    stage-k and stage-(k+1) peers, saving one message. A rank receiving a
//    message tagged one level above its stage subtracts its own cached
//    partial to recover the peer's contribution (in the same pass).
//  ALGO_BINOMIAL (Sec. III.D): the highest rank is the root. Up phase: a
//    rank with m trailing one bits receives from children j-2^k, k < m,
//    keeps their messages cached, and sends its partial to j+2^m. Down
//    phase: from the prefix E of everything before its subtree (from the
//    parent, zero at the root) it sends each child, lowest block first and
//    back to back, E plus the cached partials of the lower children; its own
//    result is E plus its partial.
// comm_size must be a power of two no larger than MAX_RANKS. Only MPI_SUM
// on MPI_INT is computed; operation and data_type are not decoded.
// Interface: events from scan_rx; pass descriptors with a one-cycle start;
// packet requests with a one-cycle req; done pulses after each collective.
// Timing: every step waits for the pass engine and the generator to be idle.
module scan_ctrl
  import nf_scan_pkg::*;
#(
  parameter int unsigned MAX_RANKS = 8,
  parameter int unsigned WORDS     = 128,
  parameter int unsigned NSLOT     = MAX_RANKS + 3,
  parameter int unsigned WCW       = $clog2(WORDS + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // events from the parser
  input  logic                  ev_valid,
  input  msg_e                  ev_kind,
  input  logic [7:0]            ev_sender,
  input  logic [2:0]            ev_level,
  input  scan_hdr_t             ev_hdr,
  input  logic [2:0]            ev_port,
  output logic [NSLOT-1:0]      slot_full,
  // pass engine
  output logic                  p_start,
  output src_t                  p_sa, p_sb, p_sc, p_sd,
  output logic                  p_wa, p_wr, p_tx, p_sel_a,
  output logic [WCW-1:0]        p_nwords,
  input  logic                  p_busy,
  // packet generator
  output logic                  t_req,
  output tx_kind_e              t_kind,
  output logic [MAX_RANKS-1:0]  t_mask,
  output logic [7:0]            t_tag,
  input  logic                  t_idle,
  // context for the generator
  output scan_hdr_t             host_hdr,
  output logic [2:0]            host_port,
  output logic [7:0]            my_rank,
  // status
  output logic                  mark_offload,
  output logic                  done,
  output logic [3:0]            mech   // ack sent, multicast, subtract, down msg
);
  localparam int unsigned SX = MAX_RANKS;      // host data
  localparam int unsigned SA = MAX_RANKS + 1;  // accumulated partial
  localparam int unsigned SR = MAX_RANKS + 2;  // result / down-phase prefix

  initial assert (NSLOT <= 16 && MAX_RANKS <= 8)
    else $error("scan_ctrl: slot index is four bits, rank masks eight");

  typedef enum logic [4:0] {
    C_IDLE, C_START, C_WAIT0, C_WAIT,
    C_SEQ_WAIT, C_SEQ_ACK, C_SEQ_WACK, C_SEQ_RES,
    C_RD_INIT, C_RD_ENTRY, C_RD_WRX, C_RD_NEXT, C_RD_RES,
    C_BI_UP, C_BI_UPNX, C_BI_LEAF, C_BI_WDOWN, C_BI_DOWN, C_BI_DNNX, C_BI_RES,
    C_FINISH
  } state_e;

  state_e               state, nxt;
  logic [NSLOT-1:0]     full;
  logic [2:0]           lvl  [MAX_RANKS];
  logic [MAX_RANKS-1:0] ackf;
  scan_hdr_t            hdr;
  logic [2:0]           L;        // log2(comm_size)
  logic [7:0]           j, p;
  logic [2:0]           k;
  logic [2:0]           m;        // binomial: number of children
  logic                 root, skip;
  logic [7:0]           q, cslot, par;

  function automatic src_t S(input logic [7:0] s);
    return '{zero: 1'b0, slot: 4'(s)};
  endfunction
  localparam src_t Z = '{zero: 1'b1, slot: 4'd0};

  function automatic logic [2:0] log2p(input logic [7:0] n);
    logic [2:0] r;
    r = '0;
    for (int i = 0; i < 8; i++) if (n[i]) r = 3'(i);
    return r;
  endfunction

  function automatic logic [2:0] trailing_ones(input logic [7:0] v, input logic [2:0] lim);
    logic [2:0] t;
    logic       go;
    t = '0; go = 1'b1;
    for (int i = 0; i < 8; i++)
      if (go && v[i] && 3'(i) < lim) t = 3'(i + 1); else go = 1'b0;
    return t;
  endfunction

  function automatic logic [MAX_RANKS-1:0] bit_of(input logic [7:0] r);
    return MAX_RANKS'(1) << r;
  endfunction

  assign slot_full = full;
  assign host_hdr  = hdr;
  assign my_rank   = j;

  always_comb begin
    q     = j ^ (8'd1 << k);          // recursive-doubling peer of stage k
    cslot = j - (8'd1 << k);          // binomial child k
    par   = j + (8'd1 << m);          // binomial parent
  end

  // Issue one pass (and optionally one packet), then wait for both to end.
  task automatic issue(input src_t a, input src_t b, input src_t c, input src_t d,
                       input logic wa, input logic wr, input logic tx, input logic sel_a,
                       input logic treq, input tx_kind_e kind,
                       input logic [MAX_RANKS-1:0] mask, input logic [7:0] tag,
                       input state_e after);
    p_start <= 1'b1;
    p_sa <= a; p_sb <= b; p_sc <= c; p_sd <= d;
    p_wa <= wa; p_wr <= wr; p_tx <= tx; p_sel_a <= sel_a;
    t_req  <= treq;
    t_kind <= kind;
    t_mask <= mask;
    t_tag  <= tag;
    nxt    <= after;
    state  <= C_WAIT0;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; nxt <= C_IDLE;
      full <= '0; ackf <= '0;
      for (int r = 0; r < MAX_RANKS; r++) lvl[r] <= '0;
      hdr <= '0; host_port <= '0;
      L <= '0; j <= '0; p <= '0; k <= '0; m <= '0; root <= 1'b0; skip <= 1'b0;
      p_start <= 1'b0; p_sa <= Z; p_sb <= Z; p_sc <= Z; p_sd <= Z;
      p_wa <= 1'b0; p_wr <= 1'b0; p_tx <= 1'b0; p_sel_a <= 1'b0; p_nwords <= '0;
      t_req <= 1'b0; t_kind <= TX_DATA; t_mask <= '0; t_tag <= '0;
      mark_offload <= 1'b0; done <= 1'b0; mech <= '0;
    end else begin
      p_start      <= 1'b0;
      t_req        <= 1'b0;
      mark_offload <= 1'b0;
      done         <= 1'b0;
      mech         <= '0;

      // messages arriving
      if (ev_valid) begin
        unique case (ev_kind)
          MSG_OFFLOAD: begin
            full[SX]     <= 1'b1;
            hdr          <= ev_hdr;
            host_port    <= ev_port;
            mark_offload <= 1'b1;
          end
          MSG_DATA: begin
            full[ev_sender[3:0]] <= 1'b1;
            lvl[ev_sender[2:0]]  <= ev_level;
          end
          MSG_ACK:  ackf[ev_sender[2:0]] <= 1'b1;
          default: ;
        endcase
      end

      unique case (state)
        C_IDLE: if (full[SX]) state <= C_START;

        C_START: begin
          j        <= hdr.rank[7:0];
          p        <= hdr.comm_size[7:0];
          L        <= log2p(hdr.comm_size[7:0]);
          p_nwords <= (hdr.count > 16'(2*WORDS)) ? WCW'(WORDS)
                                                 : WCW'((hdr.count + 16'd1) >> 1);
          k        <= '0;
          skip     <= 1'b0;
          root     <= (hdr.node_type == NODE_ROOT);
          m        <= (hdr.node_type == NODE_ROOT) ? log2p(hdr.comm_size[7:0]) :
                      (hdr.node_type == NODE_LEAF) ? 3'd0 :
                      trailing_ones(hdr.rank[7:0], log2p(hdr.comm_size[7:0]));
          unique case (hdr.algo_type)
            ALGO_RD, ALGO_RD_OPT: state <= C_RD_INIT;
            ALGO_BINOMIAL:        state <= C_BI_UP;
            default:              state <= C_SEQ_WAIT;
          endcase
        end

        C_WAIT0: state <= C_WAIT;
        C_WAIT:  if (!p_busy && t_idle) state <= nxt;

        // ---------------- sequential ----------------
        C_SEQ_WAIT:
          if (j == 8'd0 || full[j[3:0] - 4'd1])
            issue(S(8'(SX)), (j == 8'd0) ? Z : S(j - 8'd1), Z, Z,
                  1'b1, 1'b0, (j != p - 8'd1), 1'b0,
                  (j != p - 8'd1), TX_DATA, bit_of(j + 8'd1), tag_of_level(3'd0),
                  C_SEQ_ACK);
        C_SEQ_ACK:
          if (j != 8'd0) begin
            full[j[3:0] - 4'd1] <= 1'b0;
            mech[0] <= 1'b1;
            issue(Z, Z, Z, Z, 1'b0, 1'b0, 1'b0, 1'b0,
                  1'b1, TX_ACK, bit_of(j - 8'd1), 8'h00, C_SEQ_WACK);
            p_start <= 1'b0;
          end else state <= C_SEQ_WACK;
        C_SEQ_WACK:
          if (j == p - 8'd1) state <= C_SEQ_RES;
          else if (ackf[j[2:0] + 3'd1]) begin
            ackf[j[2:0] + 3'd1] <= 1'b0;
            state <= C_SEQ_RES;
          end
        C_SEQ_RES:
          issue(S(8'(SA)), Z, Z, Z, 1'b0, 1'b0, 1'b1, 1'b1,
                1'b1, TX_RESULT, '0, 8'h00, C_FINISH);

        // ---------------- recursive doubling ----------------
        C_RD_INIT:
          issue(S(8'(SX)), Z, Z, S(8'(SX)), 1'b1, 1'b1, 1'b0, 1'b0,
                1'b0, TX_DATA, '0, 8'h00, (L == 3'd0) ? C_RD_RES : C_RD_ENTRY);
        C_RD_ENTRY:
          if (skip) begin
            skip  <= 1'b0;
            state <= C_RD_WRX;
          end else if (hdr.algo_type == ALGO_RD_OPT && full[q[3:0]] &&
                       (k + 3'd1 < L) && lvl[q[2:0]] == k) begin
            // late rank: fold the waiting message in and multicast
            mech[1] <= 1'b1;
            skip    <= 1'b1;
            issue(S(8'(SA)), S(q), Z, S(8'(SR)), 1'b1, (q < j), 1'b1, 1'b0,
                  1'b1, TX_DATA, bit_of(q) | bit_of(j ^ (8'd1 << (k + 3'd1))),
                  tag_of_level(k + 3'd1), C_RD_NEXT);
          end else begin
            issue(S(8'(SA)), Z, Z, Z, 1'b0, 1'b0, 1'b1, 1'b1,
                  1'b1, TX_DATA, bit_of(q), tag_of_level(k), C_RD_WRX);
          end
        C_RD_WRX:
          if (full[q[3:0]]) begin
            if (lvl[q[2:0]] == k + 3'd1) mech[2] <= 1'b1;
            issue(S(8'(SA)), S(q), (lvl[q[2:0]] == k + 3'd1) ? S(8'(SA)) : Z, S(8'(SR)),
                  1'b1, (q < j), 1'b0, 1'b0,
                  1'b0, TX_DATA, '0, 8'h00, C_RD_NEXT);
          end
        C_RD_NEXT: begin
          full[q[3:0]] <= 1'b0;
          k <= k + 3'd1;
          state <= (k + 3'd1 == L) ? C_RD_RES : C_RD_ENTRY;
        end
        C_RD_RES:
          issue(S(8'(SR)), Z, Z, Z, 1'b0, 1'b0, 1'b1, 1'b1,
                1'b1, TX_RESULT, '0, 8'h00, C_FINISH);

        // ---------------- binomial tree ----------------
        C_BI_UP:
          if (m == 3'd0) state <= C_BI_LEAF;
          else if (full[cslot[3:0]])
            issue((k == 3'd0) ? S(8'(SX)) : S(8'(SA)), S(cslot), Z, Z,
                  1'b1, 1'b0, (k == m - 3'd1) && !root, 1'b0,
                  (k == m - 3'd1) && !root, TX_DATA, bit_of(par),
                  tag_of_level(m), C_BI_UPNX);
        C_BI_UPNX:
          if (k == m - 3'd1) state <= root ? C_BI_DOWN : C_BI_WDOWN;
          else begin
            k <= k + 3'd1;
            state <= C_BI_UP;
          end
        C_BI_LEAF:
          issue(S(8'(SX)), Z, Z, Z, 1'b0, 1'b0, 1'b1, 1'b1,
                1'b1, TX_DATA, bit_of(j + 8'd1), tag_of_level(3'd0), C_BI_WDOWN);
        C_BI_WDOWN:
          if (full[par[3:0]]) begin
            k     <= m - 3'd1;
            state <= (m == 3'd0) ? C_BI_RES : C_BI_DOWN;
          end
        C_BI_DOWN: begin
          mech[3] <= 1'b1;
          issue((k != m - 3'd1) ? S(8'(SR)) : root ? Z : S(par),
                S(cslot), Z,
                (k != m - 3'd1) ? S(8'(SR)) : root ? Z : S(par),
                1'b0, 1'b1, 1'b1, 1'b1,
                1'b1, TX_DATA, bit_of(cslot), tag_of_level(k), C_BI_DNNX);
        end
        C_BI_DNNX: begin
          full[cslot[3:0]] <= 1'b0;
          if (k == 3'd0) state <= C_BI_RES;
          else begin
            k     <= k - 3'd1;
            state <= C_BI_DOWN;
          end
        end
        C_BI_RES:
          issue(root ? Z : S(par), (m == 3'd0) ? S(8'(SX)) : S(8'(SA)), Z, Z,
                1'b0, 1'b0, 1'b1, 1'b0,
                1'b1, TX_RESULT, '0, 8'h00, C_FINISH);

        C_FINISH: begin
          full[SX] <= 1'b0;
          if (hdr.algo_type == ALGO_BINOMIAL && !root)
            full[par[3:0]] <= 1'b0;
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
