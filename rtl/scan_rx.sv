// scan_rx: input parser of the MPI_Scan offload engine.
//
// Every packet that enters the user data path passes through here. The
// parser holds the I/O-queue header word and the eight header words of
// Fig. 1, then decides:
//  * a collective packet (IPv4, UDP to SCAN_UDP_PORT, coll_type = MPI_Scan)
//    is consumed. Its payload is written into a message slot: the host
//    slot (slot MAX_RANKS) for an offload request, or the slot numbered by
//    the sender's rank field for a partial result from a peer NetFPGA. The
//    parser waits, holding the input, while that slot is still full, so
//    each sender needs only the one buffer the paper describes. When the
//    packet has been stored, ev_valid pulses with the header, the sender
//    and the message tag level. An acknowledgement carries no payload and
//    only raises the event.
//  * any other packet is forwarded unchanged except for its destination
//    port, which follows the reference NIC: a packet from MAC port i goes
//    to CPU port i and back (one-hot destination 1 << (src ^ 1)).
// Timing: one word per clock; the eight header words are held before the
// decision, so a forwarded packet is replayed from the header buffer.
// The paper gives the packet format and that non-collective IP packets are
// still forwarded; how a collective packet is recognised, the slot per
// sender and the holding of the input are this design's choices.
module scan_rx
  import nf_scan_pkg::*;
#(
  parameter int unsigned MAX_RANKS = 8,
  parameter int unsigned WORDS     = 128,
  parameter int unsigned AW        = $clog2(WORDS),
  parameter int unsigned NSLOT     = MAX_RANKS + 3
) (
  input  logic              clk,
  input  logic              rst_n,
  // input stream
  input  logic [63:0]       in_data,
  input  logic [7:0]        in_ctrl,
  input  logic              in_wr,
  output logic              in_rdy,
  // forwarded (non-collective) packets
  nf_bus_if.src             byp,
  // message slot write port
  output logic              wr_en,
  output logic [3:0]        wr_slot,
  output logic [AW-1:0]     wr_addr,
  output logic [63:0]       wr_data,
  input  logic [NSLOT-1:0]  slot_full,
  // one event per stored collective packet
  output logic              ev_valid,
  output msg_e              ev_kind,
  output logic [7:0]        ev_sender,
  output logic [2:0]        ev_level,
  output scan_hdr_t         ev_hdr,
  output logic [2:0]        ev_port,
  output logic              ev_oversize
);
  localparam logic [3:0] SLOT_HOST = 4'(MAX_RANKS);

  typedef enum logic [2:0] {
    S_IOQ, S_HDR, S_DECIDE, S_PAY, S_DROP, S_REPLAY, S_FWD
  } state_e;

  state_e            state;
  logic [63:0]       ioq;
  hdr_words_t        hbuf;
  logic [3:0]        hcnt;      // header words held
  logic              ended;     // packet ended inside the header
  logic [3:0]        rcnt;      // replay position: 0 = IOQ word
  logic [AW-1:0]     addr;
  logic              over;
  scan_hdr_t         h;
  logic              is_scan;
  logic [3:0]        tslot;
  logic              take;
  logic [7:0]        end_ctrl;  // ctrl of the last word if inside the header

  assign h = words_to_hdr(hbuf);
  assign take = in_wr && in_rdy;

  always_comb begin
    is_scan = (hcnt == 4'(HDR_WORDS)) &&
              h.eth_type == ETH_TYPE_IPV4 && h.protocol == IP_PROTO_UDP &&
              h.udp_dst == SCAN_UDP_PORT && h.coll_type == COLL_SCAN &&
              ((h.msg_type[7:0] == MSG_OFFLOAD) ||
               ((h.msg_type[7:0] == MSG_DATA || h.msg_type[7:0] == MSG_ACK) &&
                h.rank < 16'(MAX_RANKS)));
    tslot = (h.msg_type[7:0] == MSG_OFFLOAD) ? SLOT_HOST : h.rank[3:0];
  end

  // input ready
  always_comb begin
    unique case (state)
      S_IOQ, S_HDR, S_PAY, S_DROP: in_rdy = 1'b1;
      S_FWD:                       in_rdy = byp.rdy;
      default:                     in_rdy = 1'b0;
    endcase
  end

  // forwarded stream
  always_comb begin
    byp.wr   = 1'b0;
    byp.data = in_data;
    byp.ctrl = in_ctrl;
    if (state == S_REPLAY) begin
      byp.wr = 1'b1;
      if (rcnt == 4'd0) begin
        byp.data = ioq;
        byp.data[55:48] = 8'(1) << (ioq_src(ioq) ^ 3'd1);
        byp.ctrl = IOQ_CTRL;
      end else begin
        byp.data = hbuf[rcnt-4'd1];
        byp.ctrl = (ended && rcnt == hcnt) ? end_ctrl : 8'h00;
      end
    end else if (state == S_FWD) begin
      byp.wr = in_wr;
    end
  end

  // slot writes
  assign wr_en   = (state == S_PAY) && take && !over;
  assign wr_slot = tslot;
  assign wr_addr = addr;
  assign wr_data = in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IOQ;
      ioq         <= '0;
      hbuf        <= '0;
      hcnt        <= '0;
      ended       <= 1'b0;
      rcnt        <= '0;
      addr        <= '0;
      over        <= 1'b0;
      ev_valid    <= 1'b0;
      ev_kind     <= MSG_OFFLOAD;
      ev_sender   <= '0;
      ev_level    <= '0;
      ev_hdr      <= '0;
      ev_port     <= '0;
      ev_oversize <= 1'b0;
      end_ctrl    <= '0;
    end else begin
      ev_valid    <= 1'b0;
      ev_oversize <= 1'b0;
      unique case (state)
        S_IOQ: if (take) begin
          ioq   <= in_data;
          hcnt  <= '0;
          ended <= 1'b0;
          state <= S_HDR;
        end
        S_HDR: if (take) begin
          hbuf[hcnt[2:0]] <= in_data;
          hcnt <= hcnt + 4'd1;
          if (in_ctrl != 8'h00) begin
            ended    <= 1'b1;
            end_ctrl <= in_ctrl;
            state    <= S_DECIDE;
          end else if (hcnt == 4'(HDR_WORDS - 1)) begin
            state <= S_DECIDE;
          end
        end
        S_DECIDE: begin
          addr <= '0;
          over <= 1'b0;
          rcnt <= '0;
          if (!is_scan) begin
            state <= S_REPLAY;
          end else if (h.msg_type[7:0] == MSG_ACK) begin
            if (ended) begin
              ev_valid <= 1'b1;
              state    <= S_IOQ;
            end else begin
              state <= S_DROP;
            end
          end else if (!slot_full[tslot]) begin
            if (ended) begin
              ev_valid <= 1'b1;
              state    <= S_IOQ;
            end else begin
              state <= S_PAY;
            end
          end
          ev_kind   <= msg_e'(h.msg_type[7:0]);
          ev_sender <= h.rank[7:0];
          ev_level  <= level_of_tag(h.msg_type[15:8]);
          ev_hdr    <= h;
          ev_port   <= ioq_src(ioq);
        end
        S_PAY: if (take) begin
          if (addr == AW'(WORDS - 1)) over <= 1'b1;
          else                        addr <= addr + AW'(1);
          if (in_ctrl != 8'h00) begin
            ev_valid    <= 1'b1;
            ev_oversize <= over;
            state       <= S_IOQ;
          end
        end
        S_DROP: if (take && in_ctrl != 8'h00) begin
          ev_valid <= 1'b1;
          state    <= S_IOQ;
        end
        S_REPLAY: if (byp.rdy) begin
          if (rcnt == hcnt) state <= ended ? S_IOQ : S_FWD;
          rcnt <= rcnt + 4'd1;
        end
        S_FWD: if (take && in_ctrl != 8'h00) state <= S_IOQ;
        default: state <= S_IOQ;
      endcase
    end
  end

  // The upstream module must hold a word it offers until it is taken.
  // (Checked on the forwarded stream in scan_out_arb.)
endmodule
