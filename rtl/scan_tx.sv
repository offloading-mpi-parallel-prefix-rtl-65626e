// scan_tx: packet generator of the MPI_Scan offload engine.
//
// Builds every packet the engine sends from the header of the host's
// offload request, which the controller keeps (the paper's stored MAC, IP,
// checksum and UDP fields), so that nothing is fetched from host memory:
//  * TX_DATA, a partial result for one or more peer NetFPGAs. The header is
//    the offload header with msg_type = {tag, DATA} and rank = this node's
//    rank. The destination ranks travel as a bit mask in the low bits of
//    the destination MAC (a locally administered group address), and the
//    I/O-queue header sets the one-hot bit of the MAC port configured for
//    each destination rank. Several bits give the NetFPGA multicast the
//    optimised recursive doubling uses.
//  * TX_ACK, the sequential algorithm's acknowledgement: header only.
//  * TX_RESULT, the final outcome for the host: MAC, IP and UDP source and
//    destination swapped so the host's socket accepts it, sent to the CPU
//    port the request came from, with the elapsed time of the collective
//    appended after the data as one 64-bit word.
// Lengths and the IPv4 header checksum are recomputed; the UDP checksum is
// sent as zero (optional in IPv4). Payloads are whole 64-bit words; an odd
// element count carries one padding element.
// Timing: a request is taken while idle; the I/O-queue word and the eight
// header words go out first, then pay_words payload words from the pass
// engine (pl_valid/pl_ready), then, for a result, the time word. The
// release strobe for the timer pulses with the first word of a result.
// The field layout follows the paper; destination encoding, port mapping,
// zero UDP checksum and where the time word sits are this design's choice.
module scan_tx
  import nf_scan_pkg::*;
#(
  parameter int unsigned MAX_RANKS = 8,
  parameter int unsigned WORDS     = 128,
  parameter int unsigned WCW       = $clog2(WORDS + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // request
  input  logic                  req_valid,
  input  tx_kind_e              req_kind,
  input  logic [MAX_RANKS-1:0]  req_mask,
  input  logic [7:0]            req_tag,
  input  logic [WCW-1:0]        req_words,
  output logic                  idle,
  // context
  input  scan_hdr_t             host_hdr,
  input  logic [2:0]            host_port,
  input  logic [7:0]            my_rank,
  input  logic [1:0]            rank_port [MAX_RANKS],
  input  logic [63:0]           elapsed,
  // payload from the pass engine
  input  logic [63:0]           pl_data,
  input  logic                  pl_valid,
  output logic                  pl_ready,
  // output stream
  nf_bus_if.src                 out,
  output logic                  mark_release
);
  typedef enum logic [2:0] {T_IDLE, T_IOQ, T_HDR, T_PAY, T_TIME} state_e;

  state_e          state;
  tx_kind_e        kind;
  logic [WCW-1:0]  words, wcnt;
  logic [2:0]      hcnt;
  hdr_words_t      hw;
  logic [63:0]     ioq;

  // header and I/O-queue word of the request being taken
  scan_hdr_t       nh;
  logic [15:0]     pay_bytes;
  logic [15:0]     byte_len;
  logic [7:0]      dst_oh;

  always_comb begin
    pay_bytes = 16'(req_words) << 3;
    if (req_kind == TX_ACK)    pay_bytes = 16'd0;
    if (req_kind == TX_RESULT) pay_bytes = pay_bytes + 16'd8;
    nh = host_hdr;
    nh.total_length = IP_HDR_TO_PAYLOAD + pay_bytes;
    nh.udp_len      = IP_HDR_TO_PAYLOAD - 16'd20 + pay_bytes;
    nh.udp_cksum    = 16'h0000;
    dst_oh = '0;
    if (req_kind == TX_RESULT) begin
      nh.dst_mac  = host_hdr.src_mac;
      nh.src_mac  = host_hdr.dst_mac;
      nh.dst_ip   = host_hdr.src_ip;
      nh.src_ip   = host_hdr.dst_ip;
      nh.udp_dst  = host_hdr.udp_src;
      nh.udp_src  = host_hdr.udp_dst;
      nh.msg_type = {8'h00, MSG_RESULT};
      dst_oh      = 8'(1) << host_port;
    end else begin
      nh.dst_mac  = {8'h03, 40'(req_mask)};
      nh.msg_type = {req_tag, (req_kind == TX_ACK) ? MSG_ACK : MSG_DATA};
      nh.rank     = 16'(my_rank);
      for (int r = 0; r < MAX_RANKS; r++)
        if (req_mask[r]) dst_oh = dst_oh | mac_port_bit(rank_port[r]);
    end
    nh.hdr_cksum = 16'h0000;
    nh.hdr_cksum = ip_checksum(nh);
    byte_len = 16'd14 + nh.total_length;
  end

  assign idle     = (state == T_IDLE);
  assign pl_ready = (state == T_PAY) && out.rdy;

  always_comb begin
    out.wr   = 1'b0;
    out.data = '0;
    out.ctrl = 8'h00;
    unique case (state)
      T_IOQ: begin
        out.wr = 1'b1; out.data = ioq; out.ctrl = IOQ_CTRL;
      end
      T_HDR: begin
        out.wr   = 1'b1;
        out.data = hw[hcnt];
        out.ctrl = (hcnt == 3'(HDR_WORDS - 1) && words == '0 &&
                    kind != TX_RESULT) ? 8'h01 : 8'h00;
      end
      T_PAY: begin
        out.wr   = pl_valid;
        out.data = pl_data;
        out.ctrl = (wcnt == words - WCW'(1) && kind != TX_RESULT) ? 8'h01 : 8'h00;
      end
      T_TIME: begin
        out.wr = 1'b1; out.data = elapsed; out.ctrl = 8'h01;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= T_IDLE;
      kind         <= TX_DATA;
      words        <= '0;
      wcnt         <= '0;
      hcnt         <= '0;
      hw           <= '0;
      ioq          <= '0;
      mark_release <= 1'b0;
    end else begin
      mark_release <= 1'b0;
      unique case (state)
        T_IDLE: if (req_valid) begin
          kind  <= req_kind;
          words <= (req_kind == TX_ACK) ? '0 : req_words;
          hw    <= hdr_to_words(nh);
          ioq   <= ioq_word(dst_oh, (byte_len + 16'd7) >> 3, 3'd0, byte_len);
          hcnt  <= '0;
          wcnt  <= '0;
          state <= T_IOQ;
          if (req_kind == TX_RESULT) mark_release <= 1'b1;
        end
        T_IOQ: if (out.rdy) state <= T_HDR;
        T_HDR: if (out.rdy) begin
          hcnt <= hcnt + 3'd1;
          if (hcnt == 3'(HDR_WORDS - 1))
            state <= (words != '0) ? T_PAY :
                     (kind == TX_RESULT) ? T_TIME : T_IDLE;
        end
        T_PAY: if (pl_valid && out.rdy) begin
          wcnt <= wcnt + WCW'(1);
          if (wcnt == words - WCW'(1))
            state <= (kind == TX_RESULT) ? T_TIME : T_IDLE;
        end
        T_TIME: if (out.rdy) state <= T_IDLE;
        default: state <= T_IDLE;
      endcase
    end
  end
endmodule
