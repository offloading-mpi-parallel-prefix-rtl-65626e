// nf_scan_pkg: types and constants shared by the MPI_Scan offload engine.
//
// The collective packet is an ordinary Ethernet/IPv4/UDP frame whose UDP
// payload starts with the collective header of the paper's packet-format
// figure: comm_id, comm_size, coll_type, algo_type, node_type, msg_type,
// rank, root, operation, data_type and count, sixteen bits each. On the
// 64-bit NetFPGA data path the frame occupies eight header words (word 0
// holds bytes 0..7, the first byte in bits 63:56) followed by the data,
// two 32-bit MPI_INT elements per word. Field positions follow the figure;
// where the figure's second row disagrees with the standard Ethernet and
// IPv4 layout (source MAC, EtherType, version/IHL, DiffServ), the standard
// layout is used because the text requires properly formed packets.
//
// The numeric codes of coll_type, algo_type, node_type and msg_type, the
// UDP port and the message tag encoding are not given by the paper and are
// this design's own choices.
package nf_scan_pkg;

  // NetFPGA 1G user data path width (the ctrl lane is 8 bits).
  localparam int unsigned DATA_W = 64;
  // ctrl value of the NetFPGA I/O-queue module header word.
  localparam logic [7:0] IOQ_CTRL = 8'hFF;

  // Number of 64-bit header words before the payload (Fig. 1).
  localparam int unsigned HDR_WORDS = 8;
  // Header length in bytes from the IP header to the end of the collective
  // header: 20 (IP) + 8 (UDP) + 22 (collective fields).
  localparam logic [15:0] IP_HDR_TO_PAYLOAD = 16'd50;

  localparam logic [15:0] ETH_TYPE_IPV4 = 16'h0800;
  localparam logic [7:0]  IP_PROTO_UDP  = 8'd17;
  // UDP destination port the host library uses for offload packets.
  localparam logic [15:0] SCAN_UDP_PORT = 16'd7000;

  localparam logic [15:0] COLL_SCAN = 16'd1;

  typedef enum logic [15:0] {
    ALGO_SEQ      = 16'd0,
    ALGO_RD       = 16'd1,
    ALGO_RD_OPT   = 16'd2,
    ALGO_BINOMIAL = 16'd3
  } algo_e;

  typedef enum logic [15:0] {
    NODE_LEAF     = 16'd0,
    NODE_INTERNAL = 16'd1,
    NODE_ROOT     = 16'd2
  } node_e;

  // msg_type[7:0]; msg_type[15:8] carries the message tag of DATA packets.
  typedef enum logic [7:0] {
    MSG_OFFLOAD = 8'd0,   // host -> own NetFPGA: the MPI_Scan request
    MSG_DATA    = 8'd1,   // NetFPGA -> NetFPGA: a partial result
    MSG_ACK     = 8'd2,   // NetFPGA -> NetFPGA: sequential-algorithm ack
    MSG_RESULT  = 8'd3    // NetFPGA -> host: the final outcome
  } msg_e;

  // The Fig. 1 header, field by field.
  typedef struct packed {
    logic [47:0] dst_mac;
    logic [47:0] src_mac;
    logic [15:0] eth_type;
    logic [3:0]  ver;
    logic [3:0]  ihl;
    logic [7:0]  diff_serv;
    logic [15:0] total_length;
    logic [15:0] identification;
    logic [2:0]  flags;
    logic [12:0] frag_offset;
    logic [7:0]  ttl;
    logic [7:0]  protocol;
    logic [15:0] hdr_cksum;
    logic [31:0] src_ip;
    logic [31:0] dst_ip;
    logic [15:0] udp_src;
    logic [15:0] udp_dst;
    logic [15:0] udp_len;
    logic [15:0] udp_cksum;
    logic [15:0] comm_id;
    logic [15:0] comm_size;
    logic [15:0] coll_type;
    logic [15:0] algo_type;
    logic [15:0] node_type;
    logic [15:0] msg_type;
    logic [15:0] rank;
    logic [15:0] root;
    logic [15:0] operation;
    logic [15:0] data_type;
    logic [15:0] count;
  } scan_hdr_t;

  // The header is exactly eight 64-bit words in wire order
  // ($bits(scan_hdr_t) == HDR_WORDS * DATA_W).
  typedef logic [HDR_WORDS-1:0][DATA_W-1:0] hdr_words_t;

  function automatic scan_hdr_t words_to_hdr(input hdr_words_t w);
    logic [HDR_WORDS*DATA_W-1:0] flat;
    for (int i = 0; i < HDR_WORDS; i++)
      flat[(HDR_WORDS-1-i)*DATA_W +: DATA_W] = w[i];
    return scan_hdr_t'(flat);
  endfunction

  function automatic hdr_words_t hdr_to_words(input scan_hdr_t h);
    logic [HDR_WORDS*DATA_W-1:0] flat;
    hdr_words_t w;
    flat = h;
    for (int i = 0; i < HDR_WORDS; i++)
      w[i] = flat[(HDR_WORDS-1-i)*DATA_W +: DATA_W];
    return w;
  endfunction

  // IPv4 header checksum over the ten 16-bit words of the IP header.
  function automatic logic [15:0] ip_checksum(input scan_hdr_t h);
    logic [19:0] s;
    s = 20'({h.ver, h.ihl, h.diff_serv}) + 20'(h.total_length) +
        20'(h.identification) + 20'({h.flags, h.frag_offset}) +
        20'({h.ttl, h.protocol}) +
        20'(h.src_ip[31:16]) + 20'(h.src_ip[15:0]) +
        20'(h.dst_ip[31:16]) + 20'(h.dst_ip[15:0]);
    s = 20'(s[15:0]) + 20'(s[19:16]);
    s = 20'(s[15:0]) + 20'(s[19:16]);
    return ~s[15:0];
  endfunction

  // Message tag (Fig. 3): a thermometer mask, [01] for a message holding one
  // rank's data, [11] for a message holding a cumulative partial of two
  // ranks, and in general 2^(lvl+1)-1 for the partial of 2^lvl ranks.
  function automatic logic [7:0] tag_of_level(input logic [2:0] lvl);
    return 8'((9'd2 << lvl) - 9'd1);
  endfunction

  function automatic logic [2:0] level_of_tag(input logic [7:0] tag);
    logic [2:0] l;
    l = '0;
    for (int i = 1; i < 8; i++)
      if (tag[i]) l = 3'(i);
    return l;
  endfunction

  // One-hot NetFPGA output port bit of MAC port m (ports are interleaved:
  // MAC0, CPU0, MAC1, CPU1, ...).
  function automatic logic [7:0] mac_port_bit(input logic [1:0] m);
    return 8'(1) << {m, 1'b0};
  endfunction

  // Pass engine operand selector: a message slot or the constant zero.
  typedef struct packed {
    logic       zero;
    logic [3:0] slot;
  } src_t;

  // NetFPGA I/O-queue module header (the word with ctrl = 8'hFF that leads
  // every packet on the user data path): one-hot destination port, length
  // in words, binary source port, length in bytes.
  function automatic logic [63:0] ioq_word(input logic [7:0] dst_oh,
                                           input logic [15:0] word_len,
                                           input logic [2:0] src_port,
                                           input logic [15:0] byte_len);
    return {8'h00, dst_oh, word_len, 13'h0, src_port, byte_len};
  endfunction

  function automatic logic [2:0] ioq_src(input logic [63:0] w);
    return w[18:16];
  endfunction

  // Kinds of generated packets.
  typedef enum logic [1:0] {
    TX_DATA   = 2'd0,
    TX_ACK    = 2'd1,
    TX_RESULT = 2'd2
  } tx_kind_e;

endpackage
