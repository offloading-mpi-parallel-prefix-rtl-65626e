// nf_scan_top: MPI_Scan offload module of one NetFPGA node.
//
// Sits in the user data path of the NetFPGA reference NIC, between the
// input arbiter and the output queues, on the 64-bit data / 8-bit ctrl bus.
// The host offloads an MPI_Scan by sending one UDP packet (Fig. 1 header
// plus its data); this module runs the selected network-level algorithm
// with the NetFPGAs of the other ranks, over the same Ethernet links the
// data use, and returns the rank's inclusive prefix sum to the host as one
// UDP packet carrying the elapsed time of the collective. All other packets
// are forwarded as the reference NIC does.
//   scan_rx      parses, stores collective messages, forwards the rest
//   scan_core    message slots, pass engine, algorithm state machines
//   scan_tx      builds data, acknowledgement and result packets
//   scan_timer   64-bit cycle counter and offload/release timestamps
//   scan_out_arb merges forwarded and generated packets
// cfg_rank_port gives, for each rank, the MAC port (0..3) leading to it:
// the manual network configuration the paper mentions. The timestamp and
// event outputs stand for the module's status registers.
module nf_scan_top
  import nf_scan_pkg::*;
#(
  parameter int unsigned MAX_RANKS = 8,
  parameter int unsigned WORDS     = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  // from the input arbiter
  input  logic [63:0] in_data,
  input  logic [7:0]  in_ctrl,
  input  logic        in_wr,
  output logic        in_rdy,
  // to the output queues
  output logic [63:0] out_data,
  output logic [7:0]  out_ctrl,
  output logic        out_wr,
  input  logic        out_rdy,
  // configuration
  input  logic [1:0]  cfg_rank_port [MAX_RANKS],
  // status
  output logic [63:0] now,
  output logic [63:0] offload_ts,
  output logic [63:0] release_ts,
  output logic [63:0] elapsed,
  output logic        scan_done,
  output logic [3:0]  mech,
  output logic        oversize
);
  localparam int unsigned AW    = $clog2(WORDS);
  localparam int unsigned WCW   = $clog2(WORDS + 1);
  localparam int unsigned NSLOT = MAX_RANKS + 3;

  nf_bus_if byp ();
  nf_bus_if gen ();

  logic                 wr_en;
  logic [3:0]           wr_slot;
  logic [AW-1:0]        wr_addr;
  logic [63:0]          wr_data;
  logic                 ev_valid;
  msg_e                 ev_kind;
  logic [7:0]           ev_sender;
  logic [2:0]           ev_level;
  scan_hdr_t            ev_hdr;
  logic [2:0]           ev_port;
  logic [NSLOT-1:0]     slot_full;

  logic                 t_req, t_idle, pl_valid, pl_ready;
  tx_kind_e             t_kind;
  logic [MAX_RANKS-1:0] t_mask;
  logic [7:0]           t_tag;
  logic [WCW-1:0]       t_words;
  logic [63:0]          pl_data;
  scan_hdr_t            host_hdr;
  logic [2:0]           host_port;
  logic [7:0]           my_rank;
  logic                 mark_offload, mark_release;

  scan_rx #(.MAX_RANKS(MAX_RANKS), .WORDS(WORDS)) u_rx (
    .clk, .rst_n, .in_data, .in_ctrl, .in_wr, .in_rdy,
    .byp(byp.src),
    .wr_en, .wr_slot, .wr_addr, .wr_data, .slot_full,
    .ev_valid, .ev_kind, .ev_sender, .ev_level, .ev_hdr, .ev_port,
    .ev_oversize(oversize)
  );

  scan_core #(.MAX_RANKS(MAX_RANKS), .WORDS(WORDS)) u_core (
    .clk, .rst_n,
    .wr_en, .wr_slot, .wr_addr, .wr_data,
    .ev_valid, .ev_kind, .ev_sender, .ev_level, .ev_hdr, .ev_port, .slot_full,
    .t_req, .t_kind, .t_mask, .t_tag, .t_words, .t_idle,
    .pl_data, .pl_valid, .pl_ready,
    .host_hdr, .host_port, .my_rank,
    .mark_offload, .done(scan_done), .mech
  );

  scan_tx #(.MAX_RANKS(MAX_RANKS), .WORDS(WORDS)) u_tx (
    .clk, .rst_n,
    .req_valid(t_req), .req_kind(t_kind), .req_mask(t_mask), .req_tag(t_tag),
    .req_words(t_words), .idle(t_idle),
    .host_hdr, .host_port, .my_rank, .rank_port(cfg_rank_port), .elapsed,
    .pl_data, .pl_valid, .pl_ready,
    .out(gen.src), .mark_release
  );

  scan_timer u_timer (
    .clk, .rst_n, .mark_offload, .mark_release,
    .now, .offload_ts, .release_ts, .elapsed
  );

  scan_out_arb u_arb (
    .clk, .rst_n, .in0(byp.dst), .in1(gen.dst),
    .out_data, .out_ctrl, .out_wr, .out_rdy
  );
endmodule
