// scan_core: message slots, pass engine and collective controller.
//
// Holds NSLOT message slots (scan_buf): one per peer rank (slots
// 0..MAX_RANKS-1, written by the parser with that rank's messages), the
// host slot (MAX_RANKS, the offload data), the accumulator A and the
// result R (written only by the pass engine). scan_ctrl sequences passes of
// scan_pass over them and requests packets; the pass engine's payload
// stream and the packet requests leave towards scan_tx.
// Interface: the parser's slot write port and events in; packet requests,
// payload stream and the stored offload context out.
module scan_core
  import nf_scan_pkg::*;
#(
  parameter int unsigned MAX_RANKS = 8,
  parameter int unsigned WORDS     = 128,
  parameter int unsigned AW        = $clog2(WORDS),
  parameter int unsigned WCW       = $clog2(WORDS + 1),
  parameter int unsigned NSLOT     = MAX_RANKS + 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // parser side
  input  logic                  wr_en,
  input  logic [3:0]            wr_slot,
  input  logic [AW-1:0]         wr_addr,
  input  logic [63:0]           wr_data,
  input  logic                  ev_valid,
  input  msg_e                  ev_kind,
  input  logic [7:0]            ev_sender,
  input  logic [2:0]            ev_level,
  input  scan_hdr_t             ev_hdr,
  input  logic [2:0]            ev_port,
  output logic [NSLOT-1:0]      slot_full,
  // generator side
  output logic                  t_req,
  output tx_kind_e              t_kind,
  output logic [MAX_RANKS-1:0]  t_mask,
  output logic [7:0]            t_tag,
  output logic [WCW-1:0]        t_words,
  input  logic                  t_idle,
  output logic [63:0]           pl_data,
  output logic                  pl_valid,
  input  logic                  pl_ready,
  output scan_hdr_t             host_hdr,
  output logic [2:0]            host_port,
  output logic [7:0]            my_rank,
  // status
  output logic                  mark_offload,
  output logic                  done,
  output logic [3:0]            mech
);
  localparam int unsigned SA = MAX_RANKS + 1;
  localparam int unsigned SR = MAX_RANKS + 2;

  logic           p_start, p_wa, p_wr, p_tx, p_sel_a, p_busy;
  src_t           p_sa, p_sb, p_sc, p_sd;
  logic [AW-1:0]  raddr, pwaddr;
  logic           a_we, r_we;
  logic [63:0]    a_wdata, r_wdata;
  logic [63:0]    rdata [NSLOT];

  for (genvar s = 0; s < NSLOT; s++) begin : g_slot
    logic          we;
    logic [AW-1:0] wa;
    logic [63:0]   wd;
    if (s == SA) begin : g_a
      assign we = a_we;  assign wa = pwaddr;  assign wd = a_wdata;
    end else if (s == SR) begin : g_r
      assign we = r_we;  assign wa = pwaddr;  assign wd = r_wdata;
    end else begin : g_in
      assign we = wr_en && (wr_slot == 4'(s));
      assign wa = wr_addr;
      assign wd = wr_data;
    end
    scan_buf #(.WORDS(WORDS)) u_buf (
      .clk, .we, .waddr(wa), .wdata(wd), .raddr, .rdata(rdata[s])
    );
  end

  scan_pass #(.NSLOT(NSLOT), .WORDS(WORDS)) u_pass (
    .clk, .rst_n, .start(p_start),
    .sa(p_sa), .sb(p_sb), .sc(p_sc), .sd(p_sd),
    .wa(p_wa), .wr(p_wr), .tx(p_tx), .tx_sel_a(p_sel_a),
    .nwords(t_words), .busy(p_busy),
    .raddr, .rdata,
    .a_we, .r_we, .waddr(pwaddr), .a_wdata, .r_wdata,
    .pl_data, .pl_valid, .pl_ready
  );

  scan_ctrl #(.MAX_RANKS(MAX_RANKS), .WORDS(WORDS)) u_ctrl (
    .clk, .rst_n,
    .ev_valid, .ev_kind, .ev_sender, .ev_level, .ev_hdr, .ev_port,
    .slot_full,
    .p_start, .p_sa, .p_sb, .p_sc, .p_sd, .p_wa, .p_wr, .p_tx, .p_sel_a,
    .p_nwords(t_words), .p_busy,
    .t_req, .t_kind, .t_mask, .t_tag, .t_idle,
    .host_hdr, .host_port, .my_rank,
    .mark_offload, .done, .mech
  );
endmodule
