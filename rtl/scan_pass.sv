// scan_pass: streaming pass engine of the offload engine.
//
// A pass walks the words of a message, 0 to nwords-1, reading the same
// word of every message slot at once. Up to four operands are chosen from
// the slots (or the constant zero) and combined by scan_alu into
// v1 = a + (b - c) and v2 = d + (b - c). v1 may be written back to the
// accumulator slot A and v2 to the result slot R, and either v1 or the
// operand a may be streamed to the packet generator as payload. All the
// controller's arithmetic on messages is done by such passes; as the paper
// requires, they run at line rate, one word per clock, and stall only when
// the packet generator cannot take the payload word.
// Interface: start (one cycle, with the descriptor) while idle; busy until
// the last word is done. Slot reads are asynchronous, so the read, the
// arithmetic and the write-back of a word happen in the same clock.
module scan_pass
  import nf_scan_pkg::*;
#(
  parameter int unsigned NSLOT = 11,
  parameter int unsigned WORDS = 128,
  parameter int unsigned AW    = $clog2(WORDS),
  parameter int unsigned WCW   = $clog2(WORDS + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  src_t           sa, sb, sc, sd,
  input  logic           wa,       // write v1 to slot A
  input  logic           wr,       // write v2 to slot R
  input  logic           tx,       // stream payload to the generator
  input  logic           tx_sel_a, // payload is operand a (else v1)
  input  logic [WCW-1:0] nwords,
  output logic           busy,
  // slot read port (all slots, same address)
  output logic [AW-1:0]  raddr,
  input  logic [63:0]    rdata [NSLOT],
  // slot A and R writes
  output logic           a_we,
  output logic           r_we,
  output logic [AW-1:0]  waddr,
  output logic [63:0]    a_wdata,
  output logic [63:0]    r_wdata,
  // payload stream
  output logic [63:0]    pl_data,
  output logic           pl_valid,
  input  logic           pl_ready
);
  src_t           qa, qb, qc, qd;
  logic           qwa, qwr, qtx, qsel;
  logic [WCW-1:0] n, w;
  logic [63:0]    va, vb, vc, vd, v1, v2;
  logic           adv;

  function automatic logic [63:0] pick(input src_t s, input logic [63:0] d [NSLOT]);
    return s.zero ? 64'd0 : d[s.slot];
  endfunction

  always_comb begin
    va = pick(qa, rdata);
    vb = pick(qb, rdata);
    vc = pick(qc, rdata);
    vd = pick(qd, rdata);
  end

  scan_alu u_alu (.a(va), .b(vb), .c(vc), .d(vd), .v1(v1), .v2(v2));

  assign raddr    = AW'(w);
  assign waddr    = AW'(w);
  assign adv      = busy && (!qtx || pl_ready);
  assign a_we     = adv && qwa;
  assign r_we     = adv && qwr;
  assign a_wdata  = v1;
  assign r_wdata  = v2;
  assign pl_valid = busy && qtx;
  assign pl_data  = qsel ? va : v1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      w    <= '0;
      n    <= '0;
      qa   <= '0; qb <= '0; qc <= '0; qd <= '0;
      qwa  <= 1'b0; qwr <= 1'b0; qtx <= 1'b0; qsel <= 1'b0;
    end else if (start && !busy) begin
      qa <= sa; qb <= sb; qc <= sc; qd <= sd;
      qwa <= wa; qwr <= wr; qtx <= tx; qsel <= tx_sel_a;
      n    <= nwords;
      w    <= '0;
      busy <= (nwords != '0);
    end else if (adv) begin
      w <= w + WCW'(1);
      if (w == n - WCW'(1)) busy <= 1'b0;
    end
  end
endmodule
