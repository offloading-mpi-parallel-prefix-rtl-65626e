// scan_out_arb: output merge of the offload engine.
//
// The engine has two packet sources, the forwarded packets of the
// reference-NIC path (port 0) and the packets it generates itself
// (port 1), and the user data path has one output. The merge grants one
// source a whole packet at a time, from its I/O-queue header word to the
// first later word with a non-zero ctrl, and alternates the grant when
// both wait (round robin), so neither path can starve the other.
// Timing: no added latency; the granted source sees out_rdy directly.
// The paper does not describe this part; it is the simplest merge that
// keeps packets whole. Assertions check the bus rule that a source holds
// its word while not ready; they are disabled in reset, which makes lint
// see rst_n used both asynchronously and as a synchronous condition
// (SYNCASYNCNET). Only the assertions read it that way, so it stands.
module scan_out_arb (
  input  logic   clk,
  input  logic   rst_n,
  nf_bus_if.dst  in0,
  nf_bus_if.dst  in1,
  output logic [63:0] out_data,
  output logic [7:0]  out_ctrl,
  output logic        out_wr,
  input  logic        out_rdy
);
  logic busy;      // a packet is in progress
  logic sel;       // granted source
  logic last_sel;  // source granted last
  logic first;     // next word of the granted source is its header word
  logic pick;

  always_comb begin
    // choose at a packet boundary: prefer the source not served last
    if (in0.wr && in1.wr) pick = !last_sel;
    else                  pick = in1.wr;
  end

  logic cur;
  assign cur = busy ? sel : pick;

  always_comb begin
    out_data = cur ? in1.data : in0.data;
    out_ctrl = cur ? in1.ctrl : in0.ctrl;
    out_wr   = cur ? in1.wr   : in0.wr;
    in0.rdy  = out_rdy && !cur;
    in1.rdy  = out_rdy &&  cur;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      sel      <= 1'b0;
      last_sel <= 1'b1;
      first    <= 1'b1;
    end else if (out_wr && out_rdy) begin
      if (!busy) begin
        busy     <= 1'b1;
        sel      <= pick;
        last_sel <= pick;
        first    <= 1'b0;
      end else if (!first && out_ctrl != 8'h00) begin
        busy  <= 1'b0;
        first <= 1'b1;
      end
    end
  end

  // A source that offers a word keeps offering it until it is taken.
  property p_hold(logic wr, logic rdy, logic [63:0] data);
    @(posedge clk) disable iff (!rst_n) (wr && !rdy) |=> (wr && $stable(data));
  endproperty
  a_hold0: assert property (p_hold(in0.wr, in0.rdy, in0.data));
  a_hold1: assert property (p_hold(in1.wr, in1.rdy, in1.data));
endmodule
