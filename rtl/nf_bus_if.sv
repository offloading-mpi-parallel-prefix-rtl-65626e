// nf_bus_if: one NetFPGA user-data-path stream.
//
// 64-bit data with an 8-bit ctrl word beside it: ctrl = 8'hFF marks the
// I/O-queue module header that leads a packet, ctrl = 0 marks the words
// inside the packet, and a non-zero ctrl on a later word marks the last word
// (one bit, giving the position of its last valid byte: 8'h01 means all
// eight bytes valid). A word moves on a clock edge where wr and rdy are both
// high; the sender holds data, ctrl and wr until it has moved.
interface nf_bus_if;
  logic [63:0] data;
  logic [7:0]  ctrl;
  logic        wr;
  logic        rdy;

  modport src (output data, ctrl, wr, input  rdy);
  modport dst (input  data, ctrl, wr, output rdy);
endinterface
