// scan_buf: one message slot of the offload engine.
//
// A slot holds the payload of one MPI_Scan message, WORDS 64-bit words of
// two MPI_INT elements each; the default of 128 words is the 1024-byte
// largest message the paper evaluates. The engine keeps one slot for the
// host's own data, one per peer rank (the single outstanding-packet buffer
// of the sequential algorithm and the child caches of the binomial tree),
// and two working slots. Writes are synchronous; the read port is
// asynchronous (distributed RAM), which lets the pass engine read, combine
// and write back a word in one cycle. The asynchronous read is this
// design's choice; the paper only says the buffers are preallocated.
module scan_buf #(
  parameter int unsigned WORDS = 128,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [63:0]   wdata,
  input  logic [AW-1:0] raddr,
  output logic [63:0]   rdata
);
  logic [63:0] mem [WORDS];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  assign rdata = mem[raddr];
endmodule
