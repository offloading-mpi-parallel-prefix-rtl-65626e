// scan_alu: the streaming MPI_SUM datapath.
//
// Works on one 64-bit word, two 32-bit MPI_INT lanes (bits 63:32 hold the
// element that comes first on the wire). For each lane it forms
//   diff = b - c,  v1 = a + diff,  v2 = d + diff
// in a single combinational step, so a pass over a message runs at one word
// per clock. With c = 0 this is the plain element-wise sum the algorithms
// need (v1 = a + b, and v2 = d + b for the recursive-doubling result
// buffer). With c equal to the node's cached partial, it strips that
// partial out of a tagged cumulative message, the subtraction of the
// optimised recursive doubling; as in the paper it costs no extra cycle.
// Only MPI_INT with MPI_SUM is built, the combination the paper uses;
// arithmetic wraps modulo 2^32.
module scan_alu (
  input  logic [63:0] a,
  input  logic [63:0] b,
  input  logic [63:0] c,
  input  logic [63:0] d,
  output logic [63:0] v1,
  output logic [63:0] v2
);
  always_comb begin
    for (int l = 0; l < 2; l++) begin
      logic [31:0] diff;
      diff            = b[32*l +: 32] - c[32*l +: 32];
      v1[32*l +: 32]  = a[32*l +: 32] + diff;
      v2[32*l +: 32]  = d[32*l +: 32] + diff;
    end
  end
endmodule
