// scan_timer: collective latency timer.
//
// As in the paper, a 64-bit counter starts at zero after reset (the design
// being loaded) and counts every rising clock edge; at the NetFPGA's 125 MHz
// one count is 8 ns. Two 64-bit timestamp registers capture the counter
// when the offload request arrives from the local host (mark_offload) and
// when the final outcome is released to the host (mark_release). elapsed
// is release minus offload; it is what the result packet carries.
// Interface: single-cycle strobes in, registered values out. If both
// strobes come in the same cycle both registers take the same count.
module scan_timer (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        mark_offload,
  input  logic        mark_release,
  output logic [63:0] now,
  output logic [63:0] offload_ts,
  output logic [63:0] release_ts,
  output logic [63:0] elapsed
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now        <= '0;
      offload_ts <= '0;
      release_ts <= '0;
    end else begin
      now <= now + 64'd1;
      if (mark_offload) offload_ts <= now;
      if (mark_release) release_ts <= now;
    end
  end

  assign elapsed = release_ts - offload_ts;
endmodule
