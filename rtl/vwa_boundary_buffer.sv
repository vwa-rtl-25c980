// vwa_boundary_buffer -- global boundary data SRAM.
//
// Holds, for every output channel and output column, the two bottom-row
// partial sums of the current tile until the next tile (the one below)
// adds them to its two top rows. Default size: 14336 words of 2x16 bits
// (56 KB), which is 64 output channels x 224 columns.
//
// Interface: one write port and one read port. Timing: the read is
// registered (rdata valid the cycle after re); a write is visible to reads
// issued in later cycles. The capacity follows the paper; the port
// arrangement and read latency are this design's choices (an SRAM macro in
// silicon, an array here).
module vwa_boundary_buffer
  import vwa_pkg::*;
#(
  parameter int DEPTH = 14336,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output data_t         rdata [2],
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  data_t         wdata [2]
);
  logic [2*DW-1:0] mem [DEPTH];
  logic [2*DW-1:0] q;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= {wdata[1], wdata[0]};
    if (re) q <= mem[raddr];
  end

  assign rdata[0] = data_t'(q[DW-1:0]);
  assign rdata[1] = data_t'(q[2*DW-1:DW]);
endmodule
