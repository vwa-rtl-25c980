// vwa_input_buffer -- multi-bank input feature-map SRAM.
//
// NBANK banks (24: three per PE block), each DEPTH words of one 7x16-bit
// input column (default 301 words, the largest count that fits the
// 4.125 KB bank). The data bus writes one word of one bank per cycle; the
// PE array reads the same address from all banks at once, so the data
// layout decides which channel and column each bank supplies.
//
// Timing: registered read, rd_data valid the cycle after rd_en (it holds
// its value otherwise). Bank count and word width follow the paper; the
// common read address and the read latency are this design's choices.
module vwa_input_buffer
  import vwa_pkg::*;
#(
  parameter int NBK   = NBANK,
  parameter int DEPTH = 301,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic                   clk,
  input  logic                   wr_en,
  input  logic [$clog2(NBK)-1:0] wr_bank,
  input  logic [AW-1:0]          wr_addr,
  input  data_t                  wr_data [ROWS],
  input  logic                   rd_en,
  input  logic [AW-1:0]          rd_addr,
  output data_t                  rd_data [NBK][ROWS]
);
  for (genvar b = 0; b < NBK; b++) begin : g_bank
    logic [ROWS*DW-1:0] mem [DEPTH];
    logic [ROWS*DW-1:0] q;
    logic [ROWS*DW-1:0] wd;
    always_comb
      for (int r = 0; r < ROWS; r++) wd[r*DW +: DW] = wr_data[r];
    always_ff @(posedge clk) begin
      if (wr_en && wr_bank == b) mem[wr_addr] <= wd;
      if (rd_en) q <= mem[rd_addr];
    end
    always_comb
      for (int r = 0; r < ROWS; r++) rd_data[b][r] = data_t'(q[r*DW +: DW]);
  end
endmodule
