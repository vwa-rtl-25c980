// vwa_weight_buffer -- ping-pong weight SRAM.
//
// Two sets of NBLK banks (one bank per PE block), each DEPTH words of one
// 3x16-bit weight column (default 384 words = 2.25 KB; 2 x 8 x 2.25 KB =
// 36 KB). The data bus fills one set while the PE array reads the other;
// rd_set picks the set being read. All banks of the set are read at the
// same address.
//
// Timing: registered read, rd_data valid the cycle after rd_en. Bank count,
// word width and the ping-pong organisation follow the paper; the explicit
// set select and the read latency are this design's choices.
module vwa_weight_buffer
  import vwa_pkg::*;
#(
  parameter int NBLK  = NB,
  parameter int DEPTH = 384,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic                    wr_set,
  input  logic [$clog2(NBLK)-1:0] wr_bank,
  input  logic [AW-1:0]           wr_addr,
  input  data_t                   wr_data [COLS],
  input  logic                    rd_en,
  input  logic                    rd_set,
  input  logic [AW-1:0]           rd_addr,
  output data_t                   rd_data [NBLK][COLS]
);
  for (genvar s = 0; s < 2; s++) begin : g_set
    for (genvar b = 0; b < NBLK; b++) begin : g_bank
      logic [COLS*DW-1:0] mem [DEPTH];
      logic [COLS*DW-1:0] q;
      logic [COLS*DW-1:0] wd;
      always_comb
        for (int c = 0; c < COLS; c++) wd[c*DW +: DW] = wr_data[c];
      always_ff @(posedge clk) begin
        if (wr_en && wr_set == s && wr_bank == b) mem[wr_addr] <= wd;
        if (rd_en && rd_set == s) q <= mem[rd_addr];
      end
    end
  end
  logic [COLS*DW-1:0] q_sel [NBLK];
  logic rd_set_q;
  always_ff @(posedge clk) if (rd_en) rd_set_q <= rd_set;
  for (genvar b = 0; b < NBLK; b++) begin : g_out
    assign q_sel[b] = rd_set_q ? g_set[1].g_bank[b].q : g_set[0].g_bank[b].q;
    for (genvar c = 0; c < COLS; c++) begin : g_c
      assign rd_data[b][c] = data_t'(q_sel[b][c*DW +: DW]);
    end
  end
endmodule
