// vwa_acc_tree -- stage 2 of the accumulator: the block adder.
//
// Sums the N-element vectors of the NB stage-1 accumulators, i.e. the
// contributions of the NB input channels of one channel group (or, in 1x1
// layers, of NB x 3 channels), with a balanced binary adder tree, and
// registers the result.
//
// Timing: one cycle from in to out; in_valid is carried to out_valid.
// The tree adder follows the paper; its balanced shape and the single
// output register are this design's choices. Sums wrap in 16 bits.
module vwa_acc_tree
  import vwa_pkg::*;
#(
  parameter int NBLK = NB,
  parameter int N    = 9
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  data_t in  [NBLK][N],
  output logic  out_valid,
  output data_t out [N]
);
  localparam int L = $clog2(NBLK);
  localparam int P = 1 << L;
  data_t lvl [L+1][P][N];
  data_t sum [N];

  always_comb begin
    for (int b = 0; b < P; b++)
      for (int i = 0; i < N; i++)
        lvl[0][b][i] = (b < NBLK) ? in[b][i] : '0;
    for (int l = 1; l <= L; l++)
      for (int b = 0; b < P; b++)
        for (int i = 0; i < N; i++)
          lvl[l][b][i] = (b < (P >> l)) ? data_t'(lvl[l-1][2*b][i] + lvl[l-1][2*b+1][i]) : '0;
    for (int i = 0; i < N; i++) sum[i] = lvl[L][0][i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < N; i++) out[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out <= sum;
    end
  end
endmodule
