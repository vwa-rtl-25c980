// vwa_postproc -- post processing: batch normalization, ReLU, pooling.
//
// Each valid input vector of LANES values (one output column of one output
// channel) is scaled and shifted, y = sat16(((x * scale) >>> FRAC) + shift),
// optionally clipped at zero (ReLU), and optionally max-pooled with the
// previous vector: with pool_en, the first vector of each pair is held and
// the element-wise maximum of the pair is emitted with the second one.
// `in_first` marks a vector that opens a new pair (the top drives it with
// even output columns, so pairs never straddle two channels and an odd last
// column is dropped, i.e. floor pooling); `clear` restarts the pairing at
// the start of a layer. The tag input
// (channel / column) is carried to the output.
//
// Timing: out_valid one cycle after the in_valid that completes an output.
// The paper names the three functions; the order (BN, ReLU, pool), the
// Q8 scale format and the two-column pooling window are this design's
// choices.
module vwa_postproc
  import vwa_pkg::*;
#(
  parameter int LANES = 7,
  parameter int F     = FRAC,
  parameter int TW    = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_first,
  input  logic          in_valid,
  input  data_t         in  [LANES],
  input  logic [TW-1:0] in_tag,
  input  data_t         scale,
  input  data_t         shift,
  input  logic          relu_en,
  input  logic          pool_en,
  output logic          out_valid,
  output data_t         out [LANES],
  output logic [TW-1:0] out_tag
);
  localparam logic signed [2*DW-1:0] MAXV = (2*DW)'(2**(DW-1) - 1);
  localparam logic signed [2*DW-1:0] MINV = -(2*DW)'(2**(DW-1));
  data_t y    [LANES];
  data_t held [LANES];
  logic  phase;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic signed [2*DW-1:0] t;
      t = (in[i] * scale) >>> F;
      t = t + (2*DW)'(shift);
      if (t > MAXV)      t = MAXV;
      else if (t < MINV) t = MINV;
      y[i] = data_t'(t);
      if (relu_en && y[i] < 0) y[i] = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= 1'b0;
      out_valid <= 1'b0;
      out_tag   <= '0;
      for (int i = 0; i < LANES; i++) begin out[i] <= '0; held[i] <= '0; end
    end else begin
      out_valid <= 1'b0;
      if (clear) phase <= 1'b0;
      else if (in_valid) begin
        if (pool_en && (!phase || in_first)) begin
          held  <= y;
          phase <= 1'b1;
        end else begin
          for (int i = 0; i < LANES; i++)
            out[i] <= (pool_en && held[i] > y[i]) ? held[i] : y[i];
          out_valid <= 1'b1;
          out_tag   <= in_tag;
          phase     <= 1'b0;
        end
      end
    end
  end
endmodule
