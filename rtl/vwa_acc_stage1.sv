// vwa_acc_stage1 -- stage 1 of the accumulator: partial accumulation of one
// PE block's outputs.
//
// A PE block delivers, each cycle, the 9 partial sums of one weight column
// applied to one input column. An output column needs K such contributions
// that arrive in non-consecutive cycles (the reuse-friendly order of the
// vectorwise schedule), so several output columns are in flight at once.
// This stage keeps DEPTH partial-sum entries of N values; the controller's
// slot number picks the entry, `first` starts a new sum and `last` sends the
// finished sum on. In 1x1 layers the same mechanism sums successive channel
// groups of one pixel column.
//
// Timing: input register, then add-and-store, then output register. A sum
// whose last contribution enters in cycle t appears at out in cycle t+2.
// The input/output registers, the adder and the control-selected entries
// follow the accelerator's accumulator structure; the entry-array form
// (instead of a physical shift) and the first/last flags are this design's
// choices.
module vwa_acc_stage1
  import vwa_pkg::*;
#(
  parameter int N     = 9,
  parameter int DEPTH = 6
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  data_t in   [N],
  input  logic [$clog2(DEPTH)-1:0] slot,
  input  logic  first,
  input  logic  last,
  output logic  out_valid,
  output data_t out  [N]
);
  data_t ent  [DEPTH][N];
  data_t in_q [N];
  logic  v_q, first_q, last_q;
  logic [$clog2(DEPTH)-1:0] slot_q;
  data_t sum  [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; first_q <= 1'b0; last_q <= 1'b0; slot_q <= '0;
      for (int i = 0; i < N; i++) in_q[i] <= '0;
    end else begin
      v_q     <= in_valid;
      first_q <= first;
      last_q  <= last;
      slot_q  <= slot;
      if (in_valid) in_q <= in;
    end
  end

  always_comb
    for (int i = 0; i < N; i++)
      sum[i] = first_q ? in_q[i] : data_t'(ent[slot_q][i] + in_q[i]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < N; i++) out[i] <= '0;
      for (int d = 0; d < DEPTH; d++)
        for (int i = 0; i < N; i++) ent[d][i] <= '0;
    end else begin
      out_valid <= v_q && last_q;
      if (v_q) begin
        ent[slot_q] <= sum;
        if (last_q) out <= sum;
      end
    end
  end
endmodule
