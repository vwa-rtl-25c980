// vwa_acc_stage3 -- stage 3 of the accumulator: channel accumulation and
// tile-boundary merge.
//
// The block sum of stage 2 covers one channel group. Inputs of more than
// one group are summed here per output column in DEPTH entries (one per
// column of the strip being computed). When the last group of a column has
// been added, the column's 9 values are finished for this tile:
//   * rows o0,o1 are the lower two rows of the output rows the tile above
//     left unfinished; its stored partial sums are read from the boundary
//     buffer and added (unless this is the first tile),
//   * rows o7,o8 are written to the boundary buffer for the tile below,
//   * rows o0..o6 are sent on (7 values) to post processing.
// In 1x1 layers (bypass) stage 3 is skipped: the stage-2 vector's rows
// 0..6 go straight out and the boundary buffer is untouched.
//
// Timing: step A (cycle of in_valid) adds and stores the entry and issues
// the boundary read; step B (next cycle) adds the boundary data, writes
// o7/o8 and registers the output, so out_valid follows in_valid by 2.
// The entry buffer, the boundary mux and the 2x16 / 7x16 widths follow
// the paper; the split into two steps and the control fields are this
// design's choices.
module vwa_acc_stage3
  import vwa_pkg::*;
#(
  parameter int DEPTH = 4,
  parameter int AW    = 14
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  data_t         in  [9],
  input  vwa_ctl_t      ctl,
  output logic          bnd_re,
  output logic [AW-1:0] bnd_raddr,
  input  data_t         bnd_rdata [2],
  output logic          bnd_we,
  output logic [AW-1:0] bnd_waddr,
  output data_t         bnd_wdata [2],
  output logic          out_valid,
  output data_t         out [7],
  output logic [6:0]    out_ch,
  output logic [8:0]    out_col
);
  data_t    ent [DEPTH][9];
  data_t    sum [9];
  data_t    a_q [9];
  logic     a_v;
  vwa_ctl_t a_ctl;
  logic [$clog2(DEPTH)-1:0] sl;

  assign sl = ctl.s3_slot[$clog2(DEPTH)-1:0];

  always_comb
    for (int i = 0; i < 9; i++)
      sum[i] = (ctl.s3_first || ctl.s3_bypass) ? in[i] : data_t'(ent[sl][i] + in[i]);

  // step A
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_v   <= 1'b0;
      a_ctl <= '0;
      for (int i = 0; i < 9; i++) a_q[i] <= '0;
      for (int d = 0; d < DEPTH; d++)
        for (int i = 0; i < 9; i++) ent[d][i] <= '0;
    end else begin
      a_v <= in_valid && (ctl.s3_last || ctl.s3_bypass);
      if (in_valid) begin
        if (!ctl.s3_bypass) ent[sl] <= sum;
        a_q   <= sum;
        a_ctl <= ctl;
      end
    end
  end

  assign bnd_re    = in_valid && ctl.s3_last && !ctl.s3_bypass && ctl.use_bnd;
  assign bnd_raddr = ctl.bnd_addr[AW-1:0];

  // step B
  assign bnd_we       = a_v && !a_ctl.s3_bypass;
  assign bnd_waddr    = a_ctl.bnd_addr[AW-1:0];
  assign bnd_wdata[0] = a_q[7];
  assign bnd_wdata[1] = a_q[8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ch    <= '0;
      out_col   <= '0;
      for (int i = 0; i < 7; i++) out[i] <= '0;
    end else begin
      out_valid <= a_v;
      if (a_v) begin
        logic add;
        add = a_ctl.use_bnd && !a_ctl.s3_bypass;
        out[0] <= add ? data_t'(a_q[0] + bnd_rdata[0]) : a_q[0];
        out[1] <= add ? data_t'(a_q[1] + bnd_rdata[1]) : a_q[1];
        for (int i = 2; i < 7; i++) out[i] <= a_q[i];
        out_ch  <= a_ctl.ch;
        out_col <= a_ctl.col;
      end
    end
  end
endmodule
