// vwa_top -- convolution core of the vectorwise CNN accelerator.
//
// Eight PE blocks of 7x3 MACs read one 7-value input column per input bank
// and one 3-value weight column per block each cycle. The three-stage
// accumulator sums (1) the weight columns of an output column inside each
// block, (2) the eight blocks, i.e. eight input channels, and (3) the
// channel groups, merging the rows at the tile border with partial sums
// kept in the boundary buffer. Post processing (BN, ReLU, pooling) follows.
// Depthwise layers take the stage-1 sums of each block directly to a
// per-block post processor.
//
// Interface:
//   data bus  bus_we/bus_target/bus_set/bus_bank/bus_addr/bus_wdata: one
//             word per cycle into the input buffer (7 values), a weight
//             buffer set (3 values) or the BN table (value 0 = scale Q8,
//             value 1 = shift; address = channel).
//   command   start with cfg (layer configuration); busy stays high until
//             the last result has left, done pulses then.
//   results   out_valid/out_data (7 rows of one output column, rows
//             7t-2 .. 7t+4 of tile t) with out_ch/out_col;
//             dw_valid/dw_data (9 values per block) with dw_grp/dw_col.
// For 3x3 and depthwise layers the input columns are spread over each
// block's three banks (column x in bank 3b + x mod 3); the top rotates the
// three bank outputs by ctl.bsel so PE mux input 0 sees the column read.
// Pipeline: read issued at c0, buffer data and PE array at c1, stage 1
// result at c3, stage 2 at c4, stage 3 at c6, post processing at c7.
//
// The block structure follows the paper. This core sequences 3x3 unit
// stride, depthwise 3x3 and 1x1 layers; the PE blocks also implement the
// stride-2 interleaved mode and the two-block cascade of the 14-row
// configuration, which this controller does not issue (pe_cascade is tied
// off: the cascade input of each odd block is wired to the even block
// above, enabled by nothing yet).
module vwa_top
  import vwa_pkg::*;
#(
  parameter int IN_DEPTH  = 301,
  parameter int W_DEPTH   = 384,
  parameter int BND_DEPTH = 14336,
  parameter int BN_DEPTH  = 128
) (
  input  logic       clk,
  input  logic       rst_n,
  // data bus
  input  logic       bus_we,
  input  logic [1:0] bus_target,   // 0 input, 1 weight, 2 BN table
  input  logic       bus_set,
  input  logic [4:0] bus_bank,
  input  logic [8:0] bus_addr,
  input  data_t      bus_wdata [ROWS],
  // command
  input  logic       start,
  input  vwa_cfg_t   cfg,
  output logic       busy,
  output logic       done,
  // results
  output logic       out_valid,
  output data_t      out_data [ROWS],
  output logic [6:0] out_ch,
  output logic [8:0] out_col,
  output logic       dw_valid,
  output data_t      dw_data [NB][ROWS+2],
  output logic [6:0] dw_grp,
  output logic [8:0] dw_col
);
  localparam int IN_AW = $clog2(IN_DEPTH);
  localparam int W_AW  = $clog2(W_DEPTH);

  // ---------------- controller ----------------
  logic             c_busy, c_done, in_re, w_re;
  logic [IN_AW-1:0] in_ra;
  logic [W_AW-1:0]  w_ra;
  vwa_ctl_t         ctl0;
  vwa_cfg_t         cfg_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                cfg_q <= '0;
    else if (start && !c_busy) cfg_q <= cfg;

  vwa_controller #(.IN_AW(IN_AW), .W_AW(W_AW)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy(c_busy), .done(c_done),
    .in_rd_en(in_re), .in_rd_addr(in_ra), .w_rd_en(w_re), .w_rd_addr(w_ra), .ctl(ctl0));

  // control bundle delay line: ctl_d[k] belongs to data at cycle ck
  vwa_ctl_t ctl_d [1:4];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int k = 1; k <= 4; k++) ctl_d[k] <= '0;
    else begin
      ctl_d[1] <= ctl0;
      for (int k = 2; k <= 4; k++) ctl_d[k] <= ctl_d[k-1];
    end
  end

  // ---------------- buffers ----------------
  data_t in_q [NBANK][ROWS];
  data_t w_q  [NB][COLS];
  data_t w_wd [COLS];
  for (genvar c = 0; c < COLS; c++) begin : g_wwd
    assign w_wd[c] = bus_wdata[c];
  end

  vwa_input_buffer #(.DEPTH(IN_DEPTH)) u_inbuf (
    .clk, .wr_en(bus_we && bus_target == 2'd0), .wr_bank(bus_bank),
    .wr_addr(bus_addr[IN_AW-1:0]), .wr_data(bus_wdata),
    .rd_en(in_re), .rd_addr(in_ra), .rd_data(in_q));

  vwa_weight_buffer #(.DEPTH(W_DEPTH)) u_wbuf (
    .clk, .wr_en(bus_we && bus_target == 2'd1), .wr_set(bus_set), .wr_bank(bus_bank[2:0]),
    .wr_addr(bus_addr[W_AW-1:0]), .wr_data(w_wd),
    .rd_en(w_re), .rd_set(cfg_q.wset), .rd_addr(w_ra), .rd_data(w_q));

  // BN parameter table (part of the configuration context)
  data_t bn_scale [BN_DEPTH];
  data_t bn_shift [BN_DEPTH];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < BN_DEPTH; i++) begin
        bn_scale[i] <= data_t'(1 << FRAC);
        bn_shift[i] <= '0;
      end
    end else if (bus_we && bus_target == 2'd2) begin
      bn_scale[bus_addr[$clog2(BN_DEPTH)-1:0]] <= bus_wdata[0];
      bn_shift[bus_addr[$clog2(BN_DEPTH)-1:0]] <= bus_wdata[1];
    end
  end

  // ---------------- PE array ----------------
  data_t pe_o [NB][ROWS+2];
  logic  pe_cascade;
  assign pe_cascade = 1'b0;
  for (genvar b = 0; b < NB; b++) begin : g_pe
    data_t rows [ROWS][3];
    // mux input k of a row takes bank 3b + (k + bsel) mod 3: for 3x3 layers
    // bsel points input 0 at the bank that holds the column just read
    always_comb
      for (int r = 0; r < ROWS; r++)
        for (int k = 0; k < 3; k++)
          rows[r][k] = in_q[3*b + (k + int'(ctl_d[1].bsel)) % 3][r];
    vwa_pe_block u_pe (
      .in_rows(rows), .w(w_q[b]), .mode(ctl_d[1].pe_mode),
      .casc_en(pe_cascade && (b % 2 == 1)),
      .casc_p_in(pe_o[(b + NB - 1) % NB][ROWS+1]),
      .casc_s_in(pe_o[(b + NB - 1) % NB][ROWS]),
      .o(pe_o[b]));
  end

  // ---------------- accumulator stage 1 ----------------
  logic  s1_v [NB];
  data_t s1_o [NB][ROWS+2];
  for (genvar b = 0; b < NB; b++) begin : g_s1
    vwa_acc_stage1 #(.N(ROWS+2), .DEPTH(6)) u_s1 (
      .clk, .rst_n, .in_valid(ctl_d[1].valid), .in(pe_o[b]),
      .slot(ctl_d[1].s1_slot), .first(ctl_d[1].s1_first), .last(ctl_d[1].s1_last),
      .out_valid(s1_v[b]), .out(s1_o[b]));
  end

  // ---------------- stage 2 ----------------
  logic  s2_v;
  data_t s2_o [ROWS+2];
  vwa_acc_tree #(.NBLK(NB), .N(ROWS+2)) u_s2 (
    .clk, .rst_n, .in_valid(s1_v[0] && !ctl_d[3].dw), .in(s1_o),
    .out_valid(s2_v), .out(s2_o));

  // ---------------- stage 3 + boundary buffer ----------------
  logic        b_re, b_we;
  logic [13:0] b_ra, b_wa;
  data_t       b_rd [2];
  data_t       b_wd [2];
  logic        s3_v;
  data_t       s3_o [ROWS];
  logic [6:0]  s3_ch;
  logic [8:0]  s3_col;

  vwa_acc_stage3 #(.DEPTH(4), .AW(14)) u_s3 (
    .clk, .rst_n, .in_valid(s2_v), .in(s2_o), .ctl(ctl_d[4]),
    .bnd_re(b_re), .bnd_raddr(b_ra), .bnd_rdata(b_rd),
    .bnd_we(b_we), .bnd_waddr(b_wa), .bnd_wdata(b_wd),
    .out_valid(s3_v), .out(s3_o), .out_ch(s3_ch), .out_col(s3_col));

  vwa_boundary_buffer #(.DEPTH(BND_DEPTH), .AW(14)) u_bnd (
    .clk, .re(b_re), .raddr(b_ra), .rdata(b_rd), .we(b_we), .waddr(b_wa), .wdata(b_wd));

  // ---------------- post processing ----------------
  logic [15:0] pp_tag;
  vwa_postproc #(.LANES(ROWS), .TW(16)) u_pp (
    .clk, .rst_n, .clear(start && !c_busy), .in_first(!s3_col[0]), .in_valid(s3_v), .in(s3_o),
    .in_tag({s3_ch, s3_col}),
    .scale(bn_scale[s3_ch]), .shift(bn_shift[s3_ch]),
    .relu_en(cfg_q.relu_en), .pool_en(cfg_q.pool_en),
    .out_valid(out_valid), .out(out_data), .out_tag(pp_tag));
  assign out_ch  = pp_tag[15:9];
  assign out_col = pp_tag[8:0];

  logic        dwp_v [NB];
  logic [15:0] dwp_tag [NB];
  for (genvar b = 0; b < NB; b++) begin : g_dwpp
    logic [6:0] chn;
    assign chn = 7'(ctl_d[3].ch * 7'(NB) + 7'(b));
    vwa_postproc #(.LANES(ROWS+2), .TW(16)) u_pp_dw (
      .clk, .rst_n, .clear(start && !c_busy), .in_first(!ctl_d[3].col[0]), .in_valid(s1_v[b] && ctl_d[3].dw), .in(s1_o[b]),
      .in_tag({ctl_d[3].ch, ctl_d[3].col}),
      .scale(bn_scale[chn]), .shift(bn_shift[chn]),
      .relu_en(cfg_q.relu_en), .pool_en(cfg_q.pool_en),
      .out_valid(dwp_v[b]), .out(dw_data[b]), .out_tag(dwp_tag[b]));
  end
  assign dw_valid = dwp_v[0];
  assign dw_grp   = dwp_tag[0][15:9];
  assign dw_col   = dwp_tag[0][8:0];

  // ---------------- busy / done ----------------
  logic [7:0] inflight;
  logic       busy_q;
  always_comb begin
    inflight = {ctl_d[1].valid, ctl_d[2].valid, ctl_d[3].valid, ctl_d[4].valid,
                s2_v, s3_v, 1'b0, 1'b0};
    for (int b = 0; b < NB; b++) inflight[1] = inflight[1] | s1_v[b];
  end
  assign busy = c_busy || (inflight != '0);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) busy_q <= 1'b0;
    else        busy_q <= busy;
  assign done = busy_q && !busy;
endmodule
