// vwa_controller -- system controller: the vectorwise schedule.
//
// After `start` the controller walks one layer tile, described by `cfg`,
// and each cycle issues one read of the input and weight buffers together
// with a control bundle (vwa_ctl_t) that travels down the pipeline with the
// data and tells the PE blocks and the three accumulator stages what to do.
//
// 3x3 layers (LAYER_CONV3): output columns are taken in strips of up to
// four. For each output channel f, strip and channel group g, input column
// x is read once and combined with weight columns wa, wb, wc in turn, as
// long as x - wcol lies in the strip: for a 4-wide strip the input order is
// a, b,b, c,c,c, d,d,d, e,e, f (12 cycles, every MAC busy). Stage 1 sums
// the three weight columns of an output column, stage 2 the eight blocks,
// stage 3 the groups, and after the last group stage 3 merges the tile
// boundary.
// Depthwise layers (LAYER_DW3): same sequence per group of eight channels,
// but the stage-1 sums are the results (one channel per block).
// 1x1 layers (LAYER_CONV1): one cycle per channel group of 24 (3 per
// block) and pixel column; stage 1 sums the groups, stage 2 the blocks,
// stage 3 is skipped.
//
// Memory layout it assumes: for 3x3 and depthwise layers column x of
// channel group g is in bank 3b + (x mod 3) of each block b, at address
// g*ceil(w_in/3) + x/3 (ctl.bsel names the bank), so a block's three banks
// hold three times the columns one bank could; for 1x1 layers address
// g*w_in + x of every bank; weight buffer address
// (f*groups + g)*3 + wcol (3x3), g*3 + wcol (depthwise) or f*groups + g
// (1x1). Boundary buffer address f*(w_in-2) + column.
//
// Timing: the read addresses and ctl are outputs of the cycle the read is
// issued; `done` pulses in the cycle after the last read. The column order
// within a strip follows the paper's schedule; strips, loop nesting and the
// memory layout are this design's choices.
module vwa_controller
  import vwa_pkg::*;
#(
  parameter int IN_AW = 9,
  parameter int W_AW  = 9,
  parameter int STRIP = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  vwa_cfg_t         cfg,
  output logic             busy,
  output logic             done,
  output logic             in_rd_en,
  output logic [IN_AW-1:0] in_rd_addr,
  output logic             w_rd_en,
  output logic [W_AW-1:0]  w_rd_addr,
  output vwa_ctl_t         ctl
);
  vwa_cfg_t   c;
  logic       run;
  logic [6:0] f, g;
  logic [8:0] x0;
  logic [2:0] xi;
  logic [1:0] wc;
  logic [8:0] w_out;
  logic [2:0] sw;          // width of the current strip
  logic [1:0] wc_max;
  logic [2:0] oc;          // output column within the strip
  logic       seq_end, last_step;

  assign w_out  = c.w_in - 9'd2;
  assign sw     = (w_out - x0 >= 9'(STRIP)) ? 3'(STRIP) : 3'(w_out - x0);
  assign wc_max = (xi >= 3'd2) ? 2'd2 : xi[1:0];
  assign oc     = xi - 3'(wc);
  assign seq_end = (c.layer == LAYER_CONV1) ? 1'b1 : (wc == wc_max && xi == sw + 3'd1);

  always_comb begin
    last_step = 1'b0;
    if (seq_end) begin
      unique case (c.layer)
        LAYER_CONV3: last_step = (g == c.groups - 7'd1) && (x0 + 9'(STRIP) >= w_out) && (f == c.filters - 7'd1);
        LAYER_DW3:   last_step = (x0 + 9'(STRIP) >= w_out) && (g == c.groups - 7'd1);
        default:     last_step = (g == c.groups - 7'd1) && (x0 == c.w_in - 9'd1) && (f == c.filters - 7'd1);
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; done <= 1'b0; c <= '0;
      f <= '0; g <= '0; x0 <= '0; xi <= '0; wc <= '0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          run <= 1'b1; c <= cfg;
          f <= '0; g <= '0; x0 <= '0; xi <= '0; wc <= '0;
        end
      end else if (last_step) begin
        run  <= 1'b0;
        done <= 1'b1;
      end else if (c.layer == LAYER_CONV1) begin
        if (g != c.groups - 7'd1) g <= g + 7'd1;
        else begin
          g <= '0;
          if (x0 != c.w_in - 9'd1) x0 <= x0 + 9'd1;
          else begin x0 <= '0; f <= f + 7'd1; end
        end
      end else if (!seq_end) begin
        if (wc != wc_max) wc <= wc + 2'd1;
        else begin
          xi <= xi + 3'd1;
          // first weight column that still lands inside the strip
          wc <= (xi + 3'd1 >= sw) ? 2'(xi + 3'd2 - sw) : 2'd0;
        end
      end else begin
        xi <= '0; wc <= '0;
        if (c.layer == LAYER_CONV3) begin
          if (g != c.groups - 7'd1) g <= g + 7'd1;
          else begin
            g <= '0;
            if (x0 + 9'(STRIP) < w_out) x0 <= x0 + 9'(STRIP);
            else begin x0 <= '0; f <= f + 7'd1; end
          end
        end else begin  // depthwise: strips inside groups
          if (x0 + 9'(STRIP) < w_out) x0 <= x0 + 9'(STRIP);
          else begin x0 <= '0; g <= g + 7'd1; end
        end
      end
    end
  end

  assign busy     = run;
  assign in_rd_en = run;
  assign w_rd_en  = run;

  always_comb begin
    logic [15:0] ia, wa, ba;
    logic [8:0]  xa, wq;
    ctl = '0;
    xa  = '0;
    wq  = '0;
    ctl.valid = run;
    ctl.ch    = (c.layer == LAYER_DW3) ? g : f;
    if (c.layer == LAYER_CONV1) begin
      ia = 16'(g) * 16'(c.w_in) + 16'(x0);
      wa = 16'(f) * 16'(c.groups) + 16'(g);
      ba = '0;
      ctl.pe_mode   = PE_HORIZ_ELEM;
      ctl.s1_slot   = '0;
      ctl.s1_first  = (g == 0);
      ctl.s1_last   = (g == c.groups - 7'd1);
      ctl.s3_bypass = 1'b1;
      ctl.col       = x0;
    end else begin
      // column xa lives in bank 3b + xa mod 3 at word g*ceil(w_in/3) + xa/3
      xa = x0 + 9'(xi);
      wq = (c.w_in + 9'd2) / 9'd3;
      ia = 16'(g) * 16'(wq) + 16'(xa / 9'd3);
      ctl.bsel = 2'(xa % 9'd3);
      wa = (c.layer == LAYER_DW3) ? 16'(g) * 16'd3 + 16'(wc)
                                  : (16'(f) * 16'(c.groups) + 16'(g)) * 16'd3 + 16'(wc);
      ba = 16'(f) * 16'(w_out) + 16'(x0) + 16'(oc);
      ctl.pe_mode  = PE_DIAG_BANK0;
      ctl.s1_slot  = oc;
      ctl.s1_first = (wc == 2'd0);
      ctl.s1_last  = (wc == 2'd2);
      ctl.s3_slot  = oc[1:0];
      ctl.s3_first = (g == 0);
      ctl.s3_last  = (g == c.groups - 7'd1);
      ctl.dw       = (c.layer == LAYER_DW3);
      ctl.use_bnd  = !c.first_tile;
      ctl.col      = x0 + 9'(oc);
    end
    in_rd_addr   = ia[IN_AW-1:0];
    w_rd_addr    = wa[W_AW-1:0];
    ctl.bnd_addr = ba[13:0];
  end
endmodule
