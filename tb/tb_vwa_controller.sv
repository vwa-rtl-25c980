// tb_vwa_controller -- self-checking test of the system controller.
//
// For several layer configurations the testbench builds the expected read
// sequence from nested loops written from the schedule's definition:
//   3x3:       for f, strip, g: for x in strip+2 columns, for wcol 0..2
//              with 0 <= x-wcol < strip width; column x is read from
//              bank x mod 3 of the block's three at word g*ceil(w_in/3)+x/3
//   depthwise: for g, strip: same inner loops
//   1x1:       for f, x, g
// and compares every issued cycle (addresses and the control fields) with
// it, then checks the cycle count and the done pulse. For a 4-wide strip
// the 3x3 order must be the input columns a,b,b,c,c,c,d,d,d,e,e,f.
module tb_vwa_controller;
  import vwa_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  vwa_cfg_t cfg;
  logic busy, done, in_rd_en, w_rd_en;
  logic [8:0] in_rd_addr, w_rd_addr;
  vwa_ctl_t ctl;
  always #5 clk = ~clk;
  vwa_controller dut (.*);

  typedef struct packed {
    logic [8:0] ia, wa;
    logic [1:0] bsel;
    logic [2:0] s1_slot;
    logic s1_first, s1_last, s3_first, s3_last, bypass, dw;
    logic [8:0] col;
    logic [6:0] ch;
    logic [13:0] ba;
  } step_t;
  step_t exp_q [4096];
  int n_exp;

  task automatic push(step_t s);
    exp_q[n_exp] = s; n_exp++;
  endtask

  task automatic build(vwa_cfg_t c);
    int wout, sw;
    step_t s;
    n_exp = 0;
    wout = int'(c.w_in) - 2;
    if (c.layer == LAYER_CONV1) begin
      for (int f = 0; f < c.filters; f++)
        for (int x = 0; x < c.w_in; x++)
          for (int g = 0; g < c.groups; g++) begin
            s = '0;
            s.ia = 9'(g * c.w_in + x); s.wa = 9'(f * c.groups + g);
            s.s1_first = (g == 0); s.s1_last = (g == c.groups - 1);
            s.bypass = 1; s.col = 9'(x); s.ch = 7'(f);
            push(s);
          end
    end else begin
      for (int f = 0; f < ((c.layer == LAYER_DW3) ? 1 : int'(c.filters)); f++)
        for (int o1 = 0; o1 < ((c.layer == LAYER_DW3) ? int'(c.groups) : (wout + 3) / 4); o1++)
          for (int o2 = 0; o2 < ((c.layer == LAYER_DW3) ? (wout + 3) / 4 : int'(c.groups)); o2++) begin
            automatic int x0 = ((c.layer == LAYER_DW3) ? o2 : o1) * 4;
            automatic int g  = (c.layer == LAYER_DW3) ? o1 : o2;
            sw = (wout - x0 >= 4) ? 4 : wout - x0;
            for (int x = 0; x < sw + 2; x++)
              for (int wc = 0; wc < 3; wc++)
                if (x - wc >= 0 && x - wc < sw) begin
                  s = '0;
                  s.ia = 9'(g * ((c.w_in + 2) / 3) + (x0 + x) / 3); s.bsel = 2'((x0 + x) % 3);
                  s.wa = (c.layer == LAYER_DW3) ? 9'(g * 3 + wc) : 9'((f * c.groups + g) * 3 + wc);
                  s.s1_slot = 3'(x - wc); s.s1_first = (wc == 0); s.s1_last = (wc == 2);
                  s.s3_first = (g == 0); s.s3_last = (g == c.groups - 1);
                  s.dw = (c.layer == LAYER_DW3);
                  s.col = 9'(x0 + x - wc); s.ch = (c.layer == LAYER_DW3) ? 7'(g) : 7'(f);
                  s.ba = 14'(f * wout + x0 + x - wc);
                  push(s);
                end
          end
    end
  endtask

  task automatic run(vwa_cfg_t c);
    int k, t;
    step_t got;
    build(c);
    @(negedge clk); cfg = c; start = 1;
    @(negedge clk); start = 0;
    k = 0; t = 0;
    while (!done && t < 10000) begin
      if (in_rd_en) begin
        got = '0;
        got.ia = in_rd_addr; got.wa = w_rd_addr; got.bsel = ctl.bsel;
        got.s1_slot = ctl.s1_slot; got.s1_first = ctl.s1_first; got.s1_last = ctl.s1_last;
        got.col = ctl.col; got.ch = ctl.ch; got.bypass = ctl.s3_bypass; got.dw = ctl.dw;
        if (c.layer != LAYER_CONV1) begin
          got.s3_first = ctl.s3_first; got.s3_last = ctl.s3_last; got.ba = ctl.bnd_addr;
        end
        checks++;
        if (k >= n_exp || got !== exp_q[k]) begin
          failures++;
          if (failures < 10) $display("FAIL layer %0d step %0d got %h exp %h", c.layer, k, got, exp_q[k]);
        end
        k++;
      end
      @(negedge clk); t++;
    end
    checks++;
    if (k != n_exp) begin failures++; $display("FAIL layer %0d: %0d reads, expected %0d", c.layer, k, n_exp); end
    checks++;
    if (busy) begin failures++; $display("FAIL busy after done"); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cols [12] = '{0, 1, 1, 2, 2, 2, 3, 3, 3, 4, 4, 5};
  vwa_cfg_t c;
  initial begin
    cfg = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // the 4-column example: input column order a,b,b,c,c,c,d,d,d,e,e,f
    c = '0; c.layer = LAYER_CONV3; c.w_in = 9'd6; c.groups = 7'd1; c.filters = 7'd1;
    build(c);
    checks++;
    if (n_exp != 12) begin failures++; $display("FAIL 4-column strip takes %0d cycles", n_exp); end
    for (int i = 0; i < 12; i++) begin
      checks++;
      if (exp_q[i].ia * 3 + 9'(exp_q[i].bsel) != 9'(cols[i])) begin failures++; $display("FAIL order at %0d", i); end
    end
    run(c);
    c.w_in = 9'd12; c.groups = 7'd3; c.filters = 7'd2; run(c);       // strips 4,4,2
    c.layer = LAYER_DW3; c.w_in = 9'd9; c.groups = 7'd2; run(c);      // strips 4,3
    c.layer = LAYER_CONV1; c.w_in = 9'd5; c.groups = 7'd3; c.filters = 7'd2; run(c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
