// tb_vwa_acc_stage3 -- self-checking test of stage 3 (channel accumulation
// and tile-boundary merge).
//
// Three tiles of a strip of 4 output columns, G channel groups each, with
// random block sums. A small registered-read memory in the testbench plays
// the boundary buffer. Expected output per column: rows 0..6 of the sum
// over groups, with rows 0/1 increased by rows 7/8 of the same column of
// the previous tile (not for the first tile). A 1x1 bypass run checks that
// stage-2 vectors pass straight through. Latency in -> out is 2 cycles.
module tb_vwa_acc_stage3;
  import vwa_pkg::*;
  localparam int G = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  data_t in [9];
  vwa_ctl_t ctl;
  logic bnd_re, bnd_we, out_valid;
  logic [13:0] bnd_raddr, bnd_waddr;
  data_t bnd_rdata [2], bnd_wdata [2];
  data_t out [7];
  logic [6:0] out_ch;
  logic [8:0] out_col;
  always #5 clk = ~clk;

  vwa_acc_stage3 #(.DEPTH(4), .AW(14)) dut (.*);

  // boundary memory model
  data_t bmem [64][2];
  always @(posedge clk) begin
    if (bnd_re) begin bnd_rdata[0] <= bmem[bnd_raddr[5:0]][0]; bnd_rdata[1] <= bmem[bnd_raddr[5:0]][1]; end
    if (bnd_we) begin bmem[bnd_waddr[5:0]][0] <= bnd_wdata[0]; bmem[bnd_waddr[5:0]][1] <= bnd_wdata[1]; end
  end

  data_t acc  [4][9];
  data_t prevb[4][2];
  data_t exp_mem [64][7];
  int    exp_t [64];
  int    wp = 0, rp = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (rp == wp) begin failures++; $display("FAIL unexpected output"); end
    else begin
      for (int i = 0; i < 7; i++) if (out[i] !== exp_mem[rp][i]) begin
        failures++; $display("FAIL out %0d row %0d got %0d exp %0d", rp, i, out[i], exp_mem[rp][i]); break;
      end
      checks++;
      if (cyc != exp_t[rp] + 2) begin failures++; $display("FAIL latency"); end
      rp++;
    end
  end

  initial begin
    ctl = '0;
    for (int i = 0; i < 9; i++) in[i] = '0;
    bnd_rdata[0] = '0; bnd_rdata[1] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      for (int g = 0; g < G; g++)
        for (int j = 0; j < 4; j++) begin
          @(negedge clk);
          in_valid = 1;
          ctl = '0;
          ctl.valid = 1; ctl.s3_slot = 2'(j); ctl.s3_first = (g == 0); ctl.s3_last = (g == G - 1);
          ctl.use_bnd = (t != 0); ctl.bnd_addr = 14'(8 + j); ctl.ch = 7'(t); ctl.col = 9'(j);
          for (int i = 0; i < 9; i++) begin
            in[i] = data_t'($urandom_range(0, 4000)) - 2000;
            acc[j][i] = (g == 0) ? in[i] : data_t'(acc[j][i] + in[i]);
          end
          if (g == G - 1) begin
            for (int i = 0; i < 7; i++) exp_mem[wp][i] = acc[j][i];
            if (t != 0) begin
              exp_mem[wp][0] = data_t'(acc[j][0] + prevb[j][0]);
              exp_mem[wp][1] = data_t'(acc[j][1] + prevb[j][1]);
            end
            prevb[j][0] = acc[j][7]; prevb[j][1] = acc[j][8];
            exp_t[wp] = cyc; wp++;
          end
          // idle cycles between vectors, as between stage-1 results
          @(negedge clk); in_valid = 0;
        end
    end
    // 1x1 bypass
    for (int j = 0; j < 5; j++) begin
      @(negedge clk);
      in_valid = 1; ctl = '0; ctl.valid = 1; ctl.s3_bypass = 1;
      for (int i = 0; i < 9; i++) in[i] = data_t'($urandom);
      for (int i = 0; i < 7; i++) exp_mem[wp][i] = in[i];
      exp_t[wp] = cyc; wp++;
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (rp != wp) begin failures++; $display("FAIL %0d outputs missing", wp - rp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
