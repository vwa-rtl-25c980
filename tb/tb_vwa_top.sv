// tb_vwa_top -- end-to-end test of the convolution core at its default
// sizes.
//
// The testbench loads data over the data bus and runs four layer tiles:
//   1. 3x3 layer, 16 input channels (2 channel groups), 3 filters, an
//      11-column tile of rows 0..6 (first tile; strips of 4, 4 and 1
//      output columns), ReLU on.
//   2. the same layer, tile of rows 7..13: the two top rows are completed
//      with the partial sums the first tile left in the boundary buffer;
//      ReLU and 2-column max pooling on. While it runs, the 1x1 weights
//      are written into the other weight set (ping-pong).
//   3. depthwise 3x3, 16 channels, 8 columns.
//   4. 1x1 layer, 48 input channels (2 groups of 24), 2 filters, 5 columns,
//      reading the other weight set.
// Expected results are computed here from the convolution definition
// (16-bit products (x*w)>>>8, sums wrapping in 16 bits, then BN, ReLU,
// pooling). The testbench also checks that each tile issues one read per
// cycle (busy time = reads + a constant 5-cycle pipeline) and counts how
// often each mechanism occurred: boundary merge, partial strip, ping-pong
// write during compute, ReLU clipping, pooling, depthwise bypass, 1x1
// bypass (stage 3 skipped), multi-group accumulation.
module tb_vwa_top;
  import vwa_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic bus_we = 0, bus_set = 0;
  logic [1:0] bus_target = 0;
  logic [4:0] bus_bank = 0;
  logic [8:0] bus_addr = 0;
  data_t bus_wdata [ROWS];
  logic start = 0;
  vwa_cfg_t cfg;
  logic busy, done, out_valid, dw_valid;
  data_t out_data [ROWS];
  logic [6:0] out_ch, dw_grp;
  logic [8:0] out_col, dw_col;
  data_t dw_data [NB][ROWS+2];
  always #5 clk = ~clk;

  vwa_top dut (.*);

  // ------------------------------------------------------------ data
  localparam int C3 = 16, F3 = 3, W3 = 11, H3 = 14, G3 = 2;
  localparam int CD = 16, WD = 8, GD = 2;
  localparam int C1 = 48, F1 = 2, W1 = 5, G1 = 2;
  // run-time copies of the loop bounds (keeps the reference loops as loops)
  int nC3 = C3, nF3 = F3, nW3 = W3, nH3 = H3, nG3 = G3, nCD = CD, nWD = WD, nGD = GD;
  int nC1 = C1, nF1 = F1, nW1 = W1, nG1 = G1, n3 = 3, nR = ROWS, nR2 = ROWS + 2, nNB = NB;
  data_t fm3 [C3][H3][W3];
  data_t k3  [F3][C3][3][3];
  data_t fmd [CD][ROWS][WD];
  data_t kd  [CD][3][3];
  data_t fm1 [C1][ROWS][W1];
  data_t k1  [F1][C1];
  data_t bn_sc [CD], bn_sh [CD];

  // mechanism counters
  int n_bnd = 0, n_partial_strip = 0, n_pingpong = 0, n_relu_clip = 0;
  int n_pool = 0, n_dw = 0, n_1x1 = 0, n_multigroup = 0;

  function automatic data_t mq(data_t a, data_t b);
    logic signed [31:0] p;
    p = a * b;
    return data_t'(p >>> FRAC);
  endfunction
  function automatic data_t bn(data_t x, int ch, bit relu);
    longint t;
    t = (longint'(x) * longint'(bn_sc[ch])) >>> FRAC;
    t = t + longint'(bn_sh[ch]);
    if (t > 32767) t = 32767;
    if (t < -32768) t = -32768;
    if (relu && t < 0) t = 0;
    return data_t'(t);
  endfunction
  function automatic data_t rnd();
    return data_t'($urandom_range(0, 511)) - data_t'(256);
  endfunction

  task automatic bus(int target, int set, int bank, int addr, data_t d [ROWS]);
    @(negedge clk);
    bus_we = 1; bus_target = 2'(target); bus_set = set[0]; bus_bank = 5'(bank);
    bus_addr = 9'(addr); bus_wdata = d;
    @(negedge clk);
    bus_we = 0;
  endtask

  // ------------------------------------------------------------ references
  function automatic data_t conv3_ref(int f, int y, int x);
    data_t s = '0;
    for (int c = 0; c < nC3; c++)
      for (int i = 0; i < n3; i++)
        for (int j = 0; j < n3; j++) s += mq(fm3[c][y+i][x+j], k3[f][c][i][j]);
    return s;
  endfunction

  // ------------------------------------------------------------ output capture
  data_t got [F3][W3][ROWS];
  bit    seen [F3][W3];
  int    n_out;
  always @(posedge clk) if (out_valid) begin
    if (out_ch < F3 && out_col < W3) begin
      for (int k = 0; k < nR; k++) got[out_ch][out_col][k] <= out_data[k];
      seen[out_ch][out_col] <= 1'b1;
    end
    n_out <= n_out + 1;
  end
  data_t gotd [CD][WD][ROWS+2];
  bit    seend [CD][WD];
  always @(posedge clk) if (dw_valid) begin
    for (int b = 0; b < nNB; b++) begin
      for (int k = 0; k < nR2; k++) gotd[dw_grp*NB+b][dw_col][k] <= dw_data[b][k];
      seend[dw_grp*NB+b][dw_col] <= 1'b1;
    end
  end

  int t_start, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic run_layer(vwa_cfg_t c, int n_reads);
    int t0;
    @(negedge clk); cfg = c; start = 1;
    t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    // one read per cycle: busy lasts the reads plus the 5-cycle pipeline
    if (cyc - t0 != n_reads + 5) begin
      failures++; $display("FAIL layer %0d took %0d cycles for %0d reads", c.layer, cyc - t0, n_reads);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t d [ROWS];
  vwa_cfg_t c;
  initial begin
    for (int r = 0; r < nR; r++) d[r] = '0;
    bus_wdata = d;
    cfg = '0;
    for (int a = 0; a < nC3; a++) for (int y = 0; y < nH3; y++) for (int x = 0; x < nW3; x++) fm3[a][y][x] = rnd();
    for (int f = 0; f < nF3; f++) for (int a = 0; a < nC3; a++) for (int i = 0; i < n3; i++) for (int j = 0; j < n3; j++) k3[f][a][i][j] = rnd();
    for (int a = 0; a < nCD; a++) begin
      for (int y = 0; y < nR; y++) for (int x = 0; x < nWD; x++) fmd[a][y][x] = rnd();
      for (int i = 0; i < n3; i++) for (int j = 0; j < n3; j++) kd[a][i][j] = rnd();
      bn_sc[a] = data_t'($urandom_range(128, 384)); bn_sh[a] = data_t'($urandom_range(0, 200)) - 100;
    end
    for (int a = 0; a < nC1; a++) for (int y = 0; y < nR; y++) for (int x = 0; x < nW1; x++) fm1[a][y][x] = rnd();
    for (int f = 0; f < nF1; f++) for (int a = 0; a < nC1; a++) k1[f][a] = rnd();
    n_out = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    // BN table
    for (int a = 0; a < nCD; a++) begin
      d[0] = bn_sc[a]; d[1] = bn_sh[a]; bus(2, 0, 0, a, d);
    end
    // 3x3 weights, set 0: bank b, address (f*G+g)*3 + wcol, value c = kernel row c
    for (int f = 0; f < nF3; f++) for (int g = 0; g < nG3; g++) for (int b = 0; b < nNB; b++)
      for (int wc = 0; wc < n3; wc++) begin
        for (int r = 0; r < nR; r++) d[r] = (r < 3) ? k3[f][g*NB+b][r][wc] : data_t'(0);
        bus(1, 0, b, (f*G3 + g)*3 + wc, d);
      end

    // ---- 3x3, two tiles: column x of channel 8g+b in bank 3b + x%3, address
    //      g*ceil(W3/3) + x/3 (rows 7t..7t+6 in the word)
    for (int t = 0; t < 2; t++) begin
      for (int g = 0; g < nG3; g++) for (int b = 0; b < nNB; b++) for (int x = 0; x < nW3; x++) begin
        for (int r = 0; r < nR; r++) d[r] = fm3[g*NB+b][7*t + r][x];
        bus(0, 0, 3*b + x % 3, g*((W3 + 2) / 3) + x / 3, d);
      end
      for (int a = 0; a < nF3; a++) for (int x = 0; x < nW3; x++) seen[a][x] = 0;
      c = '0; c.layer = LAYER_CONV3; c.w_in = 9'(W3); c.groups = 7'(G3); c.filters = 7'(F3);
      c.first_tile = (t == 0); c.wset = 0; c.relu_en = 1; c.pool_en = (t == 1);
      if (t == 1) begin
        // 1x1 weights into set 1 while the 3x3 tile computes from set 0
        fork
          run_layer(c, F3 * G3 * 3 * (W3 - 2));
          begin
            @(negedge clk); @(negedge clk);
            for (int f = 0; f < nF1; f++) for (int g = 0; g < nG1; g++) for (int b = 0; b < nNB; b++) begin
              for (int r = 0; r < nR; r++) d[r] = (r < 3) ? k1[f][g*24 + 3*b + r] : data_t'(0);
              bus(1, 1, b, f*G1 + g, d);
              if (busy) n_pingpong++;
            end
          end
        join
      end else run_layer(c, F3 * G3 * 3 * (W3 - 2));
      n_multigroup++;
      if ((W3 - 2) % 4 != 0) n_partial_strip++;
      repeat (3) @(negedge clk);
      // compare: output column x holds rows 7t-2 .. 7t+4
      for (int f = 0; f < nF3; f++)
        for (int x = 0; x < nW3 - 2; x++) begin
          automatic bit emitted = (t == 0) || (x % 2 == 1);
          if (!emitted) continue;
          checks++;
          if (!seen[f][x]) begin failures++; $display("FAIL tile %0d f %0d col %0d missing", t, f, x); continue; end
          for (int k = 0; k < nR; k++) begin
            automatic int y = 7*t - 2 + k;
            automatic data_t e, e0, raw;
            if (y < 0 || y > H3 - 3) continue;
            raw = conv3_ref(f, y, x);
            e = bn(raw, f, 1);
            if (bn(raw, f, 0) < 0) n_relu_clip++;
            if (t == 1) begin
              e0 = bn(conv3_ref(f, y, x - 1), f, 1);
              if (e0 > e) e = e0;
            end
            if (t == 1 && k < 2) n_bnd++;
            checks++;
            if (got[f][x][k] !== e) begin
              failures++;
              if (failures < 20) $display("FAIL conv3 tile %0d f %0d col %0d row %0d got %0d exp %0d", t, f, x, y, got[f][x][k], e);
            end
          end
          if (t == 1) n_pool++;
        end
    end

    // ---- depthwise 3x3: column x of channel 8g+b in bank 3b + x%3, address g*ceil(WD/3) + x/3;
    //      weights set 0, bank b, address g*3 + wcol
    for (int g = 0; g < nGD; g++) for (int b = 0; b < nNB; b++) begin
      for (int x = 0; x < nWD; x++) begin
        for (int r = 0; r < nR; r++) d[r] = fmd[g*NB+b][r][x];
        bus(0, 0, 3*b + x % 3, g*((WD + 2) / 3) + x / 3, d);
      end
      for (int wc = 0; wc < n3; wc++) begin
        for (int r = 0; r < nR; r++) d[r] = (r < 3) ? kd[g*NB+b][r][wc] : data_t'(0);
        bus(1, 0, b, g*3 + wc, d);
      end
    end
    c = '0; c.layer = LAYER_DW3; c.w_in = 9'(WD); c.groups = 7'(GD); c.filters = 7'd1;
    c.first_tile = 1; c.wset = 0;
    run_layer(c, GD * 3 * (WD - 2));
    repeat (3) @(negedge clk);
    for (int a = 0; a < nCD; a++)
      for (int x = 0; x < nWD - 2; x++) begin
        checks++;
        if (!seend[a][x]) begin failures++; $display("FAIL dw ch %0d col %0d missing", a, x); continue; end
        n_dw++;
        for (int y = 0; y < nR - 2; y++) begin
          automatic data_t s = '0;
          for (int i = 0; i < n3; i++) for (int j = 0; j < n3; j++) s += mq(fmd[a][y+i][x+j], kd[a][i][j]);
          checks++;
          if (gotd[a][x][y+2] !== bn(s, a, 0)) begin
            failures++;
            if (failures < 20) $display("FAIL dw ch %0d col %0d row %0d got %0d exp %0d", a, x, y, gotd[a][x][y+2], bn(s, a, 0));
          end
        end
      end

    // ---- 1x1: bank 3b+c address g*W1+x = column x of channel 24g+3b+c; weight set 1
    for (int g = 0; g < nG1; g++) for (int b = 0; b < nNB; b++) for (int cc = 0; cc < n3; cc++)
      for (int x = 0; x < nW1; x++) begin
        for (int r = 0; r < nR; r++) d[r] = fm1[24*g + 3*b + cc][r][x];
        bus(0, 0, 3*b + cc, g*W1 + x, d);
      end
    for (int a = 0; a < nF3; a++) for (int x = 0; x < nW3; x++) seen[a][x] = 0;
    c = '0; c.layer = LAYER_CONV1; c.w_in = 9'(W1); c.groups = 7'(G1); c.filters = 7'(F1);
    c.first_tile = 1; c.wset = 1;
    run_layer(c, F1 * W1 * G1);
    repeat (3) @(negedge clk);
    for (int f = 0; f < nF1; f++)
      for (int x = 0; x < nW1; x++) begin
        checks++;
        if (!seen[f][x]) begin failures++; $display("FAIL 1x1 f %0d col %0d missing", f, x); continue; end
        n_1x1++;
        for (int y = 0; y < nR; y++) begin
          automatic data_t s = '0;
          for (int a = 0; a < nC1; a++) s += mq(fm1[a][y][x], k1[f][a]);
          checks++;
          if (got[f][x][y] !== bn(s, f, 0)) begin
            failures++;
            if (failures < 20) $display("FAIL 1x1 f %0d col %0d row %0d got %0d exp %0d", f, x, y, got[f][x][y], bn(s, f, 0));
          end
        end
      end

    $display("mechanisms: boundary_merge=%0d partial_strip=%0d pingpong_write=%0d relu_clip=%0d pool=%0d depthwise=%0d conv1x1=%0d multigroup=%0d",
             n_bnd, n_partial_strip, n_pingpong, n_relu_clip, n_pool, n_dw, n_1x1, n_multigroup);
    if (n_bnd == 0)           begin failures++; $display("FAIL boundary merge never happened"); end
    if (n_partial_strip == 0) begin failures++; $display("FAIL no partial strip"); end
    if (n_pingpong == 0)      begin failures++; $display("FAIL no ping-pong write during compute"); end
    if (n_relu_clip == 0)     begin failures++; $display("FAIL ReLU never clipped"); end
    if (n_pool == 0)          begin failures++; $display("FAIL pooling never happened"); end
    if (n_dw == 0)            begin failures++; $display("FAIL depthwise never happened"); end
    if (n_1x1 == 0)           begin failures++; $display("FAIL 1x1 never happened"); end
    if (n_multigroup == 0)    begin failures++; $display("FAIL multi-group never happened"); end
    checks += 8;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
