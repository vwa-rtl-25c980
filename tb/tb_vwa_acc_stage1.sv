// tb_vwa_acc_stage1 -- self-checking test of the stage-1 partial accumulator.
//
// Drives random vectors with the interleaved slot pattern of a 4-column
// strip (each output column receives three contributions in
// non-consecutive cycles) and random-length groups, keeps its own sums per
// slot and checks each emitted vector and its 2-cycle latency.
module tb_vwa_acc_stage1;
  import vwa_pkg::*;
  localparam int N = 9, D = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, first = 0, last = 0;
  logic [2:0] slot = 0;
  data_t in [N];
  logic out_valid;
  data_t out [N];
  always #5 clk = ~clk;

  vwa_acc_stage1 #(.N(N), .DEPTH(D)) dut (.*);

  data_t model [D][N];
  data_t exp_mem [1024][N];
  int    exp_t [1024];
  int    wp = 0, rp = 0;
  int    cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (rp == wp) begin failures++; $display("FAIL unexpected output"); end
    else begin
      for (int i = 0; i < N; i++) if (out[i] !== exp_mem[rp][i]) begin
        failures++; $display("FAIL elem %0d got %0d exp %0d", i, out[i], exp_mem[rp][i]); break;
      end
      checks++;
      if (cyc != exp_t[rp] + 2) begin failures++; $display("FAIL latency %0d", cyc - exp_t[rp]); end
      rp++;
    end
  end

  task automatic drive(int s, bit f, bit l);
    @(negedge clk);
    in_valid = 1; slot = 3'(s); first = f; last = l;
    for (int i = 0; i < N; i++) in[i] = data_t'($urandom);
    for (int i = 0; i < N; i++) model[s][i] = f ? in[i] : data_t'(model[s][i] + in[i]);
    if (l) begin exp_mem[wp] = model[s]; exp_t[wp] = cyc; wp++; end
  endtask

  initial begin
    for (int i = 0; i < N; i++) in[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 40; rep++) begin
      // strip of 4 output columns: (x, wcol) order of the vectorwise schedule
      for (int x = 0; x < 6; x++)
        for (int wc = 0; wc < 3; wc++)
          if (x - wc >= 0 && x - wc < 4) drive(x - wc, wc == 0, wc == 2);
      // a gap, then a 1x1-style run of random length on slot 5
      @(negedge clk); in_valid = 0;
      begin
        automatic int n = $urandom_range(1, 5);
        for (int g = 0; g < n; g++) drive(5, g == 0, g == n - 1);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (rp != wp) begin failures++; $display("FAIL %0d outputs missing", wp - rp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
