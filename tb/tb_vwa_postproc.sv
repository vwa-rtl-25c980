// tb_vwa_postproc -- self-checking test of post processing: random vectors
// with random BN scale/shift, ReLU on/off, pooling on/off; the expected
// value is computed in 64-bit integers with explicit saturation, and the
// pooled output is the element-wise max of each pair of inputs.
module tb_vwa_postproc;
  import vwa_pkg::*;
  localparam int L = 7;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, in_first = 0, in_valid = 0, relu_en = 0, pool_en = 0;
  data_t in [L], out [L];
  data_t scale, shift;
  logic [15:0] in_tag = 0, out_tag;
  logic out_valid;
  data_t y0 [L];
  always #5 clk = ~clk;
  vwa_postproc #(.LANES(L), .TW(16)) dut (.*);

  function automatic data_t bnr(data_t x, data_t sc, data_t sh, bit relu);
    longint t;
    t = (longint'(x) * longint'(sc)) >>> FRAC;
    t = t + longint'(sh);
    if (t > 32767) t = 32767;
    if (t < -32768) t = -32768;
    if (relu && t < 0) t = 0;
    return data_t'(t);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      relu_en = 1'($urandom_range(0, 1)); pool_en = (it >= 150);
      scale = data_t'($urandom); shift = data_t'($urandom);
      clear = 1;
      @(negedge clk); clear = 0;
      // first vector
      in_valid = 1; in_first = 1; in_tag = 16'(it);
      for (int i = 0; i < L; i++) begin in[i] = data_t'($urandom); y0[i] = bnr(in[i], scale, shift, relu_en); end
      @(negedge clk);
      in_valid = 0;
      if (!pool_en) begin
        checks++;
        if (!out_valid || out_tag !== 16'(it)) begin failures++; $display("FAIL valid/tag"); end
        for (int i = 0; i < L; i++) begin
          checks++;
          if (out[i] !== y0[i]) begin failures++; $display("FAIL it %0d lane %0d got %0d exp %0d", it, i, out[i], y0[i]); end
        end
      end else begin
        checks++;
        if (out_valid) begin failures++; $display("FAIL pooled output too early"); end
        in_valid = 1; in_first = 0; in_tag = 16'(it + 1000);
        for (int i = 0; i < L; i++) in[i] = data_t'($urandom);
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (!out_valid || out_tag !== 16'(it + 1000)) begin failures++; $display("FAIL pool valid/tag"); end
        for (int i = 0; i < L; i++) begin
          automatic data_t y1 = bnr(in[i], scale, shift, relu_en);
          automatic data_t e = (y0[i] > y1) ? y0[i] : y1;
          checks++;
          if (out[i] !== e) begin failures++; $display("FAIL pool lane %0d got %0d exp %0d", i, out[i], e); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
