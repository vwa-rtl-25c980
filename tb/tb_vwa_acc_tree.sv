// tb_vwa_acc_tree -- self-checking test of the stage-2 block adder: random
// vectors from eight blocks, expected value = plain sum, 1-cycle latency.
module tb_vwa_acc_tree;
  import vwa_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  data_t in [NB][9];
  data_t out [9];
  data_t e [9];
  always #5 clk = ~clk;
  vwa_acc_tree #(.NBLK(NB), .N(9)) dut (.*);
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < 9; i++) begin
        e[i] = '0;
        for (int b = 0; b < NB; b++) begin
          in[b][i] = data_t'($urandom);
          e[i] += in[b][i];
        end
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL no valid"); end
      for (int i = 0; i < 9; i++) begin
        checks++;
        if (out[i] !== e[i]) begin failures++; $display("FAIL %0d: %0d vs %0d", i, out[i], e[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
