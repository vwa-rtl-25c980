// tb_vwa_weight_buffer -- self-checking test of the ping-pong weight
// buffer: fills both sets with different random data, reads random
// addresses from a random set, and writes the same address of the other
// set in the same cycle to show the ping-pong sets are independent.
module tb_vwa_weight_buffer;
  import vwa_pkg::*;
  localparam int D = 384;
  int checks = 0, failures = 0;
  logic clk = 0, wr_en = 0, wr_set = 0, rd_en = 0, rd_set = 0;
  logic [2:0] wr_bank = 0;
  logic [8:0] wr_addr = 0, rd_addr = 0;
  data_t wr_data [COLS];
  data_t rd_data [NB][COLS];
  data_t ref_mem [2][NB][D][COLS];
  always #5 clk = ~clk;
  vwa_weight_buffer #(.DEPTH(D)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic wr(int s, int b, int a);
    wr_en = 1; wr_set = s[0]; wr_bank = 3'(b); wr_addr = 9'(a);
    for (int c = 0; c < COLS; c++) begin
      wr_data[c] = data_t'($urandom); ref_mem[s][b][a][c] = wr_data[c];
    end
  endtask
  initial begin
    for (int s = 0; s < 2; s++)
      for (int b = 0; b < NB; b++)
        for (int a = 0; a < D; a++) begin @(negedge clk); wr(s, b, a); end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < 600; k++) begin
      automatic int a = $urandom_range(0, D - 1);
      automatic int s = $urandom_range(0, 1);
      @(negedge clk);
      rd_en = 1; rd_set = s[0]; rd_addr = 9'(a);
      // overwrite the same address of the other set at the same time
      wr(1 - s, $urandom_range(0, NB - 1), a);
      @(negedge clk); rd_en = 0; wr_en = 0;
      for (int b = 0; b < NB; b++)
        for (int c = 0; c < COLS; c++) begin
          checks++;
          if (rd_data[b][c] !== ref_mem[s][b][a][c]) begin
            failures++; $display("FAIL set %0d bank %0d addr %0d", s, b, a);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
