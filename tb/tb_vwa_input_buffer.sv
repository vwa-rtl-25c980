// tb_vwa_input_buffer -- self-checking test of the 24-bank input buffer:
// fills every bank with random 7x16-bit words through the write port, then
// reads random addresses and compares all 24 banks' words (registered
// read: data one cycle after rd_en).
module tb_vwa_input_buffer;
  import vwa_pkg::*;
  localparam int D = 301;
  int checks = 0, failures = 0;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [4:0] wr_bank = 0;
  logic [8:0] wr_addr = 0, rd_addr = 0;
  data_t wr_data [ROWS];
  data_t rd_data [NBANK][ROWS];
  data_t ref_mem [NBANK][D][ROWS];
  always #5 clk = ~clk;
  vwa_input_buffer #(.DEPTH(D)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int b = 0; b < NBANK; b++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 5'(b); wr_addr = 9'(a);
        for (int r = 0; r < ROWS; r++) begin
          wr_data[r] = data_t'($urandom); ref_mem[b][a][r] = wr_data[r];
        end
      end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < 500; k++) begin
      automatic int a = $urandom_range(0, D - 1);
      @(negedge clk); rd_en = 1; rd_addr = 9'(a);
      @(negedge clk); rd_en = 0;
      for (int b = 0; b < NBANK; b++)
        for (int r = 0; r < ROWS; r++) begin
          checks++;
          if (rd_data[b][r] !== ref_mem[b][a][r]) begin
            failures++; $display("FAIL bank %0d addr %0d row %0d", b, a, r);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
