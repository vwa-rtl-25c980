// tb_vwa_boundary_buffer -- self-checking test of the boundary buffer:
// writes random 2x16-bit words over the whole address range, reads them
// back (registered read, one cycle) and also checks that a simultaneous
// read and write of different addresses do not disturb each other.
module tb_vwa_boundary_buffer;
  import vwa_pkg::*;
  localparam int D = 14336;
  int checks = 0, failures = 0;
  logic clk = 0, re = 0, we = 0;
  logic [13:0] raddr = 0, waddr = 0;
  data_t rdata [2], wdata [2];
  logic [31:0] ref_mem [D];
  always #5 clk = ~clk;
  vwa_boundary_buffer #(.DEPTH(D)) dut (.*);
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = 14'(a);
      ref_mem[a] = $urandom;
      wdata[0] = data_t'(ref_mem[a][15:0]); wdata[1] = data_t'(ref_mem[a][31:16]);
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 3000; k++) begin
      automatic int a = $urandom_range(0, D - 1);
      automatic int b = (a + 1 + $urandom_range(0, D - 2)) % D;
      @(negedge clk);
      re = 1; raddr = 14'(a);
      we = 1; waddr = 14'(b);
      ref_mem[b] = $urandom;
      wdata[0] = data_t'(ref_mem[b][15:0]); wdata[1] = data_t'(ref_mem[b][31:16]);
      @(negedge clk);
      re = 0; we = 0;
      checks++;
      if ({rdata[1], rdata[0]} !== ref_mem[a]) begin
        failures++; $display("FAIL addr %0d got %h exp %h", a, {rdata[1], rdata[0]}, ref_mem[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
