// tb_vwa_pe_block -- self-checking test of one PE block and of two blocks
// chained into a 14-row block.
//
// Random inputs and weights in every mode; the expected outputs are the
// convolution sums written directly from their definitions:
//   unit stride: o[k] = sum_c w[c] * x[k-2+c]            (x = bank 0)
//   stride 2:    as above with x[r] taken from bank (r-c) mod 2
//   1x1:         o[r] = sum_c w[c] * in[r][bank c]
// and, for the chained pair, o[k] over 14 rows.
module tb_vwa_pe_block;
  import vwa_pkg::*;
  int checks = 0, failures = 0;

  data_t    in_a [ROWS][3], in_b [ROWS][3];
  data_t    w [COLS], wb [COLS];
  pe_mode_e mode;
  logic     casc;
  data_t    oa [ROWS+2], ob [ROWS+2];

  vwa_pe_block dut_a (.in_rows(in_a), .w(w), .mode(mode), .casc_en(1'b0),
                      .casc_p_in(data_t'(0)), .casc_s_in(data_t'(0)), .o(oa));
  vwa_pe_block dut_b (.in_rows(in_b), .w(wb), .mode(mode), .casc_en(casc),
                      .casc_p_in(oa[ROWS+1]), .casc_s_in(oa[ROWS]), .o(ob));

  function automatic data_t mq(data_t a, data_t b);
    logic signed [31:0] p = a * b;
    return data_t'(p >>> FRAC);
  endfunction

  task automatic chk(data_t got, data_t exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  function automatic data_t rnd();
    return data_t'($urandom_range(0, 2047)) - data_t'(1024);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      for (int r = 0; r < ROWS; r++)
        for (int k = 0; k < 3; k++) begin in_a[r][k] = rnd(); in_b[r][k] = rnd(); end
      for (int c = 0; c < COLS; c++) begin w[c] = rnd(); wb[c] = w[c]; end
      mode = pe_mode_e'(it % 3);
      casc = (it % 2 == 1);
      #1;
      for (int k = 0; k < ROWS + 2; k++) begin
        automatic data_t e = '0;
        if (mode == PE_HORIZ_ELEM) begin
          if (k < ROWS) for (int c = 0; c < 3; c++) e += mq(in_a[k][c], w[c]);
        end else begin
          for (int c = 0; c < 3; c++) begin
            automatic int r = k - 2 + c;
            automatic int bk = (mode == PE_DIAG_ILV) ? ((r - c + 4) % 2) : 0;
            if (r >= 0 && r < ROWS) e += mq(in_a[r][bk], w[c]);
          end
        end
        chk(oa[k], e, $sformatf("mode%0d o%0d", mode, k));
      end
      // chained 14-row block (diagonal modes): rows 0..6 from a, 7..13 from b
      if (mode != PE_HORIZ_ELEM && casc) begin
        for (int k = 0; k < ROWS + 2; k++) begin
          automatic data_t e = '0;
          for (int c = 0; c < 3; c++) begin
            automatic int r = ROWS + k - 2 + c;   // row in the 14-row block
            // each block applies the interleave pattern to its own rows
            automatic int lr = (r >= ROWS) ? r - ROWS : r;
            automatic int bk = (mode == PE_DIAG_ILV) ? ((lr - c + 4) % 2) : 0;
            if (r >= 0 && r < ROWS)          e += mq(in_a[r][bk], w[c]);
            else if (r >= ROWS && r < 2*ROWS) e += mq(in_b[r-ROWS][bk], w[c]);
          end
          chk(ob[k], e, $sformatf("cascade o%0d mode%0d", ROWS + k, mode));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
