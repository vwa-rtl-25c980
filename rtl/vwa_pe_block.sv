// vwa_pe_block -- one PE block: a 7x3 array of 16-bit MACs with broadcast
// inputs and weights.
//
// Each of the 7 rows receives three input values, one from each of the
// block's three input SRAM banks; each MAC picks one through a 3-to-1 mux.
// Weight w[c] is broadcast down column c. The products are summed in the
// same cycle, either along the diagonal (3x3, 4x4, 5x5 and stride-2
// kernels) or along the row (1x1 kernels):
//   diagonal:   o[k] = P(k,2) + P(k-1,1) + P(k-2,0), k = 0..8
//               (o0..o6 leave the right column, o7/o8 leave columns 1/0
//               at the bottom)
//   horizontal: o[r] = P(r,0) + P(r,1) + P(r,2), r = 0..6; o7 = o8 = 0
// Mux selection per MAC follows the mode: bank 0 everywhere (unit stride),
// bank (r-c) mod 2 (stride 2, two input columns interleaved on successive
// rows) or bank c (1x1, one channel per column).
// In the 14-row configuration two blocks are chained: the lower block's
// row-0 adders take the upper block's o8 (column-0 product) and o7
// (column-1 sum) instead of zero, which continues the diagonal.
//
// Timing: purely combinational; the caller registers the outputs.
// The array shape, the muxes and the diagonal/horizontal sums follow the
// paper; the 16-bit truncating product (a*w) >>> FRAC and the cascade
// wiring are this design's choices.
module vwa_pe_block
  import vwa_pkg::*;
#(
  parameter int R = ROWS,
  parameter int F = FRAC
) (
  input  data_t    in_rows [R][3],
  input  data_t    w       [COLS],
  input  pe_mode_e mode,
  input  logic     casc_en,
  input  data_t    casc_p_in,
  input  data_t    casc_s_in,
  output data_t    o       [R+2]
);
  data_t prod [R][COLS];
  data_t s1   [R];        // column-1 adder output
  data_t s2   [R];        // column-2 adder output
  logic  diag;

  assign diag = (mode != PE_HORIZ_ELEM);

  function automatic logic [1:0] bank_sel(pe_mode_e m, int r, int c);
    case (m)
      PE_DIAG_ILV:   return 2'((r - c + 4) % 2);
      PE_HORIZ_ELEM: return 2'(c);
      default:       return 2'd0;
    endcase
  endfunction

  always_comb begin
    for (int r = 0; r < R; r++) begin
      for (int c = 0; c < COLS; c++) begin
        logic signed [2*DW-1:0] p;
        p = in_rows[r][bank_sel(mode, r, c)] * w[c];
        prod[r][c] = data_t'(p >>> F);
      end
    end
    for (int r = 0; r < R; r++) begin
      data_t a1, a2;
      if (!diag)        a1 = prod[r][0];
      else if (r > 0)   a1 = prod[r-1][0];
      else              a1 = casc_en ? casc_p_in : '0;
      s1[r] = prod[r][1] + a1;
      if (!diag)        a2 = s1[r];
      else if (r > 0)   a2 = s1[r-1];
      else              a2 = casc_en ? casc_s_in : '0;
      s2[r] = prod[r][2] + a2;
    end
    for (int k = 0; k < R; k++) o[k] = s2[k];
    o[R]   = diag ? s1[R-1]      : '0;
    o[R+1] = diag ? prod[R-1][0] : '0;
  end
endmodule
