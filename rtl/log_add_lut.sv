// log_add_lut: log-domain addition y = ln(e^a + e^b) for the mixture density.
//
// Uses ln(e^a + e^b) = max(a,b) + ln(1 + e^-|a-b|). The correction term comes
// from a 64-entry table indexed by d = |a-b| in steps of 1/8 (Q10 inputs, so
// the index is d >> 7); entry k holds round(1024 * ln(1 + exp(-(k + 0.5)/8)))
// and is read from rtl/log_add_lut.hex. For d >= 8 the correction is below
// half an LSB of the table and is taken as zero; sat flags that case.
// Combinational. The identity and the use of a table follow the source; the
// table size, step and midpoint sampling are this design's own.
module log_add_lut
  import mc2_pkg::*;
(
  input  eval_t a,
  input  eval_t b,
  output eval_t y,
  output logic  sat
);
  logic [9:0] lut [64];
  initial $readmemh("rtl/log_add_lut.hex", lut);

  always_comb begin
    eval_t mx, d;
    mx  = (a > b) ? a : b;
    d   = (a > b) ? a - b : b - a;
    sat = (d >= eval_t'(64 << 7));
    y   = sat ? mx : mx + eval_t'(lut[d[12:7]]);
  end
endmodule
