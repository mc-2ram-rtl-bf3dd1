// mc2_pkg: number formats and the column map shared by the MC2RAM banks and
// the central processing layer.
//
// A bank row i holds, from left to right, the component means mu_ij
// (j = 0..M-1), the previous sample x_{t-1,i}, the random proposal step R_i
// produced by the SRAM-embedded RNG cells, and the inverse variances
// 1/sigma_ij^2. Every value is stored as bit columns, one column per bit.
// The formats are this design's own choice (the source only fixes the DAC and
// ADC precisions): x and mu are 8-bit two's complement with 4 fraction bits,
// R is 4-bit two's complement in the same units as x, 1/sigma^2 is 4-bit
// unsigned with 2 fraction bits. The exponent E_j of a Gaussian component and
// all log densities are 32-bit two's complement with 10 fraction bits (Q10),
// which is exactly the LSB of R * (R/sigma^2).
package mc2_pkg;
  localparam int unsigned XB    = 8;   // bits of x and mu
  localparam int unsigned XFRAC = 4;   // fraction bits of x, mu and R
  localparam int unsigned RB    = 4;   // bits of the proposal step R
  localparam int unsigned SB    = 4;   // bits of 1/sigma^2
  localparam int unsigned SFRAC = 2;   // fraction bits of 1/sigma^2
  localparam int unsigned VMAG  = RB - 1 + SB;  // magnitude bits of R/sigma^2
  localparam int unsigned EW    = 32;  // width of E_j and log densities
  localparam int unsigned EFRAC = 2 * XFRAC + SFRAC;  // = 10
  localparam int unsigned CUR_W = 16;  // column current, in DAC LSB currents
  localparam int unsigned VFRAC = 8;   // sub-LSB resolution of the held voltage

  typedef logic signed [XB-1:0] xval_t;
  typedef logic signed [RB-1:0] rval_t;
  typedef logic        [SB-1:0] isig_t;
  typedef logic signed [EW-1:0] eval_t;
  typedef logic        [CUR_W-1:0] cur_t;

  // Conversion tag that travels with a column conversion down the pipeline:
  // the power-of-two weight of the converted bit column and its sign.
  typedef struct packed {
    logic [4:0] shift;
    logic       neg;
  } conv_tag_t;

  // Column map of a bank with m components.
  function automatic int unsigned ncols(int unsigned m);
    return m * (XB + SB) + XB + RB;
  endfunction
  function automatic int unsigned col_mu(int unsigned j, int unsigned b);
    return j * XB + b;
  endfunction
  function automatic int unsigned col_x(int unsigned m, int unsigned b);
    return m * XB + b;
  endfunction
  function automatic int unsigned col_r(int unsigned m, int unsigned b);
    return m * XB + XB + b;
  endfunction
  function automatic int unsigned col_isig(int unsigned m, int unsigned j, int unsigned b);
    return m * XB + XB + RB + j * SB + b;
  endfunction
endpackage
