// row_dac: BEHAVIOURAL MODEL of the current-mode row DAC with calibration
// mirrors.
//
// The circuit mirrors a reference current into binary-weighted branches
// W0, 2W0, ..., 2^(n-1)W0 switched by the code bits D0..Dn-1; their sum is
// driven onto the product word line of the row. A process-dependent error of
// the mirror ratio is corrected by switching in small calibration mirrors Wc
// (C0..Ck). Here currents are integers in units of one ideal DAC LSB:
//     i_out = floor(code * (64 + MISMATCH + cal) / 64)
// so MISMATCH is the ratio error in 1/64 steps and each enabled calibration
// mirror adds 1/64 of the ratio. The 1/64 step and the linear model are this
// design's own; channel-length modulation is not modelled. Combinational.
module row_dac
  import mc2_pkg::*;
#(
  parameter int unsigned DAC_BITS = 8,
  parameter int unsigned CAL_BITS = 4,
  parameter int          MISMATCH = 0     // mirror-ratio error, 1/64 steps
) (
  input  logic [DAC_BITS-1:0] code,
  input  logic [CAL_BITS-1:0] cal,
  output cur_t                i_out
);
  always_comb begin
    int ratio;
    int prod;
    ratio = 64 + MISMATCH + int'(cal);
    if (ratio < 0) ratio = 0;
    prod  = int'(code) * ratio;
    i_out = CUR_W'(prod >>> 6);
  end
endmodule
