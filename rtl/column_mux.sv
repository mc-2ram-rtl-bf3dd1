// column_mux: column selector/multiplexer of a bank.
//
// Only one bit-line current of the product port is passed to the single
// column ADC at a time. The selection is combinational (a current switch);
// with en low, or a select beyond the last column, no current flows and the
// output is zero. The zero-current behaviour is this design's own choice.
module column_mux #(
  parameter int unsigned NCOLS = 36,
  parameter int unsigned CUR_W = 16,
  localparam int unsigned SW = (NCOLS > 1) ? $clog2(NCOLS) : 1
) (
  input  logic [CUR_W-1:0] i_col [NCOLS],
  input  logic [SW-1:0]    sel,
  input  logic             en,
  output logic [CUR_W-1:0] i_out
);
  always_comb begin
    i_out = '0;
    if (en && (32'(sel) < NCOLS)) i_out = i_col[sel];
  end
endmodule
