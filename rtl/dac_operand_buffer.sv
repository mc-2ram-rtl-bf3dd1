// dac_operand_buffer: DAC-operand buffer of a bank, holding R_i and the
// inverse variances 1/sigma_ij^2 of every row, and forming the row DAC codes.
//
// At the start of an iteration the controller clears the buffer (all rows
// inactive) and copies the active rows from the array through the R/W port
// (ld_en with ld_row, ld_r, ld_isig). For the selected component j the
// operand of row i is v_i = R_i * (1/sigma_ij^2), a signed value of
// VMAG = 7 magnitude bits in units of 2^-6. A current DAC can only source
// current, so rows are driven in two phases: neg_phase = 0 drives |v_i| on
// rows with v_i > 0, neg_phase = 1 on rows with v_i < 0, all other rows get
// code 0. When DAC_BITS < VMAG the code keeps the DAC_BITS most significant
// bits (truncation), and DAC_SHIFT = VMAG - DAC_BITS tells the accumulator
// the weight of the code LSB. The split into two sign phases and the
// truncation are this design's own; the source says only that R is held in
// this buffer and scaled by sigma^2 inside the DAC. dac_code is
// combinational from the registers.
module dac_operand_buffer
  import mc2_pkg::*;
#(
  parameter int unsigned ROWS     = 32,
  parameter int unsigned M        = 2,
  parameter int unsigned DAC_BITS = 8,
  localparam int unsigned AW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned JW = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned DAC_SHIFT = (DAC_BITS >= VMAG) ? 0 : VMAG - DAC_BITS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                ld_en,
  input  logic [AW-1:0]       ld_row,
  input  rval_t               ld_r,
  input  isig_t               ld_isig [M],
  input  logic [JW-1:0]       comp,
  input  logic                neg_phase,
  input  logic                force_en,    // calibration: drive force_code on force_row only
  input  logic [AW-1:0]       force_row,
  input  logic [DAC_BITS-1:0] force_code,
  output rval_t               buf_r [ROWS],
  output logic [DAC_BITS-1:0] dac_code [ROWS]
);
  isig_t buf_isig [ROWS][M];
  logic  row_act  [ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROWS; i++) begin
        row_act[i] <= 1'b0;
        buf_r[i]   <= '0;
        for (int j = 0; j < M; j++) buf_isig[i][j] <= '0;
      end
    end else if (clear) begin
      for (int i = 0; i < ROWS; i++) row_act[i] <= 1'b0;
    end else if (ld_en) begin
      row_act[ld_row]  <= 1'b1;
      buf_r[ld_row]    <= ld_r;
      buf_isig[ld_row] <= ld_isig;
    end
  end

  always_comb begin
    for (int i = 0; i < ROWS; i++) begin
      logic signed [VMAG+1:0] v;
      logic        [VMAG-1:0] mag;
      v   = (VMAG+2)'(buf_r[i]) * $signed({1'b0, buf_isig[i][comp]});
      mag = v[VMAG+1] ? VMAG'(-v) : VMAG'(v);
      dac_code[i] = '0;
      if (force_en) begin
        if (32'(force_row) == i) dac_code[i] = force_code;
      end else if (row_act[i] && (v != 0) && (v[VMAG+1] == neg_phase)) begin
        dac_code[i] = DAC_BITS'(mag >> DAC_SHIFT);
      end
    end
  end
endmodule
