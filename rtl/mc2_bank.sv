// mc2_bank: one in-SRAM compute bank of MC2RAM (array, RNG column,
// DAC-operand buffer, parallel row DACs, column multiplexer, op-amp/hold,
// two-step flash ADC, Shift/Sign accumulator, controller, DAC calibration).
//
// Data flow, as in the source's bank diagram: the RNG column produces R; the
// R/W port copies R and 1/sigma^2 into the DAC-operand buffer; the row DACs
// drive |R_i/sigma_ij^2| onto the product word lines; the array sums the
// currents of the cells that store '1' per column; the column multiplexer
// hands one column current to the op-amp and hold cell; the two-step flash
// ADC digitises it; the ADC REG, Shift/Sign stage and adder accumulate the
// bit columns into the partial exponent update dE_j (see bank_ctrl for the
// schedule and timing).
// Host port: while the bank is idle the host owns the R/W port; a read
// returns the row one cycle later on host_rd_*. cal_start runs the DAC
// calibration loop; a DAC's mirror error is set by DAC_MISMATCH (the same
// value for all rows here, a behavioural stand-in for process spread).
module mc2_bank
  import mc2_pkg::*;
#(
  parameter int unsigned ROWS         = 32,
  parameter int unsigned M            = 2,
  parameter int unsigned DAC_BITS     = 8,
  parameter int unsigned ADC_BITS     = 6,
  parameter int unsigned CAL_BITS     = 4,
  parameter int          DAC_MISMATCH = -3,
  parameter int unsigned BANK_ID      = 0,
  localparam int unsigned NC = ncols(M),
  localparam int unsigned AW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned JW = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned SW = (NC > 1) ? $clog2(NC) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // host port
  input  logic          host_en,
  input  logic          host_we_mu,
  input  logic          host_we_x,
  input  logic [AW-1:0] host_row,
  input  xval_t         host_mu   [M],
  input  isig_t         host_isig [M],
  input  xval_t         host_x,
  output xval_t         host_rd_mu   [M],
  output isig_t         host_rd_isig [M],
  output xval_t         host_rd_x,
  output rval_t         host_rd_r,
  // configuration
  input  logic [AW:0]   n_rows,
  input  logic [3:0]    r_shift,
  input  logic          cal_start,
  output logic          cal_busy,
  output logic          cal_done,
  // iteration handshake with the central processing layer
  input  logic          start,
  input  logic          update,
  input  logic          accept,
  output logic          busy,
  output logic          done,
  output logic          wb_done,
  output eval_t         de [M],
  output logic          ovf,
  output logic          adc_over   // pulse: a conversion hit full scale
);
  // controller <-> array
  logic          c_rw_en, c_rw_we_x;
  logic [AW-1:0] c_rw_row;
  xval_t         c_wr_x;
  logic          a_rw_en, a_we_mu, a_we_x;
  logic [AW-1:0] a_row;
  xval_t         a_wr_x;
  xval_t         rd_mu [M];
  isig_t         rd_isig [M];
  xval_t         rd_x;
  rval_t         rd_r;
  logic          rng_eval;

  // buffer, DACs, currents
  logic          buf_clear, buf_ld, neg_phase;
  logic [AW-1:0] buf_row;
  logic [JW-1:0] comp;
  rval_t         buf_r [ROWS];
  logic [DAC_BITS-1:0] dac_code [ROWS];
  cur_t          i_row [ROWS];
  cur_t          i_col [NC];
  logic [SW-1:0] col_sel;
  logic          col_en;
  cur_t          i_sel;

  // conversion pipeline
  logic          sample, adc_start, adc_valid, acc_clear, acc_busy;
  logic [CUR_W+VFRAC-1:0] v_sample;
  logic [ADC_BITS-1:0] adc_code;
  conv_tag_t     acc_tag;
  eval_t         acc;

  // calibration
  logic          cal_active;
  logic [AW-1:0] cal_row;
  logic [DAC_BITS-1:0] cal_code;
  logic [CAL_BITS-1:0] cal [ROWS];

  assign a_rw_en = busy ? c_rw_en   : host_en;
  assign a_we_mu = busy ? 1'b0      : host_we_mu;
  assign a_we_x  = busy ? c_rw_we_x : host_we_x;
  assign a_row   = busy ? c_rw_row  : host_row;
  assign a_wr_x  = busy ? c_wr_x    : host_x;
  assign host_rd_mu   = rd_mu;
  assign host_rd_isig = rd_isig;
  assign host_rd_x    = rd_x;
  assign host_rd_r    = rd_r;
  assign cal_active   = cal_busy;

  sram_array #(.ROWS(ROWS), .M(M), .BANK_ID(BANK_ID)) u_array (
    .clk, .rst_n,
    .rw_en(a_rw_en), .rw_we_mu(a_we_mu), .rw_we_x(a_we_x), .rw_row(a_row),
    .wr_mu(host_mu), .wr_isig(host_isig), .wr_x(a_wr_x),
    .rd_mu, .rd_isig, .rd_x, .rd_r,
    .rng_eval, .rng_en(1'b1),
    .i_row, .i_col
  );

  dac_operand_buffer #(.ROWS(ROWS), .M(M), .DAC_BITS(DAC_BITS)) u_buf (
    .clk, .rst_n,
    .clear(buf_clear), .ld_en(buf_ld), .ld_row(buf_row), .ld_r(rd_r), .ld_isig(rd_isig),
    .comp, .neg_phase,
    .force_en(cal_active), .force_row(cal_row), .force_code(cal_code),
    .buf_r, .dac_code
  );

  for (genvar i = 0; i < ROWS; i++) begin : g_dac
    row_dac #(.DAC_BITS(DAC_BITS), .CAL_BITS(CAL_BITS), .MISMATCH(DAC_MISMATCH)) u_dac (
      .code(dac_code[i]), .cal(cal[i]), .i_out(i_row[i])
    );
  end

  dac_calibration #(.ROWS(ROWS), .DAC_BITS(DAC_BITS), .CAL_BITS(CAL_BITS)) u_cal (
    .clk, .rst_n, .start(cal_start && !busy), .i_meas(i_row[cal_row]),
    .busy(cal_busy), .done(cal_done), .test_row(cal_row), .test_code(cal_code), .cal
  );

  column_mux #(.NCOLS(NC), .CUR_W(CUR_W)) u_mux (
    .i_col, .sel(col_sel), .en(col_en), .i_out(i_sel)
  );

  tia_hold u_tia (
    .clk, .rst_n, .i_col(i_sel), .sample, .rst_s(buf_clear), .r_shift, .v_sample
  );

  two_step_adc #(.ADC_BITS(ADC_BITS)) u_adc (
    .clk, .rst_n, .v_in(v_sample), .in_valid(adc_start),
    .code(adc_code), .out_valid(adc_valid), .over_range(adc_over)
  );

  partial_term_acc #(.ADC_BITS(ADC_BITS)) u_acc (
    .clk, .rst_n, .clear(acc_clear), .in_valid(adc_valid), .code(adc_code),
    .tag(acc_tag), .acc, .busy(acc_busy)
  );

  bank_ctrl #(.ROWS(ROWS), .M(M), .DAC_BITS(DAC_BITS)) u_ctrl (
    .clk, .rst_n, .start(start && !cal_busy), .n_rows, .r_shift, .update, .accept,
    .busy, .done, .wb_done, .de, .ovf,
    .rw_en(c_rw_en), .rw_we_x(c_rw_we_x), .rw_row(c_rw_row), .wr_x(c_wr_x),
    .rd_x, .rd_r,
    .rng_eval, .buf_clear, .buf_ld, .buf_row, .comp, .neg_phase,
    .col_sel, .col_en, .sample, .adc_start, .acc_tag, .acc_clear, .acc
  );
endmodule
