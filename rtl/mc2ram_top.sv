// mc2ram_top: MC2RAM - Metropolis-Hastings MCMC sampling of a diagonal
// Gaussian mixture inside SRAM.
//
// NUM_BANKS compute banks (mc2_bank) each hold up to ROWS dimensions of the
// mixture parameters, of the current sample x_{t-1} and of an RNG column that
// proposes the random step R. Every iteration all banks, in lockstep,
// generate R, compute their share of the exponent updates dE_j with
// current-mode in-memory scalar products, and hand them to the central
// processing layer (central_proc), which evaluates the log density with the
// log-add LUT, compares against ln U from the uniform generator and tells the
// banks whether to write x_{t-1} + R back.
//
// Host interface: while the sampler is idle the host reads and writes bank
// rows (host_bank selects the bank; read data appears on host_rd_* one cycle
// after host_en). n_rows gives the active dimensions of each bank, r_shift the
// range of the column op-amps, cal_start runs the DAC calibration of every
// bank, c_log/e_init/e_load set up the central layer, and run starts num_iter
// iterations; each iteration ends with a sample_valid pulse. adc_over and
// lse_sat report a saturated ADC conversion and a log-add beyond the table.
module mc2ram_top
  import mc2_pkg::*;
#(
  parameter int unsigned ROWS         = 32,
  parameter int unsigned NUM_BANKS    = 2,
  parameter int unsigned M            = 2,
  parameter int unsigned DAC_BITS     = 8,
  parameter int unsigned ADC_BITS     = 6,
  parameter int unsigned CAL_BITS     = 4,
  parameter int          DAC_MISMATCH = -3,
  localparam int unsigned AW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned BW = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // host port
  input  logic          host_en,
  input  logic          host_we_mu,
  input  logic          host_we_x,
  input  logic [BW-1:0] host_bank,
  input  logic [AW-1:0] host_row,
  input  xval_t         host_mu   [M],
  input  isig_t         host_isig [M],
  input  xval_t         host_x,
  output xval_t         host_rd_mu   [M],
  output isig_t         host_rd_isig [M],
  output xval_t         host_rd_x,
  output rval_t         host_rd_r,
  // configuration
  input  logic [AW:0]   n_rows [NUM_BANKS],
  input  logic [3:0]    r_shift,
  input  logic          cal_start,
  output logic          cal_done,
  input  eval_t         c_log  [M],
  input  eval_t         e_init [M],
  input  logic          e_load,
  // sampling
  input  logic          run,
  input  logic [15:0]   num_iter,
  output logic          busy,
  output logic          sample_valid,
  output logic          sample_accept,
  output logic          sample_ovf,
  output eval_t         e_cur [M],
  output eval_t         l_cur,
  output logic          adc_over,
  output logic          lse_sat,
  output logic [15:0]   u_thresh   // current uniform threshold U*2^16
);
  logic  b_start, b_update, b_accept;
  logic  b_busy [NUM_BANKS];
  logic  b_done [NUM_BANKS];
  logic  b_wb   [NUM_BANKS];
  logic  b_ovf  [NUM_BANKS];
  logic  b_adco [NUM_BANKS];
  logic  b_calb [NUM_BANKS];
  logic  b_cald [NUM_BANKS];
  eval_t b_de   [NUM_BANKS][M];
  xval_t b_rd_mu   [NUM_BANKS][M];
  isig_t b_rd_isig [NUM_BANKS][M];
  xval_t b_rd_x    [NUM_BANKS];
  rval_t b_rd_r    [NUM_BANKS];
  logic [BW-1:0] rd_bank_q;
  logic  cal_seen [NUM_BANKS];
  logic  cpl_busy;

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    mc2_bank #(.ROWS(ROWS), .M(M), .DAC_BITS(DAC_BITS), .ADC_BITS(ADC_BITS),
               .CAL_BITS(CAL_BITS), .DAC_MISMATCH(DAC_MISMATCH), .BANK_ID(b)) u_bank (
      .clk, .rst_n,
      .host_en(host_en && !cpl_busy && (32'(host_bank) == b)),
      .host_we_mu, .host_we_x, .host_row, .host_mu, .host_isig, .host_x,
      .host_rd_mu(b_rd_mu[b]), .host_rd_isig(b_rd_isig[b]), .host_rd_x(b_rd_x[b]), .host_rd_r(b_rd_r[b]),
      .n_rows(n_rows[b]), .r_shift, .cal_start(cal_start && !cpl_busy),
      .cal_busy(b_calb[b]), .cal_done(b_cald[b]),
      .start(b_start), .update(b_update), .accept(b_accept),
      .busy(b_busy[b]), .done(b_done[b]), .wb_done(b_wb[b]), .de(b_de[b]), .ovf(b_ovf[b]),
      .adc_over(b_adco[b])
    );
  end

  logic cal_all;
  always_comb begin
    cal_all = 1'b1;
    for (int b = 0; b < NUM_BANKS; b++) cal_all = cal_all & (cal_seen[b] | b_cald[b]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_bank_q <= '0;
      cal_done  <= 1'b0;
      for (int b = 0; b < NUM_BANKS; b++) cal_seen[b] <= 1'b0;
    end else begin
      if (host_en) rd_bank_q <= host_bank;
      for (int b = 0; b < NUM_BANKS; b++) begin
        if (cal_start || cal_done) cal_seen[b] <= 1'b0;
        else if (b_cald[b])        cal_seen[b] <= 1'b1;
      end
      cal_done <= cal_all && !cal_done && !cal_start;
    end
  end

  assign host_rd_mu   = b_rd_mu[rd_bank_q];
  assign host_rd_isig = b_rd_isig[rd_bank_q];
  assign host_rd_x    = b_rd_x[rd_bank_q];
  assign host_rd_r    = b_rd_r[rd_bank_q];

  always_comb begin
    adc_over = 1'b0;
    for (int b = 0; b < NUM_BANKS; b++) adc_over = adc_over | b_adco[b];
  end

  eval_t lse_a, lse_b, lse_y, ln_u;
  logic  u_next;


  central_proc #(.NUM_BANKS(NUM_BANKS), .M(M)) u_cpl (
    .clk, .rst_n, .c_log, .e_init, .e_load, .run, .num_iter,
    .busy(cpl_busy), .sample_valid, .sample_accept, .sample_ovf, .e_cur, .l_cur,
    .bank_start(b_start), .bank_done(b_done), .bank_de(b_de), .bank_ovf(b_ovf),
    .bank_update(b_update), .bank_accept(b_accept), .bank_wb_done(b_wb),
    .lse_a, .lse_b, .lse_y, .u_next, .ln_u
  );

  log_add_lut u_lut (.a(lse_a), .b(lse_b), .y(lse_y), .sat(lse_sat));

  uniform_rng u_urng (.clk, .rst_n, .next(u_next), .u(u_thresh), .ln_u);

  assign busy = cpl_busy;
endmodule
