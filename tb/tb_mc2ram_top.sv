// tb_mc2ram_top: end-to-end test of MC2RAM at its default size (32 rows per
// bank, 2 banks, 2 components, 8-bit DACs, 6-bit ADC).
//
// After DAC calibration it samples, one iteration at a time, with every
// iteration checked against the reference model (random step read back from
// the RNG columns, quantised partial terms, log-add, ln U, decision, x and
// E_j afterwards):
//   A. the two-dimensional, two-component mixture with means (1,-1), (-1,1),
//      unit variances and equal weights, one dimension per bank, 500 samples;
//   B. the same mixture with mean distance 5 (means (5,-5), (-5,5));
//   C. a sample at the edge of the number range (candidate overflow);
//   D. a six-dimensional two-component mixture, three dimensions per bank,
//      with the op-amp range set so that the ADC saturates at times;
//   E. 500 iterations in one run, counting cycles.
// Each mechanism of the design is counted and must occur at least once:
// calibration correcting the DACs, accept, reject, overflow reject, ADC
// saturation, a log-add beyond the table, negative-phase conversions, both
// banks contributing, multi-iteration runs.
module tb_mc2ram_top;
  import mc2_pkg::*;
  import mc2_ref_pkg::*;
  localparam int ROWS = 32, NB = 2, M = 2;
  logic clk = 0, rst_n = 0;
  logic host_en = 0, host_we_mu = 0, host_we_x = 0;
  logic host_bank = 0;
  logic [4:0] host_row = 0;
  xval_t host_mu [M]; isig_t host_isig [M]; xval_t host_x;
  xval_t rd_mu [M]; isig_t rd_isig [M]; xval_t rd_x; rval_t rd_r;
  logic [5:0] n_rows [NB];
  logic [3:0] r_shift = 0;
  logic cal_start = 0, cal_done, e_load = 0, run = 0;
  eval_t c_log [M], e_init [M], e_cur [M], l_cur;
  logic [15:0] num_iter = 0, u_thresh;
  logic busy, sample_valid, sample_accept, sample_ovf, adc_over, lse_sat;

  mc2ram_top dut (.clk, .rst_n, .host_en, .host_we_mu, .host_we_x, .host_bank, .host_row,
    .host_mu, .host_isig, .host_x, .host_rd_mu(rd_mu), .host_rd_isig(rd_isig), .host_rd_x(rd_x), .host_rd_r(rd_r),
    .n_rows, .r_shift, .cal_start, .cal_done, .c_log, .e_init, .e_load,
    .run, .num_iter, .busy, .sample_valid, .sample_accept, .sample_ovf, .e_cur, .l_cur,
    .adc_over, .lse_sat, .u_thresh);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_acc = 0, n_rej = 0, n_ovf = 0, n_adc_sat = 0, n_lse_sat = 0, n_negph = 0, n_both = 0, n_cal = 0, n_runs = 0;
  int lse_dummy = 0;
  row_t rows [NB][];      // per bank
  int   nr   [NB];
  longint e_ref [2], c_ref [2];
  logic [15:0] u_ref;
  real sum_x [2];
  int  n_samples;

  always @(posedge clk) if (rst_n && adc_over) n_adc_sat++;
  always @(posedge clk) if (rst_n && dut.g_bank[0].u_bank.col_en && dut.g_bank[0].u_bank.neg_phase) n_negph++;

  task automatic chk(logic c, string msg);
    checks++; if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic write_row(int b, int i, row_t rw);
    host_en = 1; host_we_mu = 1; host_we_x = 1; host_bank = b[0]; host_row = 5'(i);
    for (int j = 0; j < M; j++) begin host_mu[j] = xval_t'(rw.mu[j]); host_isig[j] = isig_t'(rw.isig[j]); end
    host_x = xval_t'(rw.x);
    @(negedge clk);
    host_en = 0; host_we_mu = 0; host_we_x = 0;
  endtask

  task automatic read_row(int b, int i, output int r, output int x);
    host_en = 1; host_bank = b[0]; host_row = 5'(i);
    @(negedge clk);
    host_en = 0;
    r = int'(rd_r); x = int'(rd_x);
  endtask

  // Exact E_j of the current sample in Q10 (x, mu in 1/16, isig in 1/4).
  function automatic longint exact_e(int j);
    longint s;
    s = 0;
    for (int b = 0; b < NB; b++)
      for (int i = 0; i < nr[b]; i++)
        s += longint'(rows[b][i].x - rows[b][i].mu[j]) ** 2 * rows[b][i].isig[j];
    return s;
  endfunction

  // Load a mixture: per bank the rows, then E_j(0) and c_j.
  task automatic load(int rs);
    r_shift = 4'(rs);
    for (int b = 0; b < NB; b++) begin
      n_rows[b] = 6'(nr[b]);
      for (int i = 0; i < nr[b]; i++) write_row(b, i, rows[b][i]);
    end
    for (int j = 0; j < M; j++) begin
      e_ref[j] = exact_e(j);
      e_init[j] = eval_t'(e_ref[j]);
      c_log[j]  = eval_t'(c_ref[j]);
    end
    e_load = 1; @(negedge clk); e_load = 0;
  endtask

  // One checked iteration; returns its cycle count from run to sample_valid.
  task automatic step(output int cyc);
    longint de [2], ec [2], lp, lc;
    bit ov, exp_acc;
    int rr, xx;
    int rnew [NB][];
    num_iter = 16'd1; run = 1; @(negedge clk); run = 0;
    cyc = 1;
    while (!sample_valid && cyc < 5000) begin @(negedge clk); cyc++; end
    chk(sample_valid, "sample_valid");
    @(negedge clk);
    // read back R (unchanged until the next iteration) and the new x
    ov = 0;
    for (int b = 0; b < NB; b++) begin
      rnew[b] = new[nr[b]];
      for (int i = 0; i < nr[b]; i++) begin
        read_row(b, i, rr, xx);
        rows[b][i].r = rr;
        rnew[b][i] = xx;
        if (rows[b][i].x + rr > 127 || rows[b][i].x + rr < -128) ov = 1;
      end
    end
    for (int j = 0; j < M; j++) begin
      de[j] = 0;
      for (int b = 0; b < NB; b++) de[j] += bank_de(rows[b], nr[b], j, int'(r_shift), 8, 6, 64, lse_dummy);
      ec[j] = e_ref[j] + de[j];
    end
    if (bank_de(rows[0], nr[0], 0, int'(r_shift), 8, 6, 64, lse_dummy) != 0 &&
        bank_de(rows[1], nr[1], 0, int'(r_shift), 8, 6, 64, lse_dummy) != 0) n_both++;
    lp = log_density(c_ref, e_ref, M, n_lse_sat);
    lc = log_density(c_ref, ec, M, n_lse_sat);
    exp_acc = !ov && ((lc - lp) > ref_ln_u(u_ref));
    u_ref = lfsr_next(u_ref);
    chk(sample_ovf == ov, "overflow flag");
    chk(sample_accept == exp_acc, $sformatf("decision lp=%0d lc=%0d lnU=%0d", lp, lc, ref_ln_u(u_ref)));
    if (exp_acc) e_ref = ec;
    for (int j = 0; j < M; j++) chk(longint'(e_cur[j]) == e_ref[j], "E_j after the step");
    chk(u_thresh == u_ref, "uniform generator advanced once");
    for (int b = 0; b < NB; b++)
      for (int i = 0; i < nr[b]; i++) begin
        int xe;
        xe = exp_acc ? int'(xval_t'(rows[b][i].x + rows[b][i].r)) : rows[b][i].x;
        chk(rnew[b][i] == xe, "x after the step");
        rows[b][i].x = rnew[b][i];
      end
    n_acc += exp_acc; n_rej += !exp_acc; n_ovf += ov;
  endtask

  task automatic set_gmm2(int d);
    // dimension 0 in bank 0 row 0, dimension 1 in bank 1 row 0
    nr[0] = 1; nr[1] = 1;
    rows[0] = new[1]; rows[1] = new[1];
    rows[0][0].mu[0] =  d * 16; rows[0][0].mu[1] = -d * 16;
    rows[1][0].mu[0] = -d * 16; rows[1][0].mu[1] =  d * 16;
    for (int b = 0; b < NB; b++) begin
      rows[b][0].isig[0] = 4; rows[b][0].isig[1] = 4;   // sigma = 1
      rows[b][0].r = 0;
    end
    rows[0][0].x = 0; rows[1][0].x = 0;
    c_ref[0] = -710; c_ref[1] = -710;                   // ln 0.5
  endtask

  initial begin
    #200000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int cyc, cyc_rej, cyc_acc, t0;
    u_ref = 16'hACE1;
    n_rows[0] = 0; n_rows[1] = 0;
    for (int j = 0; j < M; j++) begin host_mu[j] = 0; host_isig[j] = 0; c_log[j] = 0; e_init[j] = 0; end
    host_x = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // calibration of all row DACs
    cal_start = 1; @(negedge clk); cal_start = 0;
    cyc = 0;
    while (!cal_done && cyc < 20000) begin @(negedge clk); cyc++; end
    chk(cal_done, "calibration finished");
    for (int i = 0; i < ROWS; i++) begin
      chk(dut.g_bank[0].u_bank.cal[i] == 4'd3 && dut.g_bank[1].u_bank.cal[i] == 4'd3, "calibration code");
      n_cal += (dut.g_bank[0].u_bank.cal[i] != 0);
    end

    // A: GMM with mean distance 1, 500 checked samples
    set_gmm2(1); load(0);
    sum_x[0] = 0; sum_x[1] = 0; n_samples = 0;
    cyc_rej = 0; cyc_acc = 0;
    for (int t = 0; t < 500; t++) begin
      step(cyc);
      if (sample_accept) cyc_acc = cyc; else cyc_rej = cyc;
      // at this size no quantisation occurs: E_j must be exact
      for (int j = 0; j < M; j++) chk(e_ref[j] == exact_e(j), "E_j equals the exact value");
      if (t >= 50) begin
        sum_x[0] += real'(rows[0][0].x) / 16.0; sum_x[1] += real'(rows[1][0].x) / 16.0; n_samples++;
      end
    end
    $display("INFO GMM d=1: mean x = (%f, %f) over %0d samples after burn-in; cycles per iteration reject %0d accept %0d",
             sum_x[0] / n_samples, sum_x[1] / n_samples, n_samples, cyc_rej, cyc_acc);
    chk(sum_x[0] / n_samples < 1.5 && sum_x[0] / n_samples > -1.5, "sample mean within the mixture");

    // B: mean distance 5, start at the first mean
    set_gmm2(5); rows[0][0].x = 80; rows[1][0].x = -80; load(0);
    for (int t = 0; t < 100; t++) step(cyc);

    // C: edge of the number range
    set_gmm2(1); rows[0][0].x = 127; rows[1][0].x = -128; load(0);
    for (int t = 0; t < 20; t++) step(cyc);

    // D: six dimensions, three per bank, op-amp range 0 (ADC may clip)
    nr[0] = 3; nr[1] = 3;
    for (int b = 0; b < NB; b++) begin
      rows[b] = new[3];
      for (int i = 0; i < 3; i++) begin
        rows[b][i].mu[0] = 16; rows[b][i].mu[1] = -16;
        rows[b][i].isig[0] = 15; rows[b][i].isig[1] = 15;
        rows[b][i].x = 0; rows[b][i].r = 0;
      end
    end
    c_ref[0] = -710; c_ref[1] = -710;
    load(0);
    for (int t = 0; t < 100; t++) step(cyc);

    // E: one run of 500 iterations
    set_gmm2(1); load(0);
    begin
      int nv;
      nv = 0;
      num_iter = 16'd500; run = 1; @(negedge clk); run = 0;
      t0 = 1;
      while ((busy || t0 == 1) && t0 < 200000) begin
        @(negedge clk); t0++;
        if (sample_valid) nv++;
      end
      chk(nv == 500, $sformatf("500-iteration run gave %0d samples", nv));
      n_runs++;
      $display("INFO 500 iterations took %0d cycles (%f per sample)", t0, real'(t0) / 500.0);
    end

    $display("INFO accepts=%0d rejects=%0d overflow=%0d adc_sat=%0d lse_sat=%0d neg_phase=%0d both_banks=%0d cal=%0d runs=%0d",
             n_acc, n_rej, n_ovf, n_adc_sat, n_lse_sat, n_negph, n_both, n_cal, n_runs);
    chk(n_acc > 0, "accept happened");
    chk(n_rej > 0, "reject happened");
    chk(n_ovf > 0, "overflow reject happened");
    chk(n_adc_sat > 0, "ADC saturation happened");
    chk(n_lse_sat > 0, "log-add beyond table happened");
    chk(n_negph > 0, "negative-phase conversion happened");
    chk(n_both > 0, "both banks contributed");
    chk(n_cal > 0, "calibration corrected the DACs");
    chk(n_runs > 0, "multi-iteration run happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
