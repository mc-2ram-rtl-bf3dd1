// mc2_sweep_point: one operating point of the precision and workload sweeps.
//
// Instantiates mc2ram_top with the given DAC and ADC precision (8 rows per
// bank, enough for the mixtures run here), calibrates it, and samples
// Gaussian mixtures of two components with means +mu and -mu, where
// mu = (d, -d, d, -d, ...), unit variances and equal weights. Dimensions are
// split between the two banks (first ceil(N/2) in bank 0). Each workload runs
// ITER Metropolis-Hastings steps from x = mu_1; every step is checked against
// the reference model (quantised partial terms with this DAC/ADC precision,
// log-add, ln U, decision, x and E_j). The op-amp range r_shift is the
// smallest that keeps the largest possible column current within the ADC's
// full scale, as the feedback resistance would be chosen.
//
// After the burn-in the first two coordinates are binned on a 16 x 16 grid of
// 1 x 1 over [-8, 8)^2 (the whole range of x) and the KL divergence of the sample histogram from
// the mixture's bin probabilities is printed. It is reported, not checked:
// with a few hundred correlated samples it is a rough figure. With unit
// variances every row operand R_i/sigma^2 = 4 R_i is a multiple of 4, so
// dropping up to two LSBs in the DAC or in the op-amp range loses nothing:
// such points give the same chain bit for bit.
//
// WIDE = 1 runs, after the mean-distance-1 two-dimensional mixture, the
// mean-distance sweep d = 2..5 and the dimension sweep N = 3..6; WIDE = 0
// runs only the first. done rises when the point has finished; checks and
// failures are its totals.
module mc2_sweep_point #(
  parameter int DAC_BITS = 8,
  parameter int ADC_BITS = 6,
  parameter int WIDE     = 0,
  parameter int ITER     = 500,
  parameter int BURN     = 50
) (
  output logic done,
  output int   checks,
  output int   failures
);
  import mc2_pkg::*;
  import mc2_ref_pkg::*;
  localparam int ROWS = 8, NB = 2, M = 2;
  logic clk = 0, rst_n = 0;
  logic host_en = 0, host_we_mu = 0, host_we_x = 0;
  logic host_bank = 0;
  logic [2:0] host_row = 0;
  xval_t host_mu [M]; isig_t host_isig [M]; xval_t host_x;
  xval_t rd_mu [M]; isig_t rd_isig [M]; xval_t rd_x; rval_t rd_r;
  logic [3:0] n_rows [NB];
  logic [3:0] r_shift = 0;
  logic cal_start = 0, cal_done, e_load = 0, run = 0;
  eval_t c_log [M], e_init [M], e_cur [M], l_cur;
  logic [15:0] num_iter = 0, u_thresh;
  logic busy, sample_valid, sample_accept, sample_ovf, adc_over, lse_sat;

  mc2ram_top #(.ROWS(ROWS), .DAC_BITS(DAC_BITS), .ADC_BITS(ADC_BITS)) dut (
    .clk, .rst_n, .host_en, .host_we_mu, .host_we_x, .host_bank, .host_row,
    .host_mu, .host_isig, .host_x, .host_rd_mu(rd_mu), .host_rd_isig(rd_isig), .host_rd_x(rd_x), .host_rd_r(rd_r),
    .n_rows, .r_shift, .cal_start, .cal_done, .c_log, .e_init, .e_load,
    .run, .num_iter, .busy, .sample_valid, .sample_accept, .sample_ovf, .e_cur, .l_cur,
    .adc_over, .lse_sat, .u_thresh);
  always #5 clk = ~clk;

  int dummy = 0, n_acc = 0;
  row_t rows [NB][];
  int   nr   [NB];
  longint e_ref [2], c_ref [2];
  logic [15:0] u_ref;

  task automatic chk(logic c, string msg);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL (DAC %0d, ADC %0d): %s", DAC_BITS, ADC_BITS, msg);
    end
  endtask

  task automatic write_row(int b, int i, row_t rw);
    host_en = 1; host_we_mu = 1; host_we_x = 1; host_bank = b[0]; host_row = 3'(i);
    for (int j = 0; j < M; j++) begin host_mu[j] = xval_t'(rw.mu[j]); host_isig[j] = isig_t'(rw.isig[j]); end
    host_x = xval_t'(rw.x);
    @(negedge clk);
    host_en = 0; host_we_mu = 0; host_we_x = 0;
  endtask

  task automatic read_row(int b, int i, output int r, output int x);
    host_en = 1; host_bank = b[0]; host_row = 3'(i);
    @(negedge clk);
    host_en = 0;
    r = int'(rd_r); x = int'(rd_x);
  endtask

  function automatic longint exact_e(int j);
    longint s;
    s = 0;
    for (int b = 0; b < NB; b++)
      for (int i = 0; i < nr[b]; i++)
        s += longint'(rows[b][i].x - rows[b][i].mu[j]) ** 2 * rows[b][i].isig[j];
    return s;
  endfunction

  // Mixture of dimension n, mean distance d, started at the first mean.
  task automatic setup(int n, int d);
    int rs, maxcur;
    nr[0] = (n + 1) / 2; nr[1] = n / 2;
    for (int b = 0; b < NB; b++) begin
      rows[b] = new[nr[b]];
      for (int i = 0; i < nr[b]; i++) begin
        int dim, sgn;
        dim = (b == 0) ? i : nr[0] + i;
        sgn = (dim % 2 == 0) ? 1 : -1;
        rows[b][i].mu[0] =  sgn * d * 16;
        rows[b][i].mu[1] = -sgn * d * 16;
        rows[b][i].isig[0] = 4; rows[b][i].isig[1] = 4;
        rows[b][i].x = rows[b][i].mu[0];
        rows[b][i].r = 0;
      end
    end
    c_ref[0] = -710; c_ref[1] = -710;             // ln 0.5, sigma = 1
    // largest column current: every row at |R| = 7 times 1/sigma^2 = 4
    maxcur = nr[0] * 28;
    if (DAC_BITS < VMAG) maxcur = nr[0] * (28 >> (VMAG - DAC_BITS));
    rs = 0;
    while ((maxcur >> rs) > (1 << ADC_BITS) - 1) rs++;
    r_shift = 4'(rs);
    for (int b = 0; b < NB; b++) begin
      n_rows[b] = 4'(nr[b]);
      for (int i = 0; i < nr[b]; i++) write_row(b, i, rows[b][i]);
    end
    for (int j = 0; j < M; j++) begin
      e_ref[j] = exact_e(j);
      e_init[j] = eval_t'(e_ref[j]);
      c_log[j]  = eval_t'(c_ref[j]);
    end
    e_load = 1; @(negedge clk); e_load = 0;
  endtask

  task automatic step();
    longint de [2], ec [2], lp, lc;
    bit ov, exp_acc;
    int rr, xx, cyc;
    int rnew [NB][];
    num_iter = 16'd1; run = 1; @(negedge clk); run = 0;
    cyc = 1;
    while (!sample_valid && cyc < 5000) begin @(negedge clk); cyc++; end
    chk(sample_valid, "sample_valid");
    @(negedge clk);
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
      for (int b = 0; b < NB; b++)
        de[j] += bank_de(rows[b], nr[b], j, int'(r_shift), DAC_BITS, ADC_BITS, 64, dummy);
      ec[j] = e_ref[j] + de[j];
    end
    lp = log_density(c_ref, e_ref, M, dummy);
    lc = log_density(c_ref, ec, M, dummy);
    exp_acc = !ov && ((lc - lp) > ref_ln_u(u_ref));
    u_ref = lfsr_next(u_ref);
    chk(sample_accept == exp_acc, "decision");
    if (exp_acc) e_ref = ec;
    for (int j = 0; j < M; j++) chk(longint'(e_cur[j]) == e_ref[j], "E_j after the step");
    for (int b = 0; b < NB; b++)
      for (int i = 0; i < nr[b]; i++) begin
        int xe;
        xe = exp_acc ? int'(xval_t'(rows[b][i].x + rows[b][i].r)) : rows[b][i].x;
        chk(rnew[b][i] == xe, "x after the step");
        rows[b][i].x = rnew[b][i];
      end
    n_acc += exp_acc;
  endtask

  // Probability mass of the 2-D marginal of the mixture in bin (a, b).
  function automatic real bin_p(int a, int b, int d);
    real xc, yc, p0, p1;
    xc = -8.0 + a + 0.5;
    yc = -8.0 + b + 0.5;
    p0 = $exp(-0.5 * ((xc - d) ** 2 + (yc + d) ** 2));
    p1 = $exp(-0.5 * ((xc + d) ** 2 + (yc - d) ** 2));
    return 0.5 * (p0 + p1);
  endfunction

  task automatic run_workload(int n, int d);
    int hist [16][16];
    int ns, acc0;
    real kl, ptot, q;
    setup(n, d);
    foreach (hist[a, b]) hist[a][b] = 0;
    ns = 0; acc0 = n_acc;
    for (int t = 0; t < ITER; t++) begin
      step();
      if (t >= BURN) begin
        int a, b;
        // first two dimensions: bank 0 row 0 and, for n = 2, bank 1 row 0
        a = (rows[0][0].x + 128) / 16;
        b = ((n == 2 ? rows[1][0].x : rows[0][1].x) + 128) / 16;
        if (a >= 0 && a < 16 && b >= 0 && b < 16) hist[a][b]++;
        ns++;
      end
    end
    ptot = 0;
    foreach (hist[a, b]) ptot += bin_p(a, b, d);
    kl = 0;
    foreach (hist[a, b])
      if (hist[a][b] > 0) begin
        q = real'(hist[a][b]) / ns;
        kl += q * $ln(q / (bin_p(a, b, d) / ptot));
      end
    $display("INFO DAC=%0d ADC=%0d N=%0d d=%0d r_shift=%0d accepted=%0d/%0d KL(samples||mixture)=%f",
             DAC_BITS, ADC_BITS, n, d, r_shift, n_acc - acc0, ITER, kl);
  endtask

  initial begin
    int cyc;
    done = 0; checks = 0; failures = 0;
    u_ref = 16'hACE1;
    n_rows[0] = 0; n_rows[1] = 0;
    for (int j = 0; j < M; j++) begin host_mu[j] = 0; host_isig[j] = 0; c_log[j] = 0; e_init[j] = 0; end
    host_x = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    cal_start = 1; @(negedge clk); cal_start = 0;
    cyc = 0;
    while (!cal_done && cyc < 20000) begin @(negedge clk); cyc++; end
    chk(cal_done, "calibration finished");
    run_workload(2, 1);
    if (WIDE != 0) begin
      for (int d = 2; d <= 5; d++) run_workload(2, d);
      for (int n = 3; n <= 6; n++) run_workload(n, 1);
    end
    chk(n_acc > 0, "some candidates accepted");
    done = 1;
  end
endmodule
