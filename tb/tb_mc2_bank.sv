// tb_mc2_bank: one compute bank end to end. After DAC calibration (the
// default model has a -3/64 mirror error, which calibration must remove) it
// runs iterations with random rows, active-row counts and op-amp ranges, and
// compares dE_j with the reference model of the bit-column datapath; in an
// unsaturated case also with the exact formula. It checks the overflow flag,
// the write-back x + R on accept, that x is kept on reject, and the cycle
// count from start to done: 1 + (n_rows + 1) + M * 46.
module tb_mc2_bank;
  import mc2_pkg::*;
  import mc2_ref_pkg::*;
  localparam int ROWS = 32, M = 2;
  logic clk = 0, rst_n = 0;
  logic host_en = 0, host_we_mu = 0, host_we_x = 0;
  logic [4:0] host_row = 0;
  xval_t host_mu [M]; isig_t host_isig [M]; xval_t host_x;
  xval_t rd_mu [M]; isig_t rd_isig [M]; xval_t rd_x; rval_t rd_r;
  logic [5:0] n_rows = 0;
  logic [3:0] r_shift = 0;
  logic cal_start = 0, cal_busy, cal_done;
  logic start = 0, update = 0, accept = 0, busy, done, wb_done, ovf, adc_over;
  eval_t de [M];
  row_t rows [];
  int checks = 0, failures = 0, sat_dummy = 0;
  int n_ovf = 0, n_acc = 0, n_sat = 0;

  mc2_bank dut (.clk, .rst_n, .host_en, .host_we_mu, .host_we_x, .host_row, .host_mu, .host_isig, .host_x,
    .host_rd_mu(rd_mu), .host_rd_isig(rd_isig), .host_rd_x(rd_x), .host_rd_r(rd_r),
    .n_rows, .r_shift, .cal_start, .cal_busy, .cal_done,
    .start, .update, .accept, .busy, .done, .wb_done, .de, .ovf, .adc_over);
  always #5 clk = ~clk;
  always @(posedge clk) if (adc_over) n_sat++;

  task automatic chk(logic c, string msg);
    checks++; if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic write_row(int i, row_t rw);
    host_en = 1; host_we_mu = 1; host_we_x = 1; host_row = 5'(i);
    for (int j = 0; j < M; j++) begin host_mu[j] = xval_t'(rw.mu[j]); host_isig[j] = isig_t'(rw.isig[j]); end
    host_x = xval_t'(rw.x);
    @(negedge clk);
    host_en = 0; host_we_mu = 0; host_we_x = 0;
  endtask

  task automatic read_row(int i, output int r, output int x);
    host_en = 1; host_row = 5'(i);
    @(negedge clk);
    host_en = 0;
    r = int'(rd_r); x = int'(rd_x);
  endtask

  task automatic iterate(int n, int rs, bit acc, bit ideal);
    int cyc, exp_cyc;
    longint e;
    bit exp_ovf;
    int r_new [], x_new [];
    n_rows = 6'(n); r_shift = 4'(rs);
    start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 5000) begin @(negedge clk); cyc++; end
    exp_cyc = 1 + (n + 1) + M * 46;
    chk(cyc == exp_cyc, $sformatf("cycles start->done %0d exp %0d", cyc, exp_cyc));
    update = 1; accept = acc; @(negedge clk); update = 0;
    while (busy) @(negedge clk);
    r_new = new[n]; x_new = new[n];
    for (int i = 0; i < n; i++) read_row(i, r_new[i], x_new[i]);
    exp_ovf = 0;
    for (int i = 0; i < n; i++) begin
      int s;
      rows[i].r = r_new[i];
      s = rows[i].x + rows[i].r;
      if (s > 127 || s < -128) exp_ovf = 1;
    end
    chk(ovf == exp_ovf, "overflow flag");
    n_ovf += exp_ovf;
    for (int j = 0; j < M; j++) begin
      e = bank_de(rows, n, j, rs, 8, 6, 64, sat_dummy);
      chk(longint'(de[j]) == e, $sformatf("dE_%0d = %0d exp %0d (n=%0d rs=%0d)", j, de[j], e, n, rs));
      if (ideal) chk(longint'(de[j]) == exact_de(rows, n, j), "dE exact");
    end
    for (int i = 0; i < n; i++) begin
      int xe;
      xe = acc ? int'(xval_t'(rows[i].x + rows[i].r)) : rows[i].x;
      chk(x_new[i] == xe, $sformatf("x row %0d = %0d exp %0d", i, x_new[i], xe));
      rows[i].x = x_new[i];
    end
    n_acc += acc;
  endtask

  initial begin
    #50000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int cyc;
    repeat (2) @(negedge clk); rst_n = 1;
    cal_start = 1; @(negedge clk); cal_start = 0;
    cyc = 1;
    while (!cal_done && cyc < 10000) begin @(negedge clk); cyc++; end
    chk(cal_done, "calibration done");
    for (int i = 0; i < ROWS; i++) chk(dut.cal[i] == 4'd3, "calibration code 3 removes -3/64 error");
    rows = new[ROWS];
    for (int i = 0; i < ROWS; i++) begin
      rows[i].x = $urandom_range(0, 255) - 128;
      rows[i].r = 0;
      for (int j = 0; j < M; j++) begin rows[i].mu[j] = $urandom_range(0, 255) - 128; rows[i].isig[j] = $urandom_range(0, 15); end
      write_row(i, rows[i]);
    end
    // ideal case: one row, tiny inverse variance, no ADC clipping or rounding
    rows[0].isig[0] = 1; rows[0].isig[1] = 1; write_row(0, rows[0]);
    for (int k = 0; k < 6; k++) iterate(1, 0, k[0], 1);
    for (int k = 0; k < 30; k++) begin
      int n;
      n = (k % 3 == 0) ? ROWS : $urandom_range(1, 8);
      iterate(n, $urandom_range(0, 5), $urandom_range(0, 1), 0);
    end
    // drive a row to the edge so that the candidate overflows
    rows[1].x = 127; write_row(1, rows[1]);
    for (int k = 0; k < 8; k++) iterate(2, 2, 0, 0);
    chk(n_ovf > 0, "overflow seen");
    chk(n_sat > 0, "ADC saturation seen");
    chk(n_acc > 0, "write-back seen");
    $display("INFO overflows=%0d saturations=%0d accepts=%0d", n_ovf, n_sat, n_acc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
