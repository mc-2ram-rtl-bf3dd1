// tb_bank_ctrl: drives the bank sequencer with a behavioural R/W port (one
// cycle read latency) and checks: the rows read in COPY and loaded into the
// buffer, the RNG pulse and buffer clear, the exact list of 40 column
// selections with their weight/sign tags per component, the tag delay of
// three cycles to the accumulator, the capture of the accumulator into dE_j,
// the overflow flag, the write-back of x + R on accept and none on reject,
// and the cycle counts (1 + n_rows + 1 + M*46 to done; one less for n_rows = 0).
module tb_bank_ctrl;
  import mc2_pkg::*;
  localparam int ROWS = 32, M = 2, NC = ncols(M);
  logic clk = 0, rst_n = 0, start = 0, update = 0, accept = 0;
  logic [5:0] n_rows;
  logic [3:0] r_shift;
  logic busy, done, wb_done, ovf, rw_en, rw_we_x, rng_eval, buf_clear, buf_ld, neg_phase;
  logic col_en, sample, adc_start, acc_clear;
  eval_t de [M];
  logic [4:0] rw_row, buf_row;
  xval_t wr_x, rd_x;
  rval_t rd_r;
  logic comp;
  logic [5:0] col_sel;
  conv_tag_t acc_tag;
  eval_t acc;
  xval_t mx [ROWS]; rval_t mr [ROWS];
  int checks = 0, failures = 0;
  int issued_col [$]; conv_tag_t issued_tag [$]; conv_tag_t seen_tag [$];
  int loads [$]; int writes [$];

  bank_ctrl #(.ROWS(ROWS), .M(M), .DAC_BITS(8)) dut (.clk, .rst_n, .start, .n_rows, .r_shift, .update, .accept,
    .busy, .done, .wb_done, .de, .ovf, .rw_en, .rw_we_x, .rw_row, .wr_x, .rd_x, .rd_r,
    .rng_eval, .buf_clear, .buf_ld, .buf_row, .comp, .neg_phase,
    .col_sel, .col_en, .sample, .adc_start, .acc_tag, .acc_clear, .acc);
  always #5 clk = ~clk;

  task automatic chk(logic c, string msg);
    checks++; if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // behavioural R/W port
  always_ff @(posedge clk) begin
    if (rw_en && !rw_we_x) begin rd_x <= mx[rw_row]; rd_r <= mr[rw_row]; end
    if (rw_en && rw_we_x) begin mx[rw_row] <= wr_x; writes.push_back(int'(rw_row)); end
    if (buf_ld) loads.push_back(int'(buf_row));
    if (col_en) begin issued_col.push_back(int'(col_sel)); issued_tag.push_back(dut.tag_now); end
  end
  // tag seen three cycles after issue
  logic [2:0] en_d;
  always_ff @(posedge clk) begin
    en_d <= {en_d[1:0], col_en};
    if (en_d[2]) seen_tag.push_back(acc_tag);
  end
  // accumulator stand-in: a value unique to the component
  assign acc = eval_t'(1000 + 17 * int'(comp));

  task automatic run(int n, int rs, bit acc_q);
    int cyc, exp_cyc;
    bit exp_ovf;
    xval_t x_old [ROWS];
    issued_col.delete(); issued_tag.delete(); seen_tag.delete(); loads.delete(); writes.delete();
    for (int i = 0; i < ROWS; i++) begin mr[i] = rval_t'($urandom); end
    x_old = mx;
    n_rows = 6'(n); r_shift = 4'(rs);
    start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 2000) begin @(negedge clk); cyc++; end
    exp_cyc = 1 + n + ((n > 0) ? 1 : 0) + M * 46;
    chk(cyc == exp_cyc, $sformatf("cycles %0d exp %0d", cyc, exp_cyc));
    chk(loads.size() == n, "rows loaded");
    for (int i = 0; i < loads.size(); i++) chk(loads[i] == i, "load order");
    chk(issued_col.size() == M * 40, $sformatf("conversions %0d", issued_col.size()));
    for (int j = 0; j < M; j++) for (int k = 0; k < 40; k++) begin
      int idx, b, col, sh; bit ng, ph;
      ph = (k >= 20); idx = k % 20;
      if (idx < 4) begin b = idx; col = col_r(M, b); sh = b + rs; ng = (b == 3) ^ ph; end
      else if (idx < 12) begin b = idx - 4; col = col_x(M, b); sh = b + 1 + rs; ng = (b == 7) ^ ph; end
      else begin b = idx - 12; col = col_mu(j, b); sh = b + 1 + rs; ng = !((b == 7) ^ ph); end
      chk(issued_col[j * 40 + k] == col, $sformatf("column j%0d k%0d", j, k));
      chk(issued_tag[j * 40 + k].shift == 5'(sh) && issued_tag[j * 40 + k].neg == ng, $sformatf("tag j%0d k%0d", j, k));
      chk(seen_tag[j * 40 + k] == issued_tag[j * 40 + k], "tag delay of three cycles");
    end
    for (int j = 0; j < M; j++) chk(de[j] == eval_t'(1000 + 17 * j), "dE capture");
    exp_ovf = 0;
    for (int i = 0; i < n; i++) begin
      int s; s = int'(mx[i]) + int'(mr[i]);
      if (s > 127 || s < -128) exp_ovf = 1;
    end
    chk(ovf == exp_ovf, "ovf");
    update = 1; accept = acc_q; @(negedge clk); update = 0;
    cyc = 1;
    while (busy && cyc < 200) begin @(negedge clk); cyc++; end
    chk(cyc == ((acc_q && n > 0) ? 2 * n + 1 : 1), $sformatf("write-back cycles %0d", cyc));
    chk(writes.size() == (acc_q ? n : 0), "write count");
    for (int i = 0; i < ROWS; i++) begin
      xval_t e;
      e = (acc_q && i < n) ? xval_t'(x_old[i] + xval_t'(mr[i])) : x_old[i];
      chk(mx[i] == e, $sformatf("x row %0d", i));
    end
  endtask

  initial begin
    #10000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    en_d = 0;
    for (int i = 0; i < ROWS; i++) mx[i] = xval_t'($urandom);
    mx[0] = 8'sd127;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 12; k++) run((k == 5) ? ROWS : $urandom_range(0, 6), $urandom_range(0, 4), k[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
