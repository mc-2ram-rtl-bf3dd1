// tb_sram_array: writes random rows through the R/W port, reads them back
// (one-cycle read latency), and checks every product-port column current
// against sum_i i_row[i] * bit(i, c) computed from a shadow copy; also checks
// that the RNG column changes on rng_eval and is read back consistently.
module tb_sram_array;
  import mc2_pkg::*;
  localparam int ROWS = 32, M = 2, NC = ncols(M);
  logic clk = 0, rst_n = 0;
  logic rw_en = 0, rw_we_mu = 0, rw_we_x = 0;
  logic [4:0] rw_row = 0;
  xval_t wr_mu [M]; isig_t wr_isig [M]; xval_t wr_x;
  xval_t rd_mu [M]; isig_t rd_isig [M]; xval_t rd_x; rval_t rd_r;
  logic rng_eval = 0;
  cur_t i_row [ROWS];
  cur_t i_col [NC];
  xval_t s_mu [ROWS][M]; isig_t s_isig [ROWS][M]; xval_t s_x [ROWS]; rval_t s_r [ROWS];
  int checks = 0, failures = 0, r_changes = 0;

  sram_array #(.ROWS(ROWS), .M(M)) dut (.clk, .rst_n, .rw_en, .rw_we_mu, .rw_we_x, .rw_row,
    .wr_mu, .wr_isig, .wr_x, .rd_mu, .rd_isig, .rd_x, .rd_r, .rng_eval, .rng_en(1'b1), .i_row, .i_col);
  always #5 clk = ~clk;

  task automatic chk(logic c, string msg);
    checks++; if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic bitof(int r, int c);
    for (int j = 0; j < M; j++) begin
      if (c >= j * XB && c < (j + 1) * XB) return s_mu[r][j][c - j * XB];
      if (c >= M * XB + XB + RB + j * SB && c < M * XB + XB + RB + (j + 1) * SB)
        return s_isig[r][j][c - (M * XB + XB + RB + j * SB)];
    end
    if (c >= M * XB && c < M * XB + XB) return s_x[r][c - M * XB];
    return s_r[r][c - M * XB - XB];
  endfunction

  task automatic read_all_r();
    for (int r = 0; r < ROWS; r++) begin
      rw_en = 1; rw_we_mu = 0; rw_we_x = 0; rw_row = 5'(r);
      @(negedge clk);
      s_r[r] = rd_r;
      chk(rd_r != 4'b1000, "step is symmetric (no -8)");
      chk(rd_x == s_x[r], "read x");
      for (int j = 0; j < M; j++) begin
        chk(rd_mu[j] == s_mu[r][j], "read mu");
        chk(rd_isig[j] == s_isig[r][j], "read isig");
      end
    end
    rw_en = 0;
  endtask

  task automatic check_currents();
    for (int n = 0; n < 20; n++) begin
      for (int r = 0; r < ROWS; r++) i_row[r] = ($urandom_range(0, 3) == 0) ? 16'd0 : 16'($urandom_range(0, 255));
      #1;
      for (int c = 0; c < NC; c++) begin
        int e;
        e = 0;
        for (int r = 0; r < ROWS; r++) if (bitof(r, c)) e += int'(i_row[r]);
        chk(int'(i_col[c]) == e, $sformatf("column %0d current %0d exp %0d", c, i_col[c], e));
      end
    end
  endtask

  initial begin
    #10000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) i_row[r] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      for (int j = 0; j < M; j++) begin wr_mu[j] = xval_t'($urandom); wr_isig[j] = isig_t'($urandom); end
      wr_x = xval_t'($urandom);
      rw_en = 1; rw_we_mu = 1; rw_we_x = 1; rw_row = 5'(r);
      s_mu[r] = wr_mu; s_isig[r] = wr_isig; s_x[r] = wr_x;
      @(negedge clk);
    end
    // x-only write leaves mu untouched
    wr_x = 8'h5a; for (int j = 0; j < M; j++) wr_mu[j] = 8'h11;
    rw_en = 1; rw_we_mu = 0; rw_we_x = 1; rw_row = 5'd3; s_x[3] = 8'h5a; @(negedge clk);
    rw_en = 0; rw_we_x = 0;
    read_all_r();
    check_currents();
    for (int k = 0; k < 4; k++) begin
      rval_t old [ROWS];
      old = s_r;
      rng_eval = 1; @(negedge clk); rng_eval = 0;
      read_all_r();
      for (int r = 0; r < ROWS; r++) if (old[r] != s_r[r]) r_changes++;
      check_currents();
    end
    chk(r_changes > 2 * ROWS, "RNG column refreshes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
