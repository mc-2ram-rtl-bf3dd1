// sram_array: 8-T SRAM array of one MC2RAM bank, with the SRAM-embedded RNG
// column and the current-mode product port.
//
// Each of the ROWS rows stores mu_ij for the M components, x_{t-1,i},
// 1/sigma_ij^2 and a random step R_i whose RB bits are rng_cell instances
// (see mc2_pkg for the column order). Two ports:
//  * Normal read/write port (BL1/BL2 side): one row per access. A read
//    returns every field of the row one cycle after rw_en; a write updates
//    the fields whose write enable is set. R is written only by its RNG cells.
//  * Product port (the extra transistors M1/M2 of the 8-T cell): the row DAC
//    current i_row[i] is placed on the product word line of row i, and a cell
//    that stores '1' lets it through to its column's product bit line. The
//    column current i_col[c] is therefore sum_i i_row[i] * bit(i, c),
//    combinational, in units of one DAC LSB current. This is the paper's
//    "memory cell as current-mode AND gate"; analog leakage and V_TH spread
//    are not modelled.
// R is read symmetric about zero: the RNG word 1000 (-8) counts as 0, so R_i
// takes -7..+7 (this design's choice; an offset proposal would bias the
// chain). Seeds of the RNG cells differ by bank (BANK_ID), row and bit.
// The storage cells are not reset, as in an SRAM; the R/W read register and
// the RNG cells are.
module sram_array
  import mc2_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  parameter int unsigned M    = 2,
  parameter int unsigned BANK_ID = 0,   // makes the noise seeds differ per bank
  localparam int unsigned NC  = ncols(M),
  localparam int unsigned AW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // normal read/write port
  input  logic          rw_en,
  input  logic          rw_we_mu,     // write mu_ij and 1/sigma_ij^2 of the row
  input  logic          rw_we_x,      // write x_{t-1,i}
  input  logic [AW-1:0] rw_row,
  input  xval_t         wr_mu   [M],
  input  isig_t         wr_isig [M],
  input  xval_t         wr_x,
  output xval_t         rd_mu   [M],
  output isig_t         rd_isig [M],
  output xval_t         rd_x,
  output rval_t         rd_r,
  // RNG column
  input  logic          rng_eval,
  input  logic          rng_en,
  // product port
  input  cur_t          i_row [ROWS],
  output cur_t          i_col [NC]
);
  xval_t mem_mu   [ROWS][M];
  isig_t mem_isig [ROWS][M];
  xval_t mem_x    [ROWS];
  rval_t r_raw    [ROWS];   // RNG cell outputs
  rval_t r_bits   [ROWS];   // symmetric step: the code 1000 (-8) reads as 0

  // SRAM-embedded random number generators: one cell per bit of R.
  for (genvar r = 0; r < ROWS; r++) begin : g_rng_row
    for (genvar b = 0; b < RB; b++) begin : g_rng_bit
      logic qb_unused;
      rng_cell #(.SEED(32'h9E37_79B9 * ((BANK_ID * ROWS + r) * RB + b + 1) + 32'h1234_5677)) u_rng (
        .clk   (clk),
        .rst_n (rst_n),
        .eval  (rng_eval),
        .rng_en(rng_en),
        .q     (r_raw[r][b]),
        .qb    (qb_unused)
      );
    end
    // A 4-bit two's-complement word spans -8..+7, whose mean is not zero; a
    // biased proposal would shift the Metropolis-Hastings stationary
    // distribution. Reading -8 as 0 gives a step symmetric about zero.
    assign r_bits[r] = (r_raw[r] == {1'b1, {(RB-1){1'b0}}}) ? '0 : r_raw[r];
  end

  // Normal read/write port.
  always_ff @(posedge clk) begin
    if (rw_en && rw_we_mu) begin
      mem_mu[rw_row]   <= wr_mu;
      mem_isig[rw_row] <= wr_isig;
    end
    if (rw_en && rw_we_x) mem_x[rw_row] <= wr_x;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < M; j++) begin
        rd_mu[j]   <= '0;
        rd_isig[j] <= '0;
      end
      rd_x <= '0;
      rd_r <= '0;
    end else if (rw_en && !rw_we_mu && !rw_we_x) begin
      rd_mu   <= mem_mu[rw_row];
      rd_isig <= mem_isig[rw_row];
      rd_x    <= mem_x[rw_row];
      rd_r    <= r_bits[rw_row];
    end
  end

  // Product port: bit-line current of every column.
  logic [NC-1:0] cell_bits [ROWS];
  for (genvar r = 0; r < ROWS; r++) begin : g_bits
    for (genvar j = 0; j < M; j++) begin : g_mu
      assign cell_bits[r][col_mu(j, 0) +: XB]      = mem_mu[r][j];
      assign cell_bits[r][col_isig(M, j, 0) +: SB] = mem_isig[r][j];
    end
    assign cell_bits[r][col_x(M, 0) +: XB] = mem_x[r];
    assign cell_bits[r][col_r(M, 0) +: RB] = r_bits[r];
  end

  always_comb begin
    for (int unsigned c = 0; c < NC; c++) begin
      i_col[c] = '0;
      for (int unsigned r = 0; r < ROWS; r++)
        if (cell_bits[r][c]) i_col[c] = i_col[c] + i_row[r];
    end
  end
endmodule
