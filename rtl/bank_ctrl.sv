// bank_ctrl: sequencer of one MC2RAM compute bank for one Metropolis-Hastings
// iteration.
//
// Using the incremental exponent update
//     E_j(t) = E_j(t-1) + R.(R/sigma_j^2) + 2 (x_{t-1} - mu_j).(R/sigma_j^2)
// the bank only has to deliver, per component j, the partial term
//     dE_j = sum_i R_i v_ij + 2 sum_i (x_i - mu_ij) v_ij,  v_ij = R_i/sigma_ij^2
// over its active rows. On start the controller
//  1. GEN:  fires the RNG column once (fresh R_i in every row) and clears the
//           DAC-operand buffer;
//  2. COPY: reads rows 0..n_rows-1 through the R/W port and loads R_i and
//           1/sigma_ij^2 into the buffer; it flags ovf when some x_i + R_i
//           leaves the range of x (the candidate is then rejected);
//  3. CONV: for j = 0..M-1 clears the Output REG and issues one column
//           conversion per cycle, 2*(RB + 2*XB) = 40 in all: the R, x and mu_j
//           bit columns, first with the positive-operand rows driven, then
//           with the negative ones. Each conversion carries a tag with the
//           column's weight (bit position + 1 for the factor 2 of the x and mu
//           terms + r_shift + DAC_SHIFT) and its sign (MSB of two's complement,
//           negative phase, subtraction of mu); DRAIN waits for the pipeline
//           (hold 1 + ADC 2 + ADC REG 1 + adder 1) and stores dE_j;
//  4. done goes high and dE/ovf stay valid until update. On update with
//     accept the rows are written back with x_i + R_i (read, then write).
// Cycles per iteration: 1 + (n_rows + 1) + M * (40 + 6) + 2 * n_rows on accept.
// The three steps follow the source's block diagram; the schedule, the two
// sign phases and the overflow rule are this design's own.
module bank_ctrl
  import mc2_pkg::*;
#(
  parameter int unsigned ROWS     = 32,
  parameter int unsigned M        = 2,
  parameter int unsigned DAC_BITS = 8,
  localparam int unsigned NC = ncols(M),
  localparam int unsigned AW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned JW = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned SW = (NC > 1) ? $clog2(NC) : 1,
  localparam int unsigned DAC_SHIFT = (DAC_BITS >= VMAG) ? 0 : VMAG - DAC_BITS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW:0]   n_rows,
  input  logic [3:0]    r_shift,
  input  logic          update,
  input  logic          accept,
  output logic          busy,
  output logic          done,      // dE and ovf valid, waiting for update
  output logic          wb_done,   // pulse: iteration finished in this bank
  output eval_t         de [M],
  output logic          ovf,
  // R/W port of the array
  output logic          rw_en,
  output logic          rw_we_x,
  output logic [AW-1:0] rw_row,
  output xval_t         wr_x,
  input  xval_t         rd_x,
  input  rval_t         rd_r,
  // RNG column and DAC-operand buffer
  output logic          rng_eval,
  output logic          buf_clear,
  output logic          buf_ld,
  output logic [AW-1:0] buf_row,
  output logic [JW-1:0] comp,
  output logic          neg_phase,
  // column conversion pipeline
  output logic [SW-1:0] col_sel,
  output logic          col_en,
  output logic          sample,     // hold cell Clk
  output logic          adc_start,
  output conv_tag_t     acc_tag,    // aligned with the ADC output
  output logic          acc_clear,
  input  eval_t         acc
);
  localparam int unsigned CPP   = RB + 2 * XB;   // conversions per phase
  localparam int unsigned NCONV = 2 * CPP;
  localparam int unsigned DRAIN = 5;

  typedef enum logic [2:0] {S_IDLE, S_GEN, S_COPY, S_CONV, S_DRAIN, S_WAIT, S_WB_RD, S_WB_WR} state_t;
  state_t st;

  logic [AW:0]   row_cnt;
  logic          rd_pending;
  logic [AW-1:0] rd_row_q;
  logic [5:0]    k;
  logic [2:0]    drain_cnt;
  logic          issue;
  conv_tag_t     tag_now;
  conv_tag_t     tag_d1, tag_d2;
  logic          issue_d1;

  // Column and tag of conversion k of component comp.
  always_comb begin
    int unsigned idx, b;
    logic ph, msb;
    ph  = (32'(k) >= CPP);
    idx = ph ? 32'(k) - CPP : 32'(k);
    tag_now = '0;
    col_sel = '0;
    if (idx < RB) begin
      b = idx;
      msb = (b == RB - 1);
      col_sel = SW'(col_r(M, b));
      tag_now.shift = 5'(b + 32'(r_shift) + DAC_SHIFT);
      tag_now.neg   = msb ^ ph;
    end else if (idx < RB + XB) begin
      b = idx - RB;
      msb = (b == XB - 1);
      col_sel = SW'(col_x(M, b));
      tag_now.shift = 5'(b + 1 + 32'(r_shift) + DAC_SHIFT);
      tag_now.neg   = msb ^ ph;
    end else begin
      b = idx - RB - XB;
      msb = (b == XB - 1);
      col_sel = SW'(col_mu(32'(comp), b));
      tag_now.shift = 5'(b + 1 + 32'(r_shift) + DAC_SHIFT);
      tag_now.neg   = ~(msb ^ ph);
    end
    neg_phase = ph;
  end

  assign issue     = (st == S_CONV);
  assign col_en    = issue;
  assign sample    = issue;
  assign busy      = (st != S_IDLE);
  assign done      = (st == S_WAIT);
  assign rng_eval  = (st == S_GEN);
  assign buf_clear = (st == S_GEN);
  assign buf_ld    = rd_pending;
  assign buf_row   = rd_row_q;

  // Candidate range check on the row just read.
  logic signed [XB:0] cand_sum;
  logic               cand_ovf;
  assign cand_sum = (XB+1)'(rd_x) + (XB+1)'(rd_r);
  assign cand_ovf = (cand_sum[XB] != cand_sum[XB-1]);

  // rw port
  always_comb begin
    rw_en   = 1'b0;
    rw_we_x = 1'b0;
    rw_row  = '0;
    wr_x    = rd_x + xval_t'(rd_r);
    if (st == S_COPY && row_cnt < n_rows) begin
      rw_en  = 1'b1;
      rw_row = AW'(row_cnt);
    end else if (st == S_WB_RD) begin
      rw_en  = 1'b1;
      rw_row = AW'(row_cnt);
    end else if (st == S_WB_WR) begin
      rw_en   = 1'b1;
      rw_we_x = 1'b1;
      rw_row  = AW'(row_cnt);
    end
  end

  // conversion pipeline alignment: issue at t, hold valid t+1, ADC out t+3
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issue_d1 <= 1'b0; tag_d1 <= '0; tag_d2 <= '0; acc_tag <= '0;
    end else begin
      issue_d1 <= issue;
      tag_d1   <= tag_now;
      tag_d2   <= tag_d1;
      acc_tag  <= tag_d2;
    end
  end
  assign adc_start = issue_d1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      row_cnt    <= '0;
      rd_pending <= 1'b0;
      rd_row_q   <= '0;
      k          <= '0;
      comp       <= '0;
      drain_cnt  <= '0;
      ovf        <= 1'b0;
      acc_clear  <= 1'b0;
      wb_done    <= 1'b0;
      for (int j = 0; j < M; j++) de[j] <= '0;
    end else begin
      acc_clear  <= 1'b0;
      wb_done    <= 1'b0;
      rd_pending <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          st      <= S_GEN;
          ovf     <= 1'b0;
          row_cnt <= '0;
        end
        S_GEN: st <= S_COPY;
        S_COPY: begin
          if (row_cnt < n_rows) begin
            rd_pending <= 1'b1;
            rd_row_q   <= AW'(row_cnt);
            row_cnt    <= row_cnt + 1'b1;
          end
          if (rd_pending && cand_ovf) ovf <= 1'b1;
          if (row_cnt >= n_rows && !rd_pending) begin
            st        <= S_CONV;
            k         <= '0;
            comp      <= '0;
            acc_clear <= 1'b1;
          end
        end
        S_CONV: begin
          if (32'(k) == NCONV - 1) begin
            st        <= S_DRAIN;
            drain_cnt <= '0;
          end else begin
            k <= k + 1'b1;
          end
        end
        S_DRAIN: begin
          if (32'(drain_cnt) == DRAIN - 1) begin
            de[comp] <= acc;
            if (32'(comp) == M - 1) begin
              st <= S_WAIT;
            end else begin
              comp      <= comp + 1'b1;
              k         <= '0;
              acc_clear <= 1'b1;
              st        <= S_CONV;
            end
          end else begin
            drain_cnt <= drain_cnt + 1'b1;
          end
        end
        S_WAIT: if (update) begin
          if (accept && n_rows != 0) begin
            st      <= S_WB_RD;
            row_cnt <= '0;
          end else begin
            st      <= S_IDLE;
            wb_done <= 1'b1;
          end
        end
        S_WB_RD: st <= S_WB_WR;
        S_WB_WR: begin
          if (row_cnt + 1'b1 >= n_rows) begin
            st      <= S_IDLE;
            wb_done <= 1'b1;
          end else begin
            row_cnt <= row_cnt + 1'b1;
            st      <= S_WB_RD;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // An update is only meaningful while the partial terms are held.
  a_update_in_wait: assert property (@(posedge clk) disable iff (!rst_n) update |-> (st == S_WAIT || st == S_IDLE));
  a_rows_fit: assert property (@(posedge clk) disable iff (!rst_n) start |-> (32'(n_rows) <= ROWS));
endmodule
