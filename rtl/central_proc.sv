// central_proc: central processing layer of MC2RAM - sums the partial
// exponent updates of all banks, evaluates the mixture log density before and
// after the proposed step and makes the Metropolis-Hastings decision.
//
// Per component j it keeps E_j(t-1), the squared normalised distance of the
// current sample from mu_j (Q10). For the candidate E_j(t) = E_j(t-1) +
// sum over banks of dE_j. The log density of the mixture is
//     L(x) = ln sum_j exp(c_j - E_j/2),   c_j = ln p_j - sum_i ln sigma_ij,
// folded pairwise through the external log-add LUT (one log-add per cycle,
// L(x_{t-1}) and L(x_cand) alternately). The candidate is accepted when no
// bank reports an out-of-range candidate and L(x_cand) - L(x_{t-1}) > ln U,
// which is F(x_cand)/F(x_{t-1}) > U in the log domain. The decision is sent
// to the banks (update/accept), the uniform generator is advanced, E_j is
// replaced by the candidate's on accept, and sample_valid pulses once the
// banks have written x back. run starts num_iter iterations; e_load (idle
// only) loads E_j(0) of the initial sample; c_j are static inputs. Both are
// this design's own conventions. Cycles added per iteration:
// 1 start + 1 sum + 2(M-1) log-adds + 1 decision + 1 finish.
module central_proc
  import mc2_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 2,
  parameter int unsigned M         = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  eval_t       c_log  [M],
  input  eval_t       e_init [M],
  input  logic        e_load,
  input  logic        run,
  input  logic [15:0] num_iter,
  output logic        busy,
  output logic        sample_valid,
  output logic        sample_accept,
  output logic        sample_ovf,
  output eval_t       e_cur [M],
  output eval_t       l_cur,
  // banks
  output logic        bank_start,
  input  logic        bank_done    [NUM_BANKS],
  input  eval_t       bank_de      [NUM_BANKS][M],
  input  logic        bank_ovf     [NUM_BANKS],
  output logic        bank_update,
  output logic        bank_accept,
  input  logic        bank_wb_done [NUM_BANKS],
  // log-add LUT
  output eval_t       lse_a,
  output eval_t       lse_b,
  input  eval_t       lse_y,
  // uniform random number generator
  output logic        u_next,
  input  eval_t       ln_u
);
  typedef enum logic [2:0] {P_IDLE, P_START, P_WAITB, P_SUM, P_LSE, P_DECIDE, P_WAITWB, P_FINISH} pstate_t;
  pstate_t st;

  localparam int unsigned JW = (M > 1) ? $clog2(M) + 1 : 1;
  logic [15:0]   iter_left;
  eval_t         e_cand [M];
  eval_t         acc_p, acc_c;
  logic [JW-1:0] j;
  logic          sel_c;
  logic          ovf_any;
  logic          wb_seen [NUM_BANKS];
  logic          all_done, all_wb;

  function automatic eval_t term(eval_t c, eval_t e);
    return c - (e >>> 1);
  endfunction

  always_comb begin
    all_done = 1'b1;
    all_wb   = 1'b1;
    for (int b = 0; b < NUM_BANKS; b++) begin
      all_done = all_done & bank_done[b];
      all_wb   = all_wb & (wb_seen[b] | bank_wb_done[b]);
    end
  end

  eval_t e_sum [M];
  logic  acc_ok;
  always_comb begin
    for (int m = 0; m < M; m++) begin
      e_sum[m] = e_cur[m];
      for (int b = 0; b < NUM_BANKS; b++) e_sum[m] = e_sum[m] + bank_de[b][m];
    end
  end
  assign acc_ok = !ovf_any && ((acc_c - acc_p) > ln_u);

  assign lse_a = sel_c ? acc_c : acc_p;
  assign lse_b = (32'(j) < M) ? (sel_c ? term(c_log[j[JW-2:0]], e_cand[j[JW-2:0]])
                                       : term(c_log[j[JW-2:0]], e_cur[j[JW-2:0]])) : '0;
  assign busy  = (st != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_IDLE;
      iter_left <= '0;
      for (int m = 0; m < M; m++) begin
        e_cur[m]  <= '0;
        e_cand[m] <= '0;
      end
      acc_p <= '0; acc_c <= '0; j <= '0; sel_c <= 1'b0; ovf_any <= 1'b0;
      l_cur <= '0;
      bank_start <= 1'b0; bank_update <= 1'b0; bank_accept <= 1'b0; u_next <= 1'b0;
      sample_valid <= 1'b0; sample_accept <= 1'b0; sample_ovf <= 1'b0;
      for (int b = 0; b < NUM_BANKS; b++) wb_seen[b] <= 1'b0;
    end else begin
      bank_start   <= 1'b0;
      bank_update  <= 1'b0;
      u_next       <= 1'b0;
      sample_valid <= 1'b0;
      unique case (st)
        P_IDLE: begin
          if (e_load) e_cur <= e_init;
          if (run && num_iter != 0) begin
            iter_left <= num_iter;
            st <= P_START;
          end
        end
        P_START: begin
          bank_start <= 1'b1;
          st <= P_WAITB;
        end
        P_WAITB: if (all_done && !bank_start) st <= P_SUM;
        P_SUM: begin
          ovf_any <= 1'b0;
          e_cand <= e_sum;
          for (int b = 0; b < NUM_BANKS; b++) if (bank_ovf[b]) ovf_any <= 1'b1;
          st    <= P_LSE;
          j     <= JW'(0);
          sel_c <= 1'b0;
        end
        P_LSE: begin
          // j = 0: initialise both folds with component 0
          if (j == 0) begin
            if (!sel_c) acc_p <= lse_b; else acc_c <= lse_b;
          end else begin
            if (!sel_c) acc_p <= lse_y; else acc_c <= lse_y;
          end
          sel_c <= ~sel_c;
          if (sel_c) begin
            if (32'(j) == M - 1) st <= P_DECIDE;
            else j <= j + 1'b1;
          end
        end
        P_DECIDE: begin
          bank_update   <= 1'b1;
          bank_accept   <= acc_ok;
          sample_accept <= acc_ok;
          sample_ovf    <= ovf_any;
          u_next        <= 1'b1;
          if (acc_ok) begin
            e_cur <= e_cand;
            l_cur <= acc_c;
          end else begin
            l_cur <= acc_p;
          end
          for (int b = 0; b < NUM_BANKS; b++) wb_seen[b] <= 1'b0;
          st <= P_WAITWB;
        end
        P_WAITWB: begin
          for (int b = 0; b < NUM_BANKS; b++) if (bank_wb_done[b]) wb_seen[b] <= 1'b1;
          if (all_wb && !bank_update) st <= P_FINISH;
        end
        P_FINISH: begin
          sample_valid <= 1'b1;
          iter_left    <= iter_left - 1'b1;
          st <= (iter_left == 16'd1) ? P_IDLE : P_START;
        end
        default: st <= P_IDLE;
      endcase
    end
  end
endmodule
