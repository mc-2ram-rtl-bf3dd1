// tb_central_proc: the central processing layer with the real log-add LUT and
// uniform generator, and two banks modelled here (random latencies, random
// partial terms, occasional overflow). For every iteration it checks the
// decision against the reference (E update, log densities, ln U of the
// replicated LFSR), the E_j kept afterwards, the update/accept handshake and
// that run/num_iter produce exactly num_iter sample_valid pulses.
module tb_central_proc;
  import mc2_pkg::*;
  import mc2_ref_pkg::*;
  localparam int NB = 2, M = 2;
  logic clk = 0, rst_n = 0, e_load = 0, run = 0;
  eval_t c_log [M], e_init [M], e_cur [M], l_cur;
  logic [15:0] num_iter = 0;
  logic busy, sample_valid, sample_accept, sample_ovf, bank_start, bank_update, bank_accept, u_next;
  logic bank_done [NB], bank_ovf [NB], bank_wb_done [NB];
  eval_t bank_de [NB][M];
  logic [NB-1:0] bd_v = '0, bo_v = '0, bw_v = '0;
  logic [NB*M*32-1:0] bde_v = '0;
  for (genvar b = 0; b < NB; b++) begin : g_drv
    assign bank_done[b] = bd_v[b];
    assign bank_ovf[b] = bo_v[b];
    assign bank_wb_done[b] = bw_v[b];
    for (genvar j = 0; j < M; j++) begin : g_j
      assign bank_de[b][j] = bde_v[(b*M+j)*32 +: 32];
    end
  end
  eval_t lse_a, lse_b, lse_y, ln_u;
  logic [15:0] u;
  logic lse_sat;
  int checks = 0, failures = 0, samples = 0, n_acc = 0, n_rej = 0, n_ovf = 0, n_sat = 0;

  central_proc #(.NUM_BANKS(NB), .M(M)) dut (.clk, .rst_n, .c_log, .e_init, .e_load, .run, .num_iter,
    .busy, .sample_valid, .sample_accept, .sample_ovf, .e_cur, .l_cur,
    .bank_start, .bank_done, .bank_de, .bank_ovf, .bank_update, .bank_accept, .bank_wb_done,
    .lse_a, .lse_b, .lse_y, .u_next, .ln_u);
  log_add_lut u_lut (.a(lse_a), .b(lse_b), .y(lse_y), .sat(lse_sat));
  uniform_rng u_rng (.clk, .rst_n, .next(u_next), .u, .ln_u);
  always #5 clk = ~clk;

  task automatic chk(logic c, string msg);
    checks++; if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // reference state
  longint e_ref [2];
  longint c_ref [2];
  logic [15:0] u_ref;
  bit exp_acc;

  // bank models
  for (genvar b = 0; b < NB; b++) begin : g_bm
    initial begin
      forever begin
        @(posedge clk);
        if (bank_start) begin
          repeat ($urandom_range(1, 8)) @(posedge clk);
          #1;
          for (int j = 0; j < M; j++) bde_v[(b*M+j)*32 +: 32] = eval_t'($urandom_range(0, 12000)) - 6000;
          bo_v[b] = ($urandom_range(0, 15) == 0);
          bd_v[b] = 1;
          while (!bank_update) @(posedge clk);
          #1 bd_v[b] = 0;
          repeat ($urandom_range(0, 5)) @(posedge clk);
          #1 bw_v[b] = 1;
          @(posedge clk); #1 bw_v[b] = 0;
        end
      end
    end
  end

  // checker: at each update, compute the expected decision
  always @(posedge clk) begin
    if (rst_n && bank_update) begin
      longint ec [2], lp, lc;
      bit ov;
      int sd;
      ov = bank_ovf[0] | bank_ovf[1];
      for (int j = 0; j < M; j++) ec[j] = e_ref[j] + bank_de[0][j] + bank_de[1][j];
      lp = log_density(c_ref, e_ref, M, sd);
      lc = log_density(c_ref, ec, M, n_sat);
      exp_acc = !ov && ((lc - lp) > ref_ln_u(u_ref));
      checks++;
      if (bank_accept != exp_acc) begin failures++; $display("FAIL decision lp=%0d lc=%0d lnu=%0d got %0d", lp, lc, ref_ln_u(u_ref), bank_accept); end
      if (exp_acc) e_ref = ec;
      n_acc += exp_acc; n_rej += !exp_acc; n_ovf += ov;
      u_ref = lfsr_next(u_ref);
    end
    if (rst_n && sample_valid) begin
      samples++;
      checks++;
      if (sample_accept != exp_acc) begin failures++; $display("FAIL sample_accept"); end
      for (int j = 0; j < M; j++) begin
        checks++; if (longint'(e_cur[j]) != e_ref[j]) begin failures++; $display("FAIL e_cur"); end
      end
    end
  end

  initial begin
    #10000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    u_ref = 16'hACE1;
    c_log[0] = -800; c_log[1] = -1200; c_ref[0] = -800; c_ref[1] = -1200;
    e_init[0] = 3000; e_init[1] = 9000;
    repeat (2) @(negedge clk); rst_n = 1;
    e_load = 1; @(negedge clk); e_load = 0;
    e_ref[0] = 3000; e_ref[1] = 9000;
    chk(e_cur[0] == 3000 && e_cur[1] == 9000, "E load");
    for (int r = 0; r < 6; r++) begin
      int n_before, n;
      n = (r == 0) ? 1 : $urandom_range(5, 60);
      n_before = samples;
      num_iter = 16'(n); run = 1; @(negedge clk); run = 0;
      @(negedge clk);
      while (busy) @(negedge clk);
      @(negedge clk);
      chk(samples - n_before == n, $sformatf("num_iter %0d gave %0d samples", n, samples - n_before));
    end
    chk(n_acc > 0 && n_rej > 0 && n_ovf > 0, "accept, reject and overflow all seen");
    $display("INFO accepts=%0d rejects=%0d ovf=%0d", n_acc, n_rej, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
