// tb_dac_operand_buffer: loads random R and 1/sigma^2 into a subset of rows
// and checks the row DAC codes for both components and both sign phases,
// with an 8-bit and a 5-bit DAC (truncation), the clear and the forced
// calibration code.
module tb_dac_operand_buffer;
  import mc2_pkg::*;
  localparam int ROWS = 32, M = 2;
  logic clk = 0, rst_n = 0, clear = 0, ld_en = 0, neg_phase = 0, force_en = 0;
  logic [4:0] ld_row = 0, force_row = 0;
  rval_t ld_r; isig_t ld_isig [M];
  logic comp = 0;
  logic [7:0] force_code = 0;
  rval_t br8 [ROWS], br5 [ROWS];
  logic [7:0] code8 [ROWS];
  logic [4:0] code5 [ROWS];
  rval_t s_r [ROWS]; isig_t s_is [ROWS][M]; logic s_act [ROWS];
  int checks = 0, failures = 0;

  dac_operand_buffer #(.ROWS(ROWS), .M(M), .DAC_BITS(8)) d8 (.clk, .rst_n, .clear, .ld_en, .ld_row, .ld_r, .ld_isig,
    .comp, .neg_phase, .force_en, .force_row, .force_code, .buf_r(br8), .dac_code(code8));
  dac_operand_buffer #(.ROWS(ROWS), .M(M), .DAC_BITS(5)) d5 (.clk, .rst_n, .clear, .ld_en, .ld_row, .ld_r, .ld_isig,
    .comp, .neg_phase, .force_en, .force_row, .force_code(force_code[4:0]), .buf_r(br5), .dac_code(code5));
  always #5 clk = ~clk;

  task automatic check_codes();
    for (int j = 0; j < M; j++) for (int ph = 0; ph < 2; ph++) begin
      comp = j[0]; neg_phase = ph[0]; #1;
      for (int i = 0; i < ROWS; i++) begin
        int v, e8, e5;
        v  = int'(s_r[i]) * int'(s_is[i][j]);
        e8 = 0; e5 = 0;
        if (s_act[i] && v != 0 && ((v < 0) == (ph == 1))) begin
          e8 = (v < 0) ? -v : v;
          e5 = e8 >> 2;
        end
        checks += 2;
        if (int'(code8[i]) != e8) begin failures++; $display("FAIL 8b row %0d j %0d ph %0d got %0d exp %0d", i, j, ph, code8[i], e8); end
        if (int'(code5[i]) != e5) begin failures++; $display("FAIL 5b row %0d got %0d exp %0d", i, code5[i], e5); end
      end
    end
  endtask

  initial begin
    #10000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < ROWS; i++) s_act[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      clear = 1; @(negedge clk); clear = 0;
      for (int i = 0; i < ROWS; i++) s_act[i] = 0;
      check_codes();
      for (int i = 0; i < ROWS; i++) begin
        if ($urandom_range(0, 2) != 0) begin
          ld_en = 1; ld_row = 5'(i); ld_r = rval_t'($urandom);
          for (int j = 0; j < M; j++) ld_isig[j] = isig_t'($urandom);
          s_act[i] = 1; s_r[i] = ld_r; s_is[i] = ld_isig;
          @(negedge clk);
        end
      end
      ld_en = 0;
      check_codes();
    end
    force_en = 1; force_row = 5'd7; force_code = 8'hff; #1;
    for (int i = 0; i < ROWS; i++) begin
      checks++;
      if (code8[i] != ((i == 7) ? 8'hff : 8'h00)) begin failures++; $display("FAIL force row %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
