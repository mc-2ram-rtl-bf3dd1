// tb_tia_hold: checks that the hold cell samples i*2^8/2^r_shift when Clk is
// closed, keeps it otherwise and is cleared by Rst.
module tb_tia_hold;
  logic clk = 0, rst_n = 0, sample = 0, rst_s = 0;
  logic [15:0] i_col;
  logic [3:0]  r_shift;
  logic [23:0] v;
  logic [23:0] exp_v;
  int checks = 0, failures = 0;

  tia_hold dut (.clk, .rst_n, .i_col, .sample, .rst_s, .r_shift, .v_sample(v));
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    exp_v = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      i_col   = 16'($urandom);
      r_shift = 4'($urandom);
      sample  = $urandom_range(0, 1);
      rst_s   = ($urandom_range(0, 15) == 0);
      @(negedge clk);
      if (rst_s) exp_v = 0;
      else if (sample) exp_v = 24'((longint'(i_col) * 256) >> r_shift);
      checks++;
      if (v !== exp_v) begin failures++; $display("FAIL got %0d exp %0d", v, exp_v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
