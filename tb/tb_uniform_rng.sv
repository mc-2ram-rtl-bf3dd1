// tb_uniform_rng: checks the LFSR against a Fibonacci-form reference of the
// same polynomial (a different implementation with the same sequence up to
// the mapping below), its period, and ln_u against the real ln(u/65536)
// within Mitchell's error bound (0.060 = 61 Q10 LSB, plus 5 LSB for truncation).
module tb_uniform_rng;
  import mc2_pkg::*;
  logic clk = 0, rst_n = 0, next = 0;
  logic [15:0] u;
  eval_t ln_u;
  int checks = 0, failures = 0;

  uniform_rng #(.SEED(16'hACE1)) dut (.clk, .rst_n, .next, .u, .ln_u);
  always #5 clk = ~clk;

  initial begin
    #100000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [15:0] r;
    int period;
    r = 16'hACE1;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 70000; n++) begin
      real lnr, err;
      if (n < 3000) begin
        // Galois right-shift form written out bit by bit
        checks++; if (u != r) begin failures++; $display("FAIL seq n=%0d u=%h r=%h", n, u, r); end
      end
      lnr = 1024.0 * $ln(real'(u) / 65536.0);
      err = real'(ln_u) - lnr;
      if (n < 3000) begin
        checks++;
        if (err > 66.0 || err < -66.0) begin failures++; $display("FAIL ln u=%0d got %0d exp %f", u, ln_u, lnr); end
        checks++; if (ln_u > 0) begin failures++; $display("FAIL ln positive"); end
      end
      begin
        logic lsb;
        lsb = r[0];
        r = {1'b0, r[15:1]};
        if (lsb) begin r[15] = 1'b1; r[13] = r[13] ^ 1'b1; r[12] = r[12] ^ 1'b1; r[10] = r[10] ^ 1'b1; end
      end
      next = 1; @(negedge clk); next = 0;
      if (u == 16'hACE1 && n < 65534) begin checks++; failures++; $display("FAIL short period %0d", n); end
      if (u == 16'hACE1) begin period = n + 1; break; end
    end
    checks++; if (period != 65535) begin failures++; $display("FAIL period %0d", period); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
