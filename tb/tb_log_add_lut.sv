// tb_log_add_lut: compares the log-add unit with max(a,b) + round(1024 *
// ln(1 + exp(-(k+0.5)/8))) computed here with real arithmetic, and checks
// that the result is within 1/16 of the exact ln(e^a + e^b).
module tb_log_add_lut;
  import mc2_pkg::*;
  eval_t a, b, y;
  logic sat;
  int checks = 0, failures = 0, sats = 0;

  log_add_lut dut (.a, .b, .y, .sat);

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      longint d, k;
      eval_t mx, e;
      real exact;
      a = eval_t'($urandom_range(0, 40000)) - 20000;
      b = ($urandom_range(0, 3) == 0) ? a - eval_t'($urandom_range(0, 20000)) : a + eval_t'($urandom_range(0, 9000)) - 4500;
      #1;
      mx = (a > b) ? a : b;
      d  = (a > b) ? a - b : b - a;
      k  = d / 128;
      e  = (k >= 64) ? mx : mx + eval_t'($rtoi(1024.0 * $ln(1.0 + $exp(-(real'(k) + 0.5) / 8.0)) + 0.5));
      checks++;
      if (y != e) begin failures++; $display("FAIL a=%0d b=%0d y=%0d exp %0d", a, b, y, e); end
      exact = 1024.0 * $ln($exp(real'(a) / 1024.0 - real'(mx) / 1024.0) + $exp(real'(b) / 1024.0 - real'(mx) / 1024.0)) + real'(mx);
      checks++;
      if ((real'(y) - exact) > 64.0 || (exact - real'(y)) > 64.0) begin failures++; $display("FAIL accuracy a=%0d b=%0d", a, b); end
      checks++;
      if (sat != (k >= 64)) begin failures++; $display("FAIL sat"); end
      sats += sat;
    end
    checks++; if (sats == 0) begin failures++; $display("FAIL no saturated case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
