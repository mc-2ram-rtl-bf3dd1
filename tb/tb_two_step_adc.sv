// tb_two_step_adc: random held voltages (including over range) streamed one
// per cycle; checks code = min(floor(v), 63), the two-cycle latency and the
// over-range flag, for the 6-bit default and a 5-bit variant.
module tb_two_step_adc;
  logic clk = 0, rst_n = 0;
  logic [23:0] v;
  logic in_valid = 0;
  logic [5:0] code6; logic [4:0] code5;
  logic ov6, ov5, val6, val5;
  int checks = 0, failures = 0;
  int lat = 0;

  two_step_adc #(.ADC_BITS(6)) a6 (.clk, .rst_n, .v_in(v), .in_valid, .code(code6), .out_valid(val6), .over_range(ov6));
  two_step_adc #(.ADC_BITS(5)) a5 (.clk, .rst_n, .v_in(v), .in_valid, .code(code5), .out_valid(val5), .over_range(ov5));
  always #5 clk = ~clk;

  logic [23:0] hist_v [3];
  logic        hist_ok [3];

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 3; i++) begin hist_v[i] = 0; hist_ok[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // latency: one isolated conversion
    v = 24'(20 << 8); in_valid = 1; @(negedge clk); in_valid = 0;
    for (int c = 1; c < 6; c++) begin
      if (val6 && lat == 0) lat = c;
      @(negedge clk);
    end
    checks++; if (lat != 2) begin failures++; $display("FAIL latency %0d", lat); end
    for (int n = 0; n < 2000; n++) begin
      v = ($urandom_range(0, 9) == 0) ? 24'($urandom_range(64 << 8, 200 << 8)) : 24'($urandom_range(0, (64 << 8) - 1));
      in_valid = 1;
      @(negedge clk);
      hist_v[2] = hist_v[1]; hist_ok[2] = hist_ok[1];
      hist_v[1] = hist_v[0]; hist_ok[1] = hist_ok[0];
      hist_v[0] = v; hist_ok[0] = 1;
      if (hist_ok[1]) begin
        int e6, e5;
        e6 = int'(hist_v[1] >> 8); if (e6 > 63) e6 = 63;
        e5 = int'(hist_v[1] >> 8); if (e5 > 31) e5 = 31;
        checks += 4;
        if (!val6 || int'(code6) != e6) begin failures++; $display("FAIL 6b v=%0d got %0d exp %0d", hist_v[1], code6, e6); end
        if (!val5 || int'(code5) != e5) begin failures++; $display("FAIL 5b v=%0d got %0d exp %0d", hist_v[1], code5, e5); end
        if (ov6 != (hist_v[1] >= (64 << 8))) begin failures++; $display("FAIL ov6"); end
        if (ov5 != (hist_v[1] >= (32 << 8))) begin failures++; $display("FAIL ov5"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
