// tb_row_dac: exhaustive check of the row DAC model for an ideal mirror and
// for a mirror with a -3/64 ratio error, against floor(code*(64+err+cal)/64).
module tb_row_dac;
  logic [7:0]  code;
  logic [3:0]  cal;
  logic [15:0] i0, i1;
  int checks = 0, failures = 0;

  row_dac #(.DAC_BITS(8), .CAL_BITS(4), .MISMATCH(0))  d0 (.code, .cal, .i_out(i0));
  row_dac #(.DAC_BITS(8), .CAL_BITS(4), .MISMATCH(-3)) d1 (.code, .cal, .i_out(i1));

  initial begin
    #10000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int c = 0; c < 256; c++) begin
      for (int k = 0; k < 16; k++) begin
        code = 8'(c); cal = 4'(k); #1;
        checks += 2;
        if (int'(i0) != (c * (64 + k)) / 64) begin failures++; $display("FAIL ideal c=%0d k=%0d %0d", c, k, i0); end
        if (int'(i1) != (c * (61 + k)) / 64) begin failures++; $display("FAIL mism c=%0d k=%0d %0d", c, k, i1); end
      end
    end
    code = 8'd200; cal = 0; #1;
    checks++; if (i0 != 16'd200) begin failures++; $display("FAIL ideal is not identity"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
