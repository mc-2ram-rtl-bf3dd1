// tb_partial_term_acc: random ADC codes with random weights and signs, with
// gaps and clears; checks the accumulated value and the two-cycle lag.
module tb_partial_term_acc;
  import mc2_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  logic [5:0] code;
  conv_tag_t tag;
  eval_t acc;
  logic busy;
  longint model;
  int checks = 0, failures = 0;

  partial_term_acc #(.ADC_BITS(6)) dut (.clk, .rst_n, .clear, .in_valid, .code, .tag, .acc, .busy);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    model = 0; code = 0; tag = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int blk = 0; blk < 50; blk++) begin
      clear = 1; @(negedge clk); clear = 0; model = 0;
      for (int n = 0; n < 40; n++) begin
        in_valid  = ($urandom_range(0, 3) != 0);
        code      = 6'($urandom);
        tag.shift = 5'($urandom_range(0, 20));
        tag.neg   = $urandom_range(0, 1);
        if (in_valid) model += tag.neg ? -(longint'(code) << tag.shift) : (longint'(code) << tag.shift);
        @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
      checks++; if (busy) begin failures++; $display("FAIL still busy"); end
      @(negedge clk);
      checks++;
      if (longint'(acc) != model) begin failures++; $display("FAIL acc %0d exp %0d", acc, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
