// tb_rng_cell: checks the RNG cell model against an independent xorshift32
// reference, that the bit holds when not evaluated or not enabled, that QB
// is the complement of Q and that about half of the bits are ones.
module tb_rng_cell;
  logic clk = 0, rst_n = 0, eval = 0, rng_en = 1;
  logic q, qb;
  int checks = 0, failures = 0, ones = 0;
  localparam logic [31:0] SEED = 32'h1234_5678;
  logic [31:0] ref_s;

  rng_cell #(.SEED(SEED)) dut (.clk, .rst_n, .eval, .rng_en, .q, .qb);
  always #5 clk = ~clk;

  function automatic logic [31:0] xs(logic [31:0] s);
    s ^= s << 13; s ^= s >> 17; s ^= s << 5; return s;
  endfunction

  task automatic chk(logic c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ref_s = xs(SEED);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); chk(q == ref_s[31], "reset value");
    for (int n = 0; n < 2000; n++) begin
      eval   = ($urandom_range(0, 3) != 0);
      rng_en = ($urandom_range(0, 7) != 0);
      @(negedge clk);
      if (eval && rng_en) ref_s = xs(ref_s);
      chk(q == ref_s[31], "bit sequence");
      chk(qb == ~q, "QB complement");
      if (eval && rng_en) ones += q;
    end
    chk(ones > 600 && ones < 1000, "balance of ones");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
