// tb_dac_calibration: the DAC under test is modelled in the testbench with
// a different mirror error per row (i = floor(code*(64+err+cal)/64)). Checks
// that every row ends with the smallest calibration code whose full-scale
// current reaches 255 LSB (or the maximum code), that done pulses once and
// that the loop takes 2 cycles per step.
module tb_dac_calibration;
  import mc2_pkg::*;
  localparam int ROWS = 8;
  logic clk = 0, rst_n = 0, start = 0;
  cur_t i_meas;
  logic busy, done;
  logic [2:0] test_row;
  logic [7:0] test_code;
  logic [3:0] cal [ROWS];
  int err [ROWS];
  int checks = 0, failures = 0, cycles = 0, dones = 0;

  dac_calibration #(.ROWS(ROWS), .DAC_BITS(8), .CAL_BITS(4)) dut (.clk, .rst_n, .start, .i_meas, .busy, .done,
    .test_row, .test_code, .cal);
  always #5 clk = ~clk;
  assign i_meas = cur_t'((int'(test_code) * (64 + err[test_row] + int'(cal[test_row]))) / 64);

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int steps;
    for (int round = 0; round < 3; round++) begin
      steps = 0;
      for (int i = 0; i < ROWS; i++) begin
        err[i] = $urandom_range(0, 20) - 14;   // -14..+6
        begin
          int need;
          need = 0;
          while (need < 15 && (255 * (64 + err[i] + need)) / 64 < 255) need++;
          steps += need + 1;
        end
      end
      rst_n = (round != 0) || 1'b0;
      repeat (2) @(negedge clk); rst_n = 1;
      start = 1; @(negedge clk); start = 0;
      cycles = 1; dones = 0;
      while (!done && cycles < 1000) begin @(negedge clk); cycles++; end
      dones += done;
      @(negedge clk);
      checks++; if (dones != 1 || done) begin failures++; $display("FAIL done pulse"); end
      checks++; if (cycles != 2 * steps + 1) begin failures++; $display("FAIL cycles %0d exp %0d", cycles, 2 * steps + 1); end
      for (int i = 0; i < ROWS; i++) begin
        int need;
        need = 0;
        while (need < 15 && (255 * (64 + err[i] + need)) / 64 < 255) need++;
        checks++;
        if (int'(cal[i]) != need) begin failures++; $display("FAIL row %0d err %0d cal %0d exp %0d", i, err[i], cal[i], need); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
