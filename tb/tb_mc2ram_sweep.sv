// tb_mc2ram_sweep: the sampling experiments of the source evaluation, run on
// the RTL.
//
// Each mc2_sweep_point instance is a complete sampler (8 rows per bank) that
// draws 500 Metropolis-Hastings samples, discarding 50 as burn-in, from a
// two-component Gaussian mixture, checking every step against the reference
// model and printing a KL divergence of the samples from the mixture:
//  * ADC precision 3..8 bits with an 8-bit DAC,
//  * DAC precision 3..7 bits with a 6-bit ADC,
//  * on the 8-bit DAC / 6-bit ADC point also the mean-distance sweep d = 1..5
//    and mixtures of 2..6 dimensions.
// The points run in parallel; the bench ends when all are done.
module tb_mc2ram_sweep;
  localparam int NA = 6, ND = 5;
  logic done_a [NA], done_d [ND];
  int   chk_a [NA], fail_a [NA], chk_d [ND], fail_d [ND];

  for (genvar k = 0; k < NA; k++) begin : g_adc
    mc2_sweep_point #(.DAC_BITS(8), .ADC_BITS(3 + k), .WIDE(k == 3)) u_pt (
      .done(done_a[k]), .checks(chk_a[k]), .failures(fail_a[k]));
  end
  for (genvar k = 0; k < ND; k++) begin : g_dac
    mc2_sweep_point #(.DAC_BITS(3 + k), .ADC_BITS(6)) u_pt (
      .done(done_d[k]), .checks(chk_d[k]), .failures(fail_d[k]));
  end

  int checks, failures;

  initial begin
    #400000000;
    checks = 0; failures = 1;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    #1;
    do begin
      #1000;
      all = 1;
      for (int k = 0; k < NA; k++) all &= done_a[k];
      for (int k = 0; k < ND; k++) all &= done_d[k];
    end while (!all);
    checks = 0; failures = 0;
    for (int k = 0; k < NA; k++) begin checks += chk_a[k]; failures += fail_a[k]; end
    for (int k = 0; k < ND; k++) begin checks += chk_d[k]; failures += fail_d[k]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
