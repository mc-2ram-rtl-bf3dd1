// two_step_adc: BEHAVIOURAL MODEL of the two-step (subranging) flash ADC
// that digitises the held column voltage.
//
// Step 1 (first clock): a coarse flash of 2^KC - 1 comparators against the
// thresholds k * 2^KF LSB gives the KC upper bits; a DAC turns them back
// into a voltage that is subtracted from the input, and the residue is
// amplified by 2^KF. Step 2 (second clock): a fine flash of 2^KF - 1
// comparators digitises the residue into the KF lower bits. The input is a
// fixed-point voltage in ADC LSBs with VFRAC fraction bits (see tia_hold);
// inputs at or above full scale give all ones. Latency is two cycles: code
// and out_valid appear two clock edges after in_valid, and a new conversion
// may start every cycle. The comparator structure and the two-cycle delay
// follow the source; the split KC = ceil(ADC_BITS/2) is this design's own.
module two_step_adc
  import mc2_pkg::*;
#(
  parameter int unsigned ADC_BITS = 6,
  localparam int unsigned KC = (ADC_BITS + 1) / 2,
  localparam int unsigned KF = ADC_BITS - KC,
  localparam int unsigned VW = CUR_W + VFRAC
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [VW-1:0]       v_in,
  input  logic                in_valid,
  output logic [ADC_BITS-1:0] code,
  output logic                out_valid,
  output logic                over_range   // input at or beyond full scale
);
  // Step 1: coarse thermometer code.
  logic [KC-1:0]  coarse_c;
  logic [VW-1:0]  residue_c;
  always_comb begin
    int unsigned cnt;
    cnt = 0;
    for (int unsigned k = 1; k < (1 << KC); k++)
      if (v_in >= VW'(k << (KF + VFRAC))) cnt++;
    coarse_c  = KC'(cnt);
    residue_c = v_in - VW'(cnt << (KF + VFRAC));
  end

  logic [KC-1:0] coarse_q;
  logic [VW-1:0] residue_q;   // amplified residue, same scale as fine thresholds
  logic          valid_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coarse_q <= '0; residue_q <= '0; valid_q <= 1'b0;
    end else begin
      coarse_q <= coarse_c; residue_q <= residue_c; valid_q <= in_valid;
    end
  end

  // Step 2: fine thermometer code of the residue.
  logic [KF-1:0] fine_c;
  logic          over_c;
  always_comb begin
    int unsigned cnt;
    cnt = 0;
    for (int unsigned k = 1; k < (1 << KF); k++)
      if (residue_q >= VW'(k << VFRAC)) cnt++;
    fine_c = KF'(cnt);
    over_c = (&coarse_q) && (residue_q >= VW'(1 << (KF + VFRAC)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code <= '0; out_valid <= 1'b0; over_range <= 1'b0;
    end else begin
      code       <= {coarse_q, fine_c};
      out_valid  <= valid_q;
      over_range <= valid_q && over_c;
    end
  end
endmodule
