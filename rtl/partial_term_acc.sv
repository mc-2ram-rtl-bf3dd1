// partial_term_acc: ADC REG, Shift/Sign operation, adder and Output REG of a
// bank (the digital back end that builds a partial term of E_j).
//
// Each ADC code arrives with a tag (mc2_pkg::conv_tag_t): the power-of-two
// weight of the converted column and whether it must be subtracted. The code
// and tag are first captured in the ADC REG; in the next cycle the Shift/Sign
// stage forms +/-(code << shift) and the adder adds it into the Output REG,
// which feeds back to the adder. clear empties the Output REG (and drops any
// code in flight). The output therefore lags the ADC by two cycles. Register
// stages follow the order of the source's block diagram; the tag format is
// this design's own.
module partial_term_acc
  import mc2_pkg::*;
#(
  parameter int unsigned ADC_BITS = 6
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                in_valid,
  input  logic [ADC_BITS-1:0] code,
  input  conv_tag_t           tag,
  output eval_t               acc,
  output logic                busy     // a code is still in the ADC REG
);
  logic [ADC_BITS-1:0] adc_reg;
  conv_tag_t           tag_reg;
  logic                reg_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      adc_reg <= '0; tag_reg <= '0; reg_valid <= 1'b0;
    end else begin
      adc_reg   <= code;
      tag_reg   <= tag;
      reg_valid <= in_valid && !clear;
    end
  end

  eval_t scaled;
  always_comb begin
    scaled = eval_t'(adc_reg) <<< tag_reg.shift;
    if (tag_reg.neg) scaled = -scaled;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         acc <= '0;
    else if (clear)     acc <= '0;
    else if (reg_valid) acc <= acc + scaled;
  end

  assign busy = reg_valid;
endmodule
