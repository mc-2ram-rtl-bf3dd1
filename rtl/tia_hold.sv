// tia_hold: BEHAVIOURAL MODEL of the column op-amp with resistive feedback
// and the hold cell in front of the column ADC.
//
// The op-amp holds the tail of the selected column at ground and turns the
// column current into a voltage V = I * R; the hold capacitor Cs samples that
// voltage while Clk is closed and keeps it after the op-amp and the row DACs
// are switched off; Rst discharges Cs. The voltage is represented as a fixed
// point number in ADC LSBs with VFRAC fraction bits. The feedback resistor,
// which the source says is chosen to match the ADC's range, is a run-time
// setting: one ADC LSB equals 2^r_shift DAC LSB currents, so
//     v_sample = i_col * 2^VFRAC / 2^r_shift   (truncated).
// v_sample changes on the clock edge where sample (or rst_s) is high, i.e.
// it is valid one cycle after the current was selected.
module tia_hold
  import mc2_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  cur_t                  i_col,
  input  logic                  sample,   // Clk switch of the hold cell
  input  logic                  rst_s,    // Rst switch: discharge Cs
  input  logic [3:0]            r_shift,  // feedback resistance setting
  output logic [CUR_W+VFRAC-1:0] v_sample
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      v_sample <= '0;
    else if (rst_s)  v_sample <= '0;
    else if (sample) v_sample <= ({i_col, {VFRAC{1'b0}}}) >> r_shift;
  end
endmodule
