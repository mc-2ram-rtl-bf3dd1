// dac_calibration: calibrating loop for the row DACs of a bank.
//
// For each row in turn the loop forces the full-scale code on that row's DAC
// (and zero on all others), reads the DAC's mirror current i_meas and
// compares it with the reference current REF = 2^DAC_BITS - 1 LSB. While the
// current is below the reference and the calibration code is not at its
// maximum, one more calibration mirror is switched in; each step waits one
// cycle for the current to settle, so a step takes two cycles. When the
// current meets the reference the row's code is kept and the next row
// starts. done pulses for one cycle at the end; busy is high meanwhile.
// The source gives the principle (mirror current read against a reference,
// Wc added until it meets the desired level); the test code, the reference
// value and the two-cycle step are this design's own choices.
module dac_calibration
  import mc2_pkg::*;
#(
  parameter int unsigned ROWS     = 32,
  parameter int unsigned DAC_BITS = 8,
  parameter int unsigned CAL_BITS = 4,
  localparam int unsigned AW = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  cur_t                i_meas,
  output logic                busy,
  output logic                done,
  output logic [AW-1:0]       test_row,
  output logic [DAC_BITS-1:0] test_code,
  output logic [CAL_BITS-1:0] cal [ROWS]
);
  localparam cur_t REF = cur_t'((1 << DAC_BITS) - 1);
  typedef enum logic [1:0] {C_IDLE, C_SETTLE, C_CMP} cstate_t;
  cstate_t st;

  assign busy      = (st != C_IDLE);
  assign test_code = '1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= C_IDLE;
      done     <= 1'b0;
      test_row <= '0;
      for (int i = 0; i < ROWS; i++) cal[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        C_IDLE: if (start) begin
          st       <= C_SETTLE;
          test_row <= '0;
          for (int i = 0; i < ROWS; i++) cal[i] <= '0;
        end
        C_SETTLE: st <= C_CMP;
        C_CMP: begin
          if (i_meas < REF && cal[test_row] != '1) begin
            cal[test_row] <= cal[test_row] + 1'b1;
            st <= C_SETTLE;
          end else if (32'(test_row) == ROWS - 1) begin
            st   <= C_IDLE;
            done <= 1'b1;
          end else begin
            test_row <= test_row + 1'b1;
            st <= C_SETTLE;
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
