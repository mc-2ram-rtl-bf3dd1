// tb_column_mux: random column currents; checks the selected current, zero
// when disabled and zero for selects past the last column.
module tb_column_mux;
  localparam int NC = 36;
  logic [15:0] i_col [NC];
  logic [5:0]  sel;
  logic        en;
  logic [15:0] i_out;
  int checks = 0, failures = 0;

  column_mux #(.NCOLS(NC), .CUR_W(16)) dut (.i_col, .sel, .en, .i_out);

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      logic [15:0] exp_v;
      for (int c = 0; c < NC; c++) i_col[c] = 16'($urandom);
      sel = 6'($urandom_range(0, 63));
      en  = ($urandom_range(0, 4) != 0);
      #1;
      exp_v = (en && sel < NC) ? i_col[sel] : 16'd0;
      checks++;
      if (i_out !== exp_v) begin
        failures++; $display("FAIL sel=%0d en=%0d got %0d exp %0d", sel, en, i_out, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
