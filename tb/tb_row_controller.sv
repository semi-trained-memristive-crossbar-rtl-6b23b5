// tb_row_controller: exhaustive check of the row control unit.
// For all 16 input combinations the expected tri-state control is derived
// from the sign rule: the row takes part (out_n = 0) only when training is
// enabled and the cycle polarity matches the gradient sign
// S(h) * S(t* - t) (+1 -> polar 0, -1 -> polar 1).
module tb_row_controller;
  logic input_pos, error, polar, tr_en, out_n;
  int checks = 0, failures = 0;

  row_controller dut (.*);

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      int s_h, s_e, prod;
      logic expect_active;
      {tr_en, polar, error, input_pos} = 4'(v);
      #1;
      s_h  = input_pos ? 1 : -1;
      s_e  = error ? 1 : -1;
      prod = s_h * s_e;
      expect_active = tr_en && ((prod > 0) ? (polar == 1'b0) : (polar == 1'b1));
      checks++;
      if (out_n !== !expect_active) begin
        failures++;
        $display("FAIL tr_en=%b polar=%b err=%b in=%b out_n=%b", tr_en, polar, error, input_pos, out_n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
