// tb_column_controller: exhaustive check of the column control unit against
// the behaviour described for the -Tr transistors: disabled column -> T5 and
// T6 off; enabled, polar 0 -> T5 on (pt = 0), T6 off; enabled, polar 1 ->
// T5 off, T6 on (nt = 1).
module tb_column_controller;
  logic polar, col_en, pt, nt;
  int checks = 0, failures = 0;

  column_controller dut (.*);

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      logic t5_on, t6_on;
      {col_en, polar} = 2'(v);
      #1;
      t5_on = col_en && !polar;
      t6_on = col_en &&  polar;
      checks += 2;
      if (pt !== !t5_on) begin failures++; $display("FAIL pt col_en=%b polar=%b", col_en, polar); end
      if (nt !==  t6_on) begin failures++; $display("FAIL nt col_en=%b polar=%b", col_en, polar); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
