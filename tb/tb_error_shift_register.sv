// tb_error_shift_register: loads random error words and checks that the
// bit of each column appears at err_cur in column order, one per shift,
// and that capture takes priority over shift.
module tb_error_shift_register;
  localparam int unsigned K = 4;
  logic clk = 0, rst_n = 0, capture = 0, shift = 0, err_cur;
  logic [K-1:0] err_in, err_q;
  int checks = 0, failures = 0;

  error_shift_register #(.K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    err_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++; if (err_q !== '0) failures++;
    for (int n = 0; n < 50; n++) begin
      logic [K-1:0] w;
      w = K'($urandom);
      err_in = w; capture = 1; shift = (n % 2 == 0);  // capture wins
      @(negedge clk);
      capture = 0; shift = 0; err_in = ~w;
      checks++; if (err_q !== w) begin failures++; $display("FAIL load %b got %b", w, err_q); end
      for (int c = 0; c < K; c++) begin
        checks++;
        if (err_cur !== w[c]) begin failures++; $display("FAIL col %0d of %b", c, w); end
        @(negedge clk);                // hold without shift
        checks++; if (err_cur !== w[c]) failures++;
        shift = 1; @(negedge clk); shift = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
