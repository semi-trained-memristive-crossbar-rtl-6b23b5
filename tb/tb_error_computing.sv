// tb_error_computing: random and corner-case comparisons of t* against t.
module tb_error_computing;
  import elm_pkg::*;
  localparam int unsigned K = 4;
  volt_t t_out [K];
  volt_t t_lbl [K];
  logic [K-1:0] err;
  int checks = 0, failures = 0;

  error_computing #(.K(K)) dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 300; n++) begin
      for (int i = 0; i < K; i++) begin
        int a, b;
        a = int'($urandom_range(1200)) - 600;
        b = (n % 3 == 0) ? a : int'($urandom_range(1200)) - 600;  // include equality
        if (n == 1) begin a = -1; b = 1; end
        t_out[i] = volt_t'(a);
        t_lbl[i] = volt_t'(b);
      end
      #1;
      for (int i = 0; i < K; i++) begin
        logic e;
        e = (int'(t_out[i]) > int'(t_lbl[i]));
        checks++;
        if (err[i] !== e) begin
          failures++;
          $display("FAIL i=%0d t*=%0d t=%0d err=%b", i, t_out[i], t_lbl[i], err[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
