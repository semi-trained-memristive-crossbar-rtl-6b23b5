// tb_neuron_opamp: t* = -Rf * I with Rf = 500 kOhm, clipped at +/-600 mV.
// Includes the paper's neuron example: two inputs of equal amplitude with
// M+ = M- = 250 kOhm give zero column current and so 0 V out.
module tb_neuron_opamp;
  import elm_pkg::*;
  curr_t i_in;
  volt_t v_out;
  logic  saturated;
  int checks = 0, failures = 0;

  neuron_opamp dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int i_pa);
    int e; logic s;
    i_in = curr_t'(i_pa);
    #1;
    // 500 kOhm * i pA = 0.5 * i uV -> i / 2000 mV
    e = -(i_pa / 2000);
    s = 0;
    if (e > 600) begin e = 600; s = 1; end
    if (e < -600) begin e = -600; s = 1; end
    checks++;
    if (int'(v_out) != e || saturated != s) begin
      failures++;
      $display("FAIL i=%0d pA v=%0d exp=%0d sat=%b", i_pa, v_out, e, saturated);
    end
  endtask

  initial begin
    // Paper example: x*(1/250k) - x*(1/250k) = 0 for any x.
    check(300 * 4000 - 300 * 4000);
    check(1_000_000);        // 1 uA -> -500 mV
    check(-400_000);         // -0.4 uA -> +200 mV
    check(1_200_000);        // exactly at the rail
    check(5_000_000);        // clipped
    check(-5_000_000);
    for (int n = 0; n < 300; n++) check(int'($urandom_range(6_000_000)) - 3_000_000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
