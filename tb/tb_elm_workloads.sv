// tb_elm_workloads: the output-layer sizes of the four classification
// benchmarks, each trained on synthetic data by elm_workload_run.
// Rows = hidden neurons (65, 40, 20, 180 as evaluated), columns = classes
// (2, 2, 3, 10). The real datasets and the hidden layer are not part of
// this design, so the accuracy printed is that of the synthetic task; the
// checks compare every output, error bit, cycle count and conductance with
// the reference model.
module tb_elm_workloads;
  logic clk = 0;
  always #5 clk = ~clk;

  logic d0, d1, d2, d3;
  int c0, c1, c2, c3, f0, f1, f2, f3;

  elm_workload_run #(.N(65),  .K(2),  .NAME("Diabetes-size"))          u_dia (.clk, .done(d0), .checks(c0), .failures(f0));
  elm_workload_run #(.N(40),  .K(2),  .NAME("Australian-credit-size")) u_aus (.clk, .done(d1), .checks(c1), .failures(f1));
  elm_workload_run #(.N(20),  .K(3),  .NAME("Iris-size"))              u_iri (.clk, .done(d2), .checks(c2), .failures(f2));
  elm_workload_run #(.N(180), .K(10), .NAME("MNIST-size"))             u_mni (.clk, .done(d3), .checks(c3), .failures(f3));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2 + c3, f0 + f1 + f2 + f3 + 1);
    $finish;
  end

  initial begin
    wait (d0 && d1 && d2 && d3);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2 + c3, f0 + f1 + f2 + f3);
    $finish;
  end
endmodule
