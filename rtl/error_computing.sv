// error_computing: error computing unit of the output layer.
//
// For each of the K output neurons it compares the neuron output t*_i with
// the class label t_i and reports err[i] = 1 when t*_i > t_i, 0 otherwise,
// as the paper specifies. Both are signed millivolt words. The paper does not
// say how the comparison is built; here it is a bank of K signed
// comparators. Purely combinational; the result is captured by the error
// shift register at the end of the Read state.
module error_computing
  import elm_pkg::*;
#(
  parameter int unsigned K = N_COLS_DEFAULT
) (
  input  volt_t        t_out [K],  // neuron outputs t*
  input  volt_t        t_lbl [K],  // class label targets t
  output logic [K-1:0] err         // 1 = t* > t
);

  always_comb begin
    for (int i = 0; i < K; i++) err[i] = (t_out[i] > t_lbl[i]);
  end

endmodule
