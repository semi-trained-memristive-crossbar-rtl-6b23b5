// elm_output_layer: the output (classification) layer of a memristive
// extreme learning machine with in-situ training, built on a semi-trained
// one-crossbar array.
//
// Structure (one instance per row / column as noted):
//   memristive_crossbar  N x K trained M+ cells on the x rows, fixed M- cells
//                        on the negated rows (behavioural model)
//   neuron_opamp  x K    inverting op-amp per bit-line -> t* (behavioural)
//   error_computing      err[i] = t*_i > t_i
//   error_shift_register error bits held for the learning phase
//   global_controller    Read / Train_C1 / Train_C2 sequencer
//   row_controller x N   gradient sign and polarity -> +Tr tri-state
//   column_controller x K ColEn, Polar -> T5 / T6 gates of -Tr
//   ziksa_hbridge        H-bridge current per cell (behavioural)
// Operation: with the controller in Read (ready = 1) the caller drives the
// hidden-layer outputs x and the labels t_lbl and raises sample_valid for
// one cycle. t* is available combinationally in that cycle and the errors
// are captured. If learn = 1 the controller then trains the columns one by
// one, two cycles each (increment cycle, decrement cycle), and returns to
// Read after 2*K cycles. x must stay unchanged until ready rises again,
// because the row controllers use the sign of x while training.
// The inputs x stand for the ELM hidden-layer outputs, which this design
// does not include. Clock: 100 MHz in the paper's power estimate.
module elm_output_layer
  import elm_pkg::*;
#(
  parameter int unsigned N = N_ROWS_DEFAULT,   // crossbar rows (hidden neurons)
  parameter int unsigned K = N_COLS_DEFAULT    // crossbar columns (output neurons)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         sample_valid,
  input  logic         learn,
  input  volt_t        x      [N],     // hidden-layer outputs, mV
  input  volt_t        t_lbl  [K],     // class label targets, mV
  output volt_t        t_out  [K],     // neuron outputs t*, mV
  output logic [K-1:0] err,            // live error bits (t* > t)
  output logic [K-1:0] err_held,       // error shift register contents
  output logic         ready,
  output gc_state_e    state,
  output cond_t        g_plus [N][K],  // trained conductances, nS
  output logic [K-1:0] saturated,      // neuron output clipped
  output logic         read_overdrive
);

  logic         en, polar, tr_en, capture, shift, err_cur;
  logic [K-1:0] col_en, pt, nt;
  logic [N-1:0] row_out_n;
  curr_t        i_col  [K];
  curr_t        i_tune [N][K];

  global_controller #(.K(K)) u_gc (
    .clk, .rst_n, .sample_valid, .learn,
    .state, .en, .polar, .tr_en, .col_en, .capture, .shift, .ready
  );

  for (genvar r = 0; r < N; r++) begin : g_row
    row_controller u_rc (
      .input_pos (x[r] > 0),
      .error     (err_cur),
      .polar     (polar),
      .tr_en     (tr_en),
      .out_n     (row_out_n[r])
    );
  end

  for (genvar c = 0; c < K; c++) begin : g_col
    column_controller u_cc (
      .polar  (polar),
      .col_en (col_en[c]),
      .pt     (pt[c]),
      .nt     (nt[c])
    );
    neuron_opamp u_neuron (
      .i_in      (i_col[c]),
      .v_out     (t_out[c]),
      .saturated (saturated[c])
    );
  end

  ziksa_hbridge #(.N(N), .K(K)) u_ziksa (
    .row_out_n, .pt, .nt, .tune(), .i_pa(i_tune)
  );

  memristive_crossbar #(.N(N), .K(K)) u_xbar (
    .clk, .rst_n, .en, .x, .i_tune, .i_col, .g_plus, .read_overdrive
  );

  error_computing #(.K(K)) u_err (
    .t_out, .t_lbl, .err
  );

  error_shift_register #(.K(K)) u_esr (
    .clk, .rst_n, .capture, .shift, .err_in(err), .err_cur, .err_q(err_held)
  );

endmodule
