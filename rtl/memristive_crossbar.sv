// memristive_crossbar: BEHAVIOURAL MODEL (not synthesizable circuit) of the
// semi-trained one-crossbar array of threshold-current memristors.
//
// Each input x_r drives two word-lines: x_r itself, which meets a trained
// memristor M+[r][c] in every column, and its negation ~x_r (made by an
// analog inverter), which meets a fixed memristor M-[r][c] that is never
// programmed. While En = 1 the pass transistors are on and column c sinks
//   I_c = sum_r ( x_r * G+[r][c] - x_r * G-[r][c] )
// into its neuron, so the signed weight is proportional to G+ - G-. While
// En = 0 no read current flows (i_col = 0).
// Training: a cell whose Ziksa current exceeds the device threshold
// (I_THRESH_PA, 3.2 uA) for one clock cycle changes its conductance by one
// fixed step G_STEP: up for an increment, down for a decrement, saturating
// at the low (100 kOhm) and high (250 kOhm) resistance states. Read currents
// stay below the threshold and leave the state unchanged; a read current
// above it is flagged on read_overdrive and does not change the state.
// With the inverting neuron (feedback Rf) one step is a weight change of
// alpha = Rf * G_STEP = 500 kOhm * 400 nS = 0.2.
// Units: x in mV, conductance in nS, current in pA.
// The array structure, the LRS/HRS values and the fixed M- follow the paper;
// the step size, the value of M- (mid-range, so that a fresh array has zero
// weights) and the reset state (all G+ = G-) are this model's choices.
module memristive_crossbar
  import elm_pkg::*;
#(
  parameter int unsigned N       = N_ROWS_DEFAULT,
  parameter int unsigned K       = N_COLS_DEFAULT,
  parameter int          G_MAX   = G_LRS_NS,
  parameter int          G_MIN   = G_HRS_NS,
  parameter int          G_FIXED = (G_LRS_NS + G_HRS_NS) / 2, // M- conductance
  parameter int          G_STEP  = 400,                       // per training pulse
  parameter int          I_TH    = I_THRESH_PA
) (
  input  logic   clk,
  input  logic   rst_n,                // resets every M+ to G_FIXED
  input  logic   en,                   // pass transistors on (Read)
  input  volt_t  x      [N],           // row input voltages
  input  curr_t  i_tune [N][K],        // Ziksa cell currents (signed)
  output curr_t  i_col  [K],           // bit-line currents into the neurons
  output cond_t  g_plus [N][K],        // trained conductances, observation
  output logic   read_overdrive        // a read current exceeds the threshold
);

  cond_t g_q [N][K];

  // Read path.
  always_comb begin
    longint acc;
    read_overdrive = 1'b0;
    for (int c = 0; c < K; c++) begin
      acc = 0;
      if (en) begin
        for (int r = 0; r < N; r++) begin
          acc += longint'(x[r]) * (longint'(g_q[r][c]) - longint'(G_FIXED));
          if ((x[r] < 0 ? -longint'(x[r]) : longint'(x[r])) * longint'(g_q[r][c]) > longint'(I_TH))
            read_overdrive = 1'b1;
        end
      end
      i_col[c] = curr_t'(acc);
    end
  end

  // Programming path: one conductance step per over-threshold training cycle.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int r = 0; r < N; r++)
        for (int c = 0; c < K; c++)
          g_q[r][c] <= cond_t'(G_FIXED);
    end else if (!en) begin
      for (int r = 0; r < N; r++) begin
        for (int c = 0; c < K; c++) begin
          if (i_tune[r][c] > curr_t'(I_TH))
            g_q[r][c] <= (int'(g_q[r][c]) + G_STEP > G_MAX) ? cond_t'(G_MAX)
                                                            : g_q[r][c] + cond_t'(G_STEP);
          else if (i_tune[r][c] < -curr_t'(I_TH))
            g_q[r][c] <= (int'(g_q[r][c]) - G_STEP < G_MIN) ? cond_t'(G_MIN)
                                                            : g_q[r][c] - cond_t'(G_STEP);
        end
      end
    end
  end

  assign g_plus = g_q;

  // Inputs must stay within the +/-0.5 V range of the pass transistors.
  always_comb begin
    if (en)
      for (int r = 0; r < N; r++)
        assert (x[r] < volt_t'(V_IN_MAX_MV) && x[r] > -volt_t'(V_IN_MAX_MV))
          else $error("memristive_crossbar: input %0d out of range", r);
  end

endmodule
