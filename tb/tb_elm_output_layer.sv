// tb_elm_output_layer: end-to-end test of the ELM output layer at its
// default size (4 x 4).
//
// A small four-class problem stands in for the hidden-layer outputs: each
// class has a prototype vector of four voltages within +/-300 mV, and every
// sample is its prototype plus random noise. The target t is +300 mV for
// the neuron of the sample's class and -300 mV for the others. The bench
// trains for several epochs (learn = 1) and then runs a read-only epoch
// (learn = 0), followed by a saturation phase (see below).
//
// The bench keeps an independent reference model of the layer: conductance
// array, column currents, op-amp output with rail clipping, error bits and
// the sign-based update rule (every cell of column c moves one step up when
// S(x) * S(t* - t) = +1 and one step down otherwise, clipped at LRS/HRS).
// After every sample it compares t*, the error bits, the training cycle
// count (2 cycles per column) and the whole conductance array with the
// reference. It also counts how often each mechanism of the design
// occurred and fails if one never did: read-only sample, training pass,
// increment and decrement cycles, conductance saturation at LRS and at HRS,
// op-amp saturation, and error bits of both values.
module tb_elm_output_layer;
  import elm_pkg::*;
  localparam int unsigned N = N_ROWS_DEFAULT, K = N_COLS_DEFAULT;
  localparam int GMAX = G_LRS_NS, GMIN = G_HRS_NS, GFIX = (G_LRS_NS + G_HRS_NS) / 2;
  localparam int GSTEP = 400;
  localparam int EPOCHS = 12, SAMPLES = 16;

  logic clk = 0, rst_n = 0, sample_valid = 0, learn = 0;
  volt_t x [N];
  volt_t t_lbl [K];
  volt_t t_out [K];
  logic [K-1:0] err, err_held, saturated;
  logic ready, read_overdrive;
  gc_state_e state;
  cond_t g_plus [N][K];

  elm_output_layer dut (.*);

  always #5 clk = ~clk;   // 100 MHz

  int checks = 0, failures = 0;
  int ref_g [N][K];
  int proto [K][N];
  int n_read_only = 0, n_train = 0, n_inc = 0, n_dec = 0, n_lrs = 0, n_hrs = 0;
  int n_opamp_sat = 0, n_err1 = 0, n_err0 = 0, n_inc_cycles = 0, n_dec_cycles = 0;
  int correct_last = 0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_tout(int c);
    longint i, v;
    i = 0;
    for (int r = 0; r < N; r++) i += longint'(x[r]) * (ref_g[r][c] - GFIX);
    v = -(500 * i) / 1000000;
    if (v > 600) v = 600;
    if (v < -600) v = -600;
    return int'(v);
  endfunction

  // lbl_all != 0 overrides the class targets with one value for every neuron.
  task automatic run_sample(int cls, logic do_learn, int lbl_all = 0);
    int exp_t [K];
    logic [K-1:0] exp_err;
    int cycles, best;
    for (int r = 0; r < N; r++)
      x[r] = volt_t'(proto[cls][r] + int'($urandom_range(60)) - 30);
    for (int c = 0; c < K; c++) t_lbl[c] = volt_t'((lbl_all != 0) ? lbl_all : (c == cls) ? 300 : -300);
    checks++;
    if (!ready) begin failures++; $display("FAIL not ready"); end
    learn = do_learn;
    sample_valid = 1;
    #1;
    best = 0;
    for (int c = 0; c < K; c++) begin
      exp_t[c] = ref_tout(c);
      exp_err[c] = exp_t[c] > int'(t_lbl[c]);
      if (exp_t[c] == 600 || exp_t[c] == -600) n_opamp_sat++;
      if (exp_err[c]) n_err1++; else n_err0++;
      checks++;
      if (int'(t_out[c]) != exp_t[c]) begin
        failures++;
        $display("FAIL t*[%0d]=%0d exp %0d", c, t_out[c], exp_t[c]);
      end
      if (exp_t[c] > exp_t[best]) best = c;
    end
    checks++;
    if (err !== exp_err) begin failures++; $display("FAIL err=%b exp %b", err, exp_err); end
    if (!do_learn && best == cls) correct_last++;
    @(negedge clk);
    sample_valid = 0;
    checks++;
    if (err_held !== exp_err) begin failures++; $display("FAIL held err=%b exp %b", err_held, exp_err); end
    if (!do_learn) begin
      n_read_only++;
      checks++;
      if (state != ST_READ) begin failures++; $display("FAIL left Read without learn"); end
      return;
    end
    n_train++;
    cycles = 0;
    while (!ready && cycles < 4 * K) begin
      if (state == ST_TRAIN_C1) n_inc_cycles++;
      if (state == ST_TRAIN_C2) n_dec_cycles++;
      @(negedge clk);
      cycles++;
    end
    checks++;
    if (cycles != 2 * K) begin failures++; $display("FAIL training took %0d cycles, exp %0d", cycles, 2 * K); end
    // Reference update.
    for (int c = 0; c < K; c++)
      for (int r = 0; r < N; r++) begin
        int sh, se;
        sh = (x[r] > 0) ? 1 : -1;
        se = exp_err[c] ? 1 : -1;
        if (sh * se > 0) begin
          n_inc++;
          if (ref_g[r][c] + GSTEP > GMAX) n_lrs++;
          ref_g[r][c] = (ref_g[r][c] + GSTEP > GMAX) ? GMAX : ref_g[r][c] + GSTEP;
        end else begin
          n_dec++;
          if (ref_g[r][c] - GSTEP < GMIN) n_hrs++;
          ref_g[r][c] = (ref_g[r][c] - GSTEP < GMIN) ? GMIN : ref_g[r][c] - GSTEP;
        end
      end
    for (int r = 0; r < N; r++)
      for (int c = 0; c < K; c++) begin
        checks++;
        if (int'(g_plus[r][c]) != ref_g[r][c]) begin
          failures++;
          $display("FAIL g[%0d][%0d]=%0d exp %0d", r, c, g_plus[r][c], ref_g[r][c]);
        end
      end
  endtask

  task automatic count(string what, int n);
    $display("  %-28s %0d", what, n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never exercised: %s", what); end
  endtask

  initial begin
    // Class prototypes: sign patterns of the four Walsh vectors, 250 mV.
    for (int c = 0; c < K; c++)
      for (int r = 0; r < N; r++)
        proto[c][r] = ($countones(c & r) % 2 == 0) ? 250 : -250;
    for (int r = 0; r < N; r++) begin
      x[r] = '0;
      for (int c = 0; c < K; c++) ref_g[r][c] = GFIX;
    end
    for (int c = 0; c < K; c++) t_lbl[c] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int e = 0; e < EPOCHS; e++)
      for (int s = 0; s < SAMPLES; s++) run_sample(s % K, 1'b1);
    for (int s = 0; s < SAMPLES; s++) run_sample(s % K, 1'b0);
    $display("Read-only accuracy after training: %0d / %0d", correct_last, SAMPLES);
    // Saturation phase: a target far below any reachable output keeps every
    // error bit at 1, so each cell moves the same way on every pass until
    // it reaches LRS or HRS and the outputs reach the op-amp rail.
    for (int s = 0; s < 12; s++) run_sample(3, 1'b1, -2000);
    run_sample(3, 1'b0, -2000);
    count("read-only samples", n_read_only);
    count("training passes", n_train);
    count("Train_C1 cycles", n_inc_cycles);
    count("Train_C2 cycles", n_dec_cycles);
    count("cell increments", n_inc);
    count("cell decrements", n_dec);
    count("saturation at LRS", n_lrs);
    count("saturation at HRS", n_hrs);
    count("op-amp rail clipping", n_opamp_sat);
    count("error bit 1", n_err1);
    count("error bit 0", n_err0);
    checks++;
    if (correct_last < SAMPLES * 3 / 4) begin
      failures++;
      $display("FAIL layer did not learn the task");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
