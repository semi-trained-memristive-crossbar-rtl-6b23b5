// elm_workload_run: test harness that trains one elm_output_layer of size
// N x K on synthetic class data and checks it cycle by cycle against an
// independent reference model (same rules as tb_elm_output_layer: op-amp
// output with rail clipping, error bits, two training cycles per column,
// one conductance step per cell per pass, clipped at LRS/HRS).
//
// The data: K class prototypes of N voltages with random signs and
// magnitude AMP (about 1000 mV / N), each sample is a prototype plus
// +/-AMP/4 noise; the
// target is +300 mV for the sample's class and -300 mV for the others.
// After EPOCHS training epochs a read-only epoch measures the training-set
// accuracy, which is reported (not checked: the data are synthetic).
// Raises done when finished; checks and failures are read by the parent.
module elm_workload_run
  import elm_pkg::*;
#(
  parameter int unsigned N = 4,
  parameter int unsigned K = 4,
  parameter int          EPOCHS = 8,
  parameter int          SAMPLES = 2 * K,
  parameter string       NAME = "layer"
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int GMAX = G_LRS_NS, GMIN = G_HRS_NS, GFIX = (G_LRS_NS + G_HRS_NS) / 2;
  localparam int GSTEP = 400;
  // Input amplitude shrinks with the row count so that a column sum stays
  // within the op-amp rails: about 1000 mV / N, at most 250 mV.
  localparam int AMP = (1000 / int'(N) > 250) ? 250 : (1000 / int'(N) < 8) ? 8 : 1000 / int'(N);
  localparam int NOISE = AMP / 4;

  logic rst_n = 0, sample_valid = 0, learn = 0;
  volt_t x [N];
  volt_t t_lbl [K];
  volt_t t_out [K];
  logic [K-1:0] err, err_held, saturated;
  logic ready, read_overdrive;
  gc_state_e state;
  cond_t g_plus [N][K];
  int ref_g [N][K];
  int proto [K][N];
  int correct;

  elm_output_layer #(.N(N), .K(K)) dut (.*);

  function automatic int ref_tout(int c);
    longint i, v;
    i = 0;
    for (int r = 0; r < N; r++) i += longint'(x[r]) * (ref_g[r][c] - GFIX);
    v = -(500 * i) / 1000000;
    if (v > 600) v = 600;
    if (v < -600) v = -600;
    return int'(v);
  endfunction

  task automatic run_sample(int cls, logic do_learn);
    logic [K-1:0] exp_err;
    int cycles, best, bestv, e;
    for (int r = 0; r < N; r++) x[r] = volt_t'(proto[cls][r] + int'($urandom_range(2 * NOISE)) - NOISE);
    for (int c = 0; c < K; c++) t_lbl[c] = volt_t'((c == cls) ? 300 : -300);
    learn = do_learn;
    sample_valid = 1;
    #1;
    best = 0; bestv = -100000;
    for (int c = 0; c < K; c++) begin
      e = ref_tout(c);
      exp_err[c] = e > int'(t_lbl[c]);
      checks++;
      if (int'(t_out[c]) != e) begin
        failures++;
        $display("FAIL %s t*[%0d]=%0d exp %0d", NAME, c, t_out[c], e);
      end
      if (e > bestv) begin bestv = e; best = c; end
    end
    checks++;
    if (err !== exp_err) begin failures++; $display("FAIL %s err", NAME); end
    if (!do_learn && best == cls) correct++;
    @(negedge clk);
    sample_valid = 0;
    if (!do_learn) return;
    cycles = 0;
    while (!ready && cycles < 4 * K) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles != 2 * K) begin failures++; $display("FAIL %s %0d training cycles", NAME, cycles); end
    for (int c = 0; c < K; c++)
      for (int r = 0; r < N; r++) begin
        if (((x[r] > 0) ? 1 : -1) * (exp_err[c] ? 1 : -1) > 0)
          ref_g[r][c] = (ref_g[r][c] + GSTEP > GMAX) ? GMAX : ref_g[r][c] + GSTEP;
        else
          ref_g[r][c] = (ref_g[r][c] - GSTEP < GMIN) ? GMIN : ref_g[r][c] - GSTEP;
      end
    for (int r = 0; r < N; r++)
      for (int c = 0; c < K; c++) begin
        checks++;
        if (int'(g_plus[r][c]) != ref_g[r][c]) begin
          failures++;
          $display("FAIL %s g[%0d][%0d]", NAME, r, c);
        end
      end
  endtask

  initial begin
    done = 0; checks = 0; failures = 0; correct = 0;
    for (int c = 0; c < K; c++)
      for (int r = 0; r < N; r++) proto[c][r] = $urandom_range(1) ? AMP : -AMP;
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
    $display("%s (%0d x %0d): read-only accuracy %0d / %0d, %0d checks, %0d failures",
             NAME, N, K, correct, SAMPLES, checks, failures);
    done = 1;
  end
endmodule
