// tb_memristive_crossbar: keeps its own copy of the conductance array,
// applies random training pulses (with En = 0) and random reads (En = 1),
// and checks the column currents and conductances. Also checks that reads
// never change the state, that sub-threshold tuning currents do nothing,
// that the conductance saturates at LRS and HRS, and the over-threshold
// read flag.
module tb_memristive_crossbar;
  import elm_pkg::*;
  localparam int unsigned N = 4, K = 4;
  localparam int GMAX = 10000, GMIN = 4000, GFIX = 7000, GSTEP = 400;

  logic clk = 0, rst_n = 0, en = 0, read_overdrive;
  volt_t x [N];
  curr_t i_tune [N][K];
  curr_t i_col [K];
  cond_t g_plus [N][K];
  int ref_g [N][K];
  int checks = 0, failures = 0, n_sat_hi = 0, n_sat_lo = 0;

  memristive_crossbar #(.N(N), .K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_state(string tag);
    for (int r = 0; r < N; r++)
      for (int c = 0; c < K; c++) begin
        checks++;
        if (int'(g_plus[r][c]) != ref_g[r][c]) begin
          failures++;
          $display("FAIL %s g[%0d][%0d]=%0d exp %0d", tag, r, c, g_plus[r][c], ref_g[r][c]);
        end
      end
  endtask

  task automatic check_read(int xmax);
    logic ovd;
    ovd = 0;
    for (int r = 0; r < N; r++) x[r] = volt_t'(int'($urandom_range(2 * xmax)) - xmax);
    en = 1;
    #1;
    for (int c = 0; c < K; c++) begin
      longint e;
      e = 0;
      for (int r = 0; r < N; r++) begin
        e += longint'(x[r]) * ref_g[r][c] - longint'(x[r]) * GFIX;
        if ((x[r] < 0 ? -int'(x[r]) : int'(x[r])) * ref_g[r][c] > 3_200_000) ovd = 1;
      end
      checks++;
      if (longint'(i_col[c]) != e) begin
        failures++;
        $display("FAIL read col %0d i=%0d exp=%0d", c, i_col[c], e);
      end
    end
    checks++;
    if (read_overdrive != ovd) begin failures++; $display("FAIL overdrive flag"); end
  endtask

  initial begin
    for (int r = 0; r < N; r++) begin
      x[r] = '0;
      for (int c = 0; c < K; c++) begin i_tune[r][c] = '0; ref_g[r][c] = GFIX; end
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    check_state("reset");
    for (int n = 0; n < 400; n++) begin
      // Training cycle.
      en = 0;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < K; c++) begin
          int sel;
          sel = $urandom_range(4);
          // Bias the walk so that both rails are reached.
          if (n < 150 && sel == 2) sel = 1;
          if (n >= 150 && n < 300 && sel == 1) sel = 2;
          case (sel)
            1: i_tune[r][c] = curr_t'(4_000_000);
            2: i_tune[r][c] = -curr_t'(4_000_000);
            3: i_tune[r][c] = curr_t'(3_000_000);   // below threshold
            default: i_tune[r][c] = '0;
          endcase
        end
      @(negedge clk);
      for (int r = 0; r < N; r++)
        for (int c = 0; c < K; c++) begin
          if (i_tune[r][c] > 3_200_000) begin
            if (ref_g[r][c] + GSTEP > GMAX) n_sat_hi++;
            ref_g[r][c] = (ref_g[r][c] + GSTEP > GMAX) ? GMAX : ref_g[r][c] + GSTEP;
          end else if (i_tune[r][c] < -3_200_000) begin
            if (ref_g[r][c] - GSTEP < GMIN) n_sat_lo++;
            ref_g[r][c] = (ref_g[r][c] - GSTEP < GMIN) ? GMIN : ref_g[r][c] - GSTEP;
          end
        end
      check_state("train");
      // Read cycle with tuning currents still applied: must not program.
      check_read((n % 10 == 0) ? 499 : 300);
      @(negedge clk);
      check_state("after read");
    end
    checks++;
    if (n_sat_hi == 0 || n_sat_lo == 0) begin
      failures++;
      $display("FAIL saturation not exercised hi=%0d lo=%0d", n_sat_hi, n_sat_lo);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
