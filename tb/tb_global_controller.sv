// tb_global_controller: checks the Read / Train_C1 / Train_C2 sequence.
// Presents samples with learn = 1 and learn = 0, follows the controller
// cycle by cycle and compares every output with the expected sequence:
// one Read cycle with capture, then for each column c a Train_C1 cycle
// (Polar 0, TrEn 1, ColEn = c) and a Train_C2 cycle (Polar 1, TrEn 1,
// ColEn = c, shift), back to Read after exactly 2*K training cycles.
module tb_global_controller;
  import elm_pkg::*;
  localparam int unsigned K = 4;

  logic clk = 0, rst_n = 0, sample_valid = 0, learn = 0;
  gc_state_e state;
  logic en, polar, tr_en, capture, shift, ready;
  logic [K-1:0] col_en;
  int checks = 0, failures = 0;

  global_controller #(.K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_out(string tag, logic e_en, logic e_pol, logic e_tr,
                            logic [K-1:0] e_col, logic e_cap, logic e_sh, logic e_rdy);
    checks++;
    if ({en, polar, tr_en, col_en, capture, shift, ready} !==
        {e_en, e_pol, e_tr, e_col, e_cap, e_sh, e_rdy}) begin
      failures++;
      $display("FAIL %s: en=%b pol=%b tr=%b col=%b cap=%b sh=%b rdy=%b", tag,
               en, polar, tr_en, col_en, capture, shift, ready);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    expect_out("idle read", 1, 0, 0, '0, 0, 0, 1);
    for (int s = 0; s < 3; s++) begin
      int cycles;
      learn = (s != 1);
      sample_valid = 1;
      @(negedge clk);
      sample_valid = 0; #1;
      if (!learn) begin
        expect_out("read, no learn", 1, 0, 0, '0, 0, 0, 1);
        continue;
      end
      cycles = 0;
      for (int c = 0; c < K; c++) begin
        expect_out("train_c1", 0, 0, 1, K'(1) << c, 0, 0, 0);
        checks++; if (state != ST_TRAIN_C1) failures++;
        @(negedge clk); cycles++;
        expect_out("train_c2", 0, 1, 1, K'(1) << c, 0, 1, 0);
        checks++; if (state != ST_TRAIN_C2) failures++;
        @(negedge clk); cycles++;
      end
      // Two cycles per column: back in Read after 2*K cycles.
      checks++;
      if (cycles != 2 * K || !ready || state != ST_READ) begin
        failures++;
        $display("FAIL training took %0d cycles or did not return to Read", cycles);
      end
      expect_out("back in read", 1, 0, 0, '0, 0, 0, 1);
    end
    // Capture pulses only with sample_valid in Read.
    sample_valid = 1; learn = 0; #1;
    expect_out("capture", 1, 0, 0, '0, 1, 0, 1);
    @(negedge clk); sample_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
