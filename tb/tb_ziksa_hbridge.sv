// tb_ziksa_hbridge: random row/column drive patterns; each cell must carry
// +I_TUNE (increment) only when its row is enabled and T5 of its column is
// on, -I_TUNE (decrement) when its row is enabled and T6 is on, else 0.
module tb_ziksa_hbridge;
  import elm_pkg::*;
  localparam int unsigned N = 4, K = 4;
  logic [N-1:0] row_out_n;
  logic [K-1:0] pt, nt;
  tune_e tune [N][K];
  curr_t i_pa [N][K];
  int checks = 0, failures = 0;

  ziksa_hbridge #(.N(N), .K(K)) dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      row_out_n = N'($urandom);
      for (int c = 0; c < K; c++) begin
        case ($urandom_range(2))
          0: begin pt[c] = 1; nt[c] = 0; end   // off
          1: begin pt[c] = 0; nt[c] = 0; end   // T5 on
          default: begin pt[c] = 1; nt[c] = 1; end // T6 on
        endcase
      end
      #1;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < K; c++) begin
          int e;
          e = 0;
          if (!row_out_n[r] && !pt[c]) e = 4_000_000;
          if (!row_out_n[r] &&  nt[c]) e = -4_000_000;
          checks++;
          if (int'(i_pa[r][c]) != e ||
              tune[r][c] != (e > 0 ? TUNE_INC : e < 0 ? TUNE_DEC : TUNE_NONE)) begin
            failures++;
            $display("FAIL r=%0d c=%0d i=%0d exp=%0d", r, c, i_pa[r][c], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
