// ziksa_hbridge: BEHAVIOURAL MODEL (not synthesizable circuit) of the Ziksa
// training circuit of the whole crossbar.
//
// In silicon every row has a +Tr half bridge (current mirror T1-T2 limiting
// the current to I-, cascode mirror T3-T4 supplying I+) behind a tri-state
// transmission gate, and every column has a -Tr half bridge (T5 to Vdd,
// T6 to ground). A memristor at (row r, column c) carries a tuning current
// only when the tri-state of row r is on (row_out_n[r] = 0) and one of the
// -Tr transistors of column c conducts:
//   T5 on (pt[c] = 0): current flows from the column into the row end,
//                      the resistance drops and the weight is incremented;
//   T6 on (nt[c] = 1): current flows the other way, the weight is decremented.
// The current mirrors hold the magnitude at the tuning current I_TUNE_PA
// (4 uA), above the 3.2 uA device threshold. This model reports, per cell,
// the direction (tune) and the signed current (i_pa) for the crossbar model.
// The topology and the 4 uA reference follow the paper; treating the mirror
// current as exactly constant (the paper shows it varies with the memristor
// value, less so with a cascode mirror) is this model's simplification.
// Combinational.
module ziksa_hbridge
  import elm_pkg::*;
#(
  parameter int unsigned N = N_ROWS_DEFAULT,
  parameter int unsigned K = N_COLS_DEFAULT,
  parameter int          I_TUNE = I_TUNE_PA
) (
  input  logic [N-1:0] row_out_n,   // row tri-state controls, active low
  input  logic [K-1:0] pt,          // T5 gates, active low
  input  logic [K-1:0] nt,          // T6 gates, active high
  output tune_e        tune [N][K], // direction of the cell current
  output curr_t        i_pa [N][K]  // signed cell current, pA
);

  always_comb begin
    for (int r = 0; r < N; r++) begin
      for (int c = 0; c < K; c++) begin
        tune[r][c] = TUNE_NONE;
        i_pa[r][c] = '0;
        if (!row_out_n[r]) begin
          if (!pt[c]) begin
            tune[r][c] = TUNE_INC;
            i_pa[r][c] = curr_t'(I_TUNE);
          end else if (nt[c]) begin
            tune[r][c] = TUNE_DEC;
            i_pa[r][c] = -curr_t'(I_TUNE);
          end
        end
      end
    end
  end

  // A column must never have T5 and T6 on at once.
  always_comb assert ((~pt & nt) == '0) else $error("ziksa_hbridge: column shoot-through");

endmodule
