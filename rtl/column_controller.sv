// column_controller: local control unit of one crossbar column.
//
// Drives the two transistors of the column's -Tr half of the Ziksa H-bridge:
// T5 (p-type, gate pt, on when pt = 0) sources the tuning current into the
// column in the positive cycle, T6 (n-type, gate nt, on when nt = 1) sinks
// it in the negative cycle. With col_en low both are off.
//   pt = polar | ~col_en
//   nt = polar &  col_en
// Both equations follow from the paper's description: with ColEn set, the
// low period of Polar sets PT low (T5 on) and NT low (T6 off), the high
// period does the opposite. Purely combinational, no clock.
module column_controller (
  input  logic polar,   // 0 = positive cycle, 1 = negative cycle
  input  logic col_en,  // this column is selected for training
  output logic pt,      // gate of T5, active low
  output logic nt       // gate of T6, active high
);

  always_comb begin
    pt = polar | ~col_en;
    nt = polar &  col_en;
  end

  // T5 and T6 must never conduct together (shoot-through).
  always_comb assert (!(pt == 1'b0 && nt == 1'b1))
    else $error("column_controller: T5 and T6 on together");

endmodule
