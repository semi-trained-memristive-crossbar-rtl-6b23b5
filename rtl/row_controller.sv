// row_controller: local control unit of one crossbar row.
//
// During learning the weight change of the simplified delta rule is
// alpha * S(h) * S(t* - t). The row controller forms this sign from the sign
// of its row input (input_pos = 1 when x > 0) and the error bit of the column
// being trained (error = 1 when t* > t). A positive product means the weight
// must be incremented, which happens in the positive training cycle
// (polar = 0); a negative product means a decrement, done in the negative
// cycle (polar = 1). With tr_en low the row never takes part.
//
// Output out_n drives the tri-state gate at the +Tr output of the row and is
// active low: 0 lets the Ziksa current flow through the row, 1 isolates it.
//   out_n = ~tr_en | (input_pos ^ error ^ polar)
// Signal names and the inputs (Input, Error, Polar, TrEn, Out) follow the
// paper's row control unit; the active-low polarity of Out is this design's
// choice. Purely combinational, no clock.
module row_controller (
  input  logic input_pos,  // sign of the row input: 1 = positive
  input  logic error,      // 1 = t* > t for the column under training
  input  logic polar,      // 0 = positive (increment) cycle, 1 = negative
  input  logic tr_en,      // training enable from the global controller
  output logic out_n       // 0 = row tri-state enabled
);

  logic grad_neg;          // 1 when S(h) * S(t* - t) = -1

  always_comb begin
    grad_neg = input_pos ^ error;
    out_n    = ~tr_en | (grad_neg ^ polar);
  end

endmodule
