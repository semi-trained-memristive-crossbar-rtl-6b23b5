// error_shift_register: holds the error bits between inference and learning.
//
// On capture the K error bits from the error computing unit are loaded in
// parallel. During learning the bit of the column being trained is always
// at err_cur (bit 0); shift moves the next column's bit there, one column
// per Train_C2 cycle. Capture wins over shift. Loading in parallel and
// shifting towards bit 0 is this design's choice: the paper only says that
// the error is stored into a shift register for the learning phase.
// Registers are cleared by the active-low synchronous reset.
module error_shift_register
  import elm_pkg::*;
#(
  parameter int unsigned K = N_COLS_DEFAULT
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         capture,
  input  logic         shift,
  input  logic [K-1:0] err_in,
  output logic         err_cur,   // error of the column under training
  output logic [K-1:0] err_q      // whole register, for observation
);

  always_ff @(posedge clk) begin
    if (!rst_n)       err_q <= '0;
    else if (capture) err_q <= err_in;
    else if (shift)   err_q <= err_q >> 1;
  end

  assign err_cur = err_q[0];

endmodule
