// global_controller: sequencer of the ELM output layer.
//
// Three states, as in the paper's algorithmic state machine:
//   Read     : En = 1. The input pass transistors are on and the crossbar
//              computes t* = X * beta. When a sample is presented
//              (sample_valid) the error bits are captured (capture = 1) and,
//              if learn = 1, training starts with column 0.
//   Train_C1 : Polar = 0, TrEn = 1, ColEn of the current column = 1:
//              positive (increment) cycle of that column.
//   Train_C2 : Polar = 1, TrEn = 1, ColEn of the current column = 1:
//              negative (decrement) cycle. The error shift register is
//              advanced (shift = 1) and the column counter incremented; when
//              it reaches K the controller returns to Read, otherwise to
//              Train_C1 for the next column.
// A full training pass therefore takes 2*K cycles after the Read cycle in
// which the sample was captured, two cycles per column as in the paper.
// The sample_valid / learn handshake, the one-hot ColEn bus and the
// active-low synchronous reset (to Read, counter 0) are this design's choices.
module global_controller
  import elm_pkg::*;
#(
  parameter int unsigned K = N_COLS_DEFAULT   // number of columns (output neurons)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         sample_valid, // a new input/label pair is on the inputs
  input  logic         learn,        // 1 = train on the captured sample
  output gc_state_e    state,
  output logic         en,           // input/output pass transistors on
  output logic         polar,        // 0 = positive cycle, 1 = negative cycle
  output logic         tr_en,        // training enable to the row controllers
  output logic [K-1:0] col_en,       // one-hot column select
  output logic         capture,      // load error bits into the shift register
  output logic         shift,        // advance the error shift register
  output logic         ready         // in Read, accepting a sample
);

  localparam int unsigned CW = (K > 1) ? $clog2(K + 1) : 1;

  gc_state_e       state_q, state_d;
  logic [CW-1:0]   cnt_q, cnt_d;

  always_comb begin
    state_d = state_q;
    cnt_d   = cnt_q;
    en      = 1'b0;
    polar   = 1'b0;
    tr_en   = 1'b0;
    col_en  = '0;
    capture = 1'b0;
    shift   = 1'b0;
    unique case (state_q)
      ST_READ: begin
        en = 1'b1;
        if (sample_valid) begin
          capture = 1'b1;
          if (learn) begin
            state_d = ST_TRAIN_C1;
            cnt_d   = '0;
          end
        end
      end
      ST_TRAIN_C1: begin
        polar  = 1'b0;
        tr_en  = 1'b1;
        col_en = K'(1) << cnt_q;
        state_d = ST_TRAIN_C2;
      end
      ST_TRAIN_C2: begin
        polar  = 1'b1;
        tr_en  = 1'b1;
        col_en = K'(1) << cnt_q;
        shift  = 1'b1;
        cnt_d  = cnt_q + 1'b1;
        state_d = (cnt_d == CW'(K)) ? ST_READ : ST_TRAIN_C1;
      end
      default: state_d = ST_READ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= ST_READ;
      cnt_q   <= '0;
    end else begin
      state_q <= state_d;
      cnt_q   <= cnt_d;
    end
  end

  assign state = state_q;
  assign ready = (state_q == ST_READ);

  // At most one column is trained at a time.
  always_comb assert ($onehot0(col_en)) else $error("global_controller: ColEn not one-hot");

endmodule
