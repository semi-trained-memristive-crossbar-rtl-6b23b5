// elm_pkg: types and constants shared by the semi-trained memristive ELM
// output layer.
//
// Analog quantities that cross module boundaries are carried as signed
// integers in fixed units: voltages in millivolts, conductances in
// nanosiemens, currents in picoamperes (mV * nS = pA). The numbers that come
// from the paper are the memristor low/high resistance states (100 kOhm /
// 250 kOhm), the +/-0.5 V input range, the 4 uA tuning current, the 3.2 uA
// device current threshold, the 500 kOhm feedback resistor of the neuron
// example and the 4x4 network size. The number of conductance steps, the
// fixed M- value and the op-amp rail voltage are this design's own choices.
package elm_pkg;

  // Network size of the evaluated chip: a single 4x4 layer.
  localparam int unsigned N_ROWS_DEFAULT = 4;   // n, inputs (crossbar word-line pairs)
  localparam int unsigned N_COLS_DEFAULT = 4;   // k, output neurons (bit-lines)

  // Signal widths.
  localparam int unsigned VW = 12;              // voltage word, signed mV
  localparam int unsigned GW = 16;              // conductance word, unsigned nS
  localparam int unsigned IW = 32;              // current word, signed pA

  typedef logic signed [VW-1:0] volt_t;         // millivolts
  typedef logic        [GW-1:0] cond_t;         // nanosiemens
  typedef logic signed [IW-1:0] curr_t;         // picoamperes

  // Device and circuit constants.
  localparam int G_LRS_NS      = 10000;         // 1 / 100 kOhm
  localparam int G_HRS_NS      = 4000;          // 1 / 250 kOhm
  localparam int V_IN_MAX_MV   = 500;           // |x| < 0.5 V
  localparam int I_TUNE_PA     = 4_000_000;     // 4 uA tuning current
  localparam int I_THRESH_PA   = 3_200_000;     // 3.2 uA current threshold
  localparam int RF_KOHM       = 500;           // neuron feedback resistor
  localparam int V_RAIL_MV     = 600;           // op-amp output limit (assumed)

  // Global controller states (Fig. 11).
  typedef enum logic [1:0] {
    ST_READ     = 2'd0,
    ST_TRAIN_C1 = 2'd1,
    ST_TRAIN_C2 = 2'd2
  } gc_state_e;

  // Direction of the Ziksa current through one memristor.
  typedef enum logic [1:0] {
    TUNE_NONE = 2'd0,
    TUNE_INC  = 2'd1,   // weight up: M+ resistance down, conductance up
    TUNE_DEC  = 2'd2    // weight down: M+ resistance up, conductance down
  } tune_e;

endpackage
