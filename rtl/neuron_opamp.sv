// neuron_opamp: BEHAVIOURAL MODEL (not synthesizable circuit) of the output
// neuron, an inverting op-amp with feedback resistor Rf on one bit-line.
//
// The column current I (pA) flows into the virtual-ground input; the output
// is t* = -Rf * I, which for the one-crossbar topology gives
//   t* = sum_r ( -x_r * Rf / M+ + x_r * Rf / M- ).
// The op-amp cannot swing past its supply, so the output saturates at
// +/- V_RAIL: this saturation is the neuron's non-linearity. Rf = 500 kOhm is
// the value of the paper's neuron example; the +/-600 mV rail is this
// model's assumption. Output in mV, rounded toward zero. Combinational.
module neuron_opamp
  import elm_pkg::*;
#(
  parameter int RF     = RF_KOHM,     // feedback resistor, kOhm
  parameter int V_RAIL = V_RAIL_MV    // output limit, mV
) (
  input  curr_t i_in,       // bit-line current, pA
  output volt_t v_out,      // t*, mV
  output logic  saturated   // output clipped at a rail
);

  always_comb begin
    longint v;
    // kOhm * pA = nV; / 1e6 -> mV
    v = -(longint'(RF) * longint'(i_in)) / 64'sd1000000;
    saturated = 1'b0;
    if (v > longint'(V_RAIL)) begin
      v = longint'(V_RAIL);
      saturated = 1'b1;
    end else if (v < -longint'(V_RAIL)) begin
      v = -longint'(V_RAIL);
      saturated = 1'b1;
    end
    v_out = volt_t'(v);
  end

endmodule
