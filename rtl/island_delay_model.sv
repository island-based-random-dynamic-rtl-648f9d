// island_delay_model: behavioural model (not synthesizable logic) of how the
// supply voltage of each voltage island sets the time its AES round takes.
//
// On silicon this is an analog effect: a gate's delay follows the
// Sakurai-Newton alpha-power law tau ~ V / (V - VT)^alpha with alpha = 2.
// The model reads the voltage code of each of the four power domains
// (V = 0.6 V + 0.1 V * code, codes above 4 read as 1.0 V, the range used in
// the design's experiments), looks up each island's domain, scales a round's
// delay at 1.0 V (BASE_CYCLES clock cycles) by tau(V)/tau(1.0 V), rounds up to
// whole cycles, and adds the two islands of a stage to give that stage's
// completion delay. With the defaults an island takes 4, 5, 7, 9 or 14
// cycles at 1.0, 0.9, 0.8, 0.7 or 0.6 V, and a stage 8 to 28 cycles.
//
// alpha = 2 and the voltage set follow the design description. The threshold
// voltage VT_MV and the clock-cycle scale BASE_CYCLES are not given and are
// assumptions. Purely combinational, in integer millivolt arithmetic.
module island_delay_model
  import irdvs_pkg::*;
#(
  parameter int unsigned VT_MV       = 300,  // threshold voltage, mV
  parameter int unsigned BASE_CYCLES = 4     // one round at 1.0 V, cycles
) (
  input  vcode_t             dom_vcode_i  [NUM_DOMAINS],
  input  dom_sel_t           island_dom_i [NUM_ISLANDS],
  output logic [DELAY_W-1:0] island_delay_o [NUM_ISLANDS],
  output logic [DELAY_W-1:0] stage_delay_o  [NUM_STAGES]
);
  // tau(V) / tau(1.0 V) = (V / 1.0) * ((1.0 - VT) / (V - VT))^2, in mV,
  // times BASE_CYCLES, rounded up. alpha = 2 is the square.
  function automatic logic [DELAY_W-1:0] cycles_at(input vcode_t code);
    longint unsigned v_mv, num, den;
    v_mv = 64'd600 + 64'd100 * ((int'(code) >= NUM_VLEVELS) ? 64'(NUM_VLEVELS - 1) : 64'(code));
    num  = 64'(BASE_CYCLES) * v_mv * (64'd1000 - 64'(VT_MV)) * (64'd1000 - 64'(VT_MV));
    den  = 64'd1000 * (v_mv - 64'(VT_MV)) * (v_mv - 64'(VT_MV));
    return DELAY_W'((num + den - 64'd1) / den);
  endfunction

  always_comb begin
    for (int i = 0; i < NUM_ISLANDS; i++)
      island_delay_o[i] = cycles_at(dom_vcode_i[island_dom_i[i]]);
    for (int s = 0; s < NUM_STAGES; s++)
      stage_delay_o[s] = island_delay_o[2*s] + island_delay_o[2*s + 1];
  end
endmodule
