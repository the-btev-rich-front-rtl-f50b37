// analog_front_end: behavioural model of one channel's analog processor
// (charge preamplifier, semi-Gaussian shaper, high pass filter and
// pole-zero cancellation). This is a behavioural model, not logic: the real
// block is analog circuitry.
//
// The model gives the peak shaper voltage, in microvolts, for the charge that
// arrives on the input in the current cycle, plus the calibration charge when
// 'cal_inject' is set. The gain is 5 mV for 27,000 electrons, the figure the
// chip reached at its lowest threshold, and the response is linear up to
// 220 fC (about 1,373,000 electrons) and flat above it. The pulse shape, the
// noise, the high pass filter and the pole-zero cancellation are not modelled:
// the output simply holds the peak value as long as the input charge is held.
// Signed charge gives a signed output, so both signal polarities can be used.
//
// Combinational, no clock.
module analog_front_end #(
  parameter int GAIN_UV_NUM   = 5000,     // microvolts ...
  parameter int GAIN_E_DEN    = 27000,    // ... per this many electrons
  parameter int SAT_ELECTRONS = 1373000   // 220 fC in electrons
) (
  input  logic signed [31:0] charge_e,      // input charge, electrons
  input  logic               cal_inject,    // channel receives the calibration pulse
  input  logic signed [31:0] cal_charge_e,  // calibration charge, electrons
  output logic signed [31:0] amp_uv         // shaper peak, microvolts
);

  longint total;
  longint clipped;

  always_comb begin
    total = longint'(charge_e) + (cal_inject ? longint'(cal_charge_e) : 64'sd0);
    if (total > longint'(SAT_ELECTRONS))       clipped = longint'(SAT_ELECTRONS);
    else if (total < -longint'(SAT_ELECTRONS)) clipped = -longint'(SAT_ELECTRONS);
    else                                       clipped = total;
    amp_uv = 32'(clipped * longint'(GAIN_UV_NUM) / longint'(GAIN_E_DEN));
  end

endmodule
