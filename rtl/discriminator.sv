// discriminator: behavioural model of a channel's comparator and its 4-bit
// threshold trim DAC. This is a behavioural model, not logic: both are analog
// circuits in the chip.
//
// The comparator's positive input is the shaper output, its negative input
// the common threshold (set off-chip by an 8-bit DAC, given here directly in
// microvolts) shifted by the channel's trim DAC. The trim code is taken as
// offset binary: code 8 adds nothing, each step adds TRIM_LSB_UV, so the
// range is -8..+7 steps. Step size and offset coding are this design's choice.
// 'disc' is high while amp_uv is strictly above the trimmed threshold.
//
// Combinational, no clock.
module discriminator #(
  parameter int TRIM_LSB_UV = 500
) (
  input  logic signed [31:0] amp_uv,
  input  logic signed [31:0] thr_uv,
  input  logic        [3:0]  trim,
  output logic               disc
);

  logic signed [31:0] thr_trimmed;

  always_comb begin
    thr_trimmed = thr_uv + (32'(signed'({1'b0, trim})) - 32'sd8) * 32'(TRIM_LSB_UV);
    disc        = (amp_uv > thr_trimmed);
  end

endmodule
