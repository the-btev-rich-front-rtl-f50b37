// channel_digital: digital section of one readout channel.
//
// The discriminator output, or its inverse when 'neg_thr' is set (the polarity
// mux of the channel), is gated by 'active' and fires a monostable. The
// monostable pulse is the channel's digital output 'out'; the same pulse,
// gated by 'test_on2', is the channel's term of the chip's fast-OR.
//
// The order polarity mux -> channel disable -> monostable -> output / fast-OR
// follows the channel block diagram. 'active' combines the channel mask with
// the mode of operation; it is worked out in the top level. Timing is that of
// the monostable: an edge in cycle t gives 'out' high in cycles t+1..t+PULSE_CYCLES.
module channel_digital #(
  parameter int unsigned PULSE_CYCLES = 10
) (
  input  logic clk,
  input  logic rst_n,
  input  logic disc,       // discriminator comparator output
  input  logic neg_thr,    // 1: use the inverted comparator output
  input  logic active,     // 0: channel disabled (masked or not in this mode)
  input  logic test_on2,   // 1: contribute to the fast-OR
  output logic out,        // hit pulse, about 100 ns
  output logic fast_or_term
);

  logic pol;
  logic trig;

  assign pol  = neg_thr ? ~disc : disc;
  assign trig = pol & active;

  monostable #(.PULSE_CYCLES(PULSE_CYCLES)) u_mono (
    .clk    (clk),
    .rst_n  (rst_n),
    .trig   (trig),
    .pulse  (out)
  );

  assign fast_or_term = out & test_on2;

endmodule
