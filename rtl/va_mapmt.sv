// va_mapmt: 64-channel self-triggering front-end ASIC for multi-anode
// photomultipliers, with binary (hit / no hit) parallel outputs.
//
// Each channel turns the charge on its input into a shaper voltage
// (analog_front_end, a behavioural model), compares it with a common threshold
// trimmed per channel (discriminator, a behavioural model), and passes the
// comparator output through the polarity mux, the channel disable gate and a
// monostable to its own output 'out[i]' (channel_digital). A chip-wide
// fast-OR of the hit pulses can be enabled. Everything is programmed by a
// serial bitstream (slow_control), which also sets the mode of operation:
//   INIT   : the pattern is being shifted in; no channel fires.
//   CALIB  : only channels selected for calibration respond, and they receive
//            the charge 'cal_charge_e' while 'cal_pulse' is high.
//   NORMAL : every channel that is not masked responds to its input charge.
//
// Ports: the off-chip threshold DAC and the detector are analog and outside
// this model, so the threshold arrives as 'threshold_uv' and each channel's
// input charge as 'charge_e[i]' (electrons, held for as long as the shaper
// would stay above threshold). The current-mode outputs of the chip are
// logic levels here.
//
// Timing: one clock, 100 MHz by this design's choice. A charge applied in
// cycle t is seen by the monostable in cycle t and gives 'out[i]' high in
// cycles t+1..t+PULSE_CYCLES (100 ns); 'fast_or' follows combinationally.
// What follows the chip description: 64 channels, 4-bit trim, channel mask,
// three modes, polarity mux, fast-OR with enable, ~100 ns output pulse.
// What is this design's choice: the clocked one-shot, the bit layout of the
// configuration, and that a channel not selected for calibration is silent in
// calibration mode.
module va_mapmt
  import va_pkg::*;
#(
  parameter int unsigned PULSE_CYCLES = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  // slow control
  input  logic               init,
  input  logic               sc_shift,
  input  logic               sc_din,
  output logic               sc_dout,
  output mode_e              mode,
  // analog side
  input  logic signed [31:0] charge_e [N_CH],
  input  logic               cal_pulse,
  input  logic signed [31:0] cal_charge_e,
  input  logic signed [31:0] threshold_uv,
  // digital outputs
  output logic [N_CH-1:0]    out,
  output logic               fast_or
);

  cfg_t cfg;

  slow_control u_sc (
    .clk     (clk),
    .rst_n   (rst_n),
    .init    (init),
    .sc_shift(sc_shift),
    .sc_din  (sc_din),
    .sc_dout (sc_dout),
    .cfg     (cfg),
    .mode    (mode)
  );

  logic [N_CH-1:0] fo_terms;

  for (genvar i = 0; i < N_CH; i++) begin : g_ch
    logic signed [31:0] amp_uv;
    logic               disc;
    logic               cal_inject;
    logic               active;

    assign cal_inject = (mode == MODE_CALIB) && cfg.ch[i].cal_sel && cal_pulse;

    always_comb begin
      unique case (mode)
        MODE_CALIB:  active = !cfg.ch[i].disable_ch && cfg.ch[i].cal_sel;
        MODE_NORMAL: active = !cfg.ch[i].disable_ch;
        default:     active = 1'b0;
      endcase
    end

    analog_front_end u_afe (
      .charge_e    (charge_e[i]),
      .cal_inject  (cal_inject),
      .cal_charge_e(cal_charge_e),
      .amp_uv      (amp_uv)
    );

    discriminator u_disc (
      .amp_uv(amp_uv),
      .thr_uv(threshold_uv),
      .trim  (cfg.ch[i].trim),
      .disc  (disc)
    );

    channel_digital #(.PULSE_CYCLES(PULSE_CYCLES)) u_ch (
      .clk         (clk),
      .rst_n       (rst_n),
      .disc        (disc),
      .neg_thr     (cfg.glob.neg_thr),
      .active      (active),
      .test_on2    (cfg.glob.test_on2),
      .out         (out[i]),
      .fast_or_term(fo_terms[i])
    );
  end

  fast_or #(.N(N_CH)) u_fo (
    .terms  (fo_terms),
    .any_hit(fast_or)
  );

endmodule
