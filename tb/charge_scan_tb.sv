// charge_scan_tb: input charge scan of the 64-channel chip in calibration
// mode, the bench measurement used to find a channel's threshold and noise.
//
// The chip is programmed for calibration mode with four channels selected:
// three at trim code 8 (no offset) and one at trim code 12 (+2 mV). The
// common threshold is 5 mV. For each calibration charge from 14,000 to
// 52,000 electrons in steps of 500, the calibration input is pulsed 300 times.
// At each pulse the testbench adds Gaussian noise of 2,000 electrons rms,
// drawn independently per channel, to the channel inputs. It counts the
// output pulses, which gives an efficiency curve (S-curve) per channel.
//
// Expected, worked out from the transfer function (5 mV per 27,000 e-) and
// the trim step of 500 uV: the 50 % point is at 27,000 e- for trim 8 and at
// 37,800 e- for trim 12, and the 16 %-84 % half-width of the curve equals the
// noise, 2,000 e-. The testbench checks these within the statistical error,
// that unselected channels never fire, and that every pulse is 10 cycles
// long.
module charge_scan_tb;
  import va_pkg::*;

  localparam int  NPULSE   = 300;
  localparam int  Q_MIN    = 14000;
  localparam int  Q_MAX    = 52000;
  localparam int  Q_STEP   = 500;
  localparam int  NPTS     = (Q_MAX - Q_MIN) / Q_STEP + 1;
  localparam real SIGMA_E  = 2000.0;
  localparam int  NSEL     = 4;
  localparam int  SEL [NSEL] = '{5, 17, 40, 63};
  localparam int  TRIM [NSEL] = '{8, 8, 8, 12};

  logic               clk = 1'b0;
  logic               rst_n = 1'b0;
  logic               init = 1'b0, sc_shift = 1'b0, sc_din = 1'b0;
  logic               sc_dout;
  mode_e              mode;
  logic signed [31:0] charge_e [N_CH];
  logic               cal_pulse = 1'b0;
  logic signed [31:0] cal_charge_e = '0;
  logic signed [31:0] threshold_uv = 32'sd5000;
  logic [N_CH-1:0]    out;
  logic               fast_or;

  va_mapmt dut (
    .clk(clk), .rst_n(rst_n), .init(init), .sc_shift(sc_shift), .sc_din(sc_din),
    .sc_dout(sc_dout), .mode(mode), .charge_e(charge_e), .cal_pulse(cal_pulse),
    .cal_charge_e(cal_charge_e), .threshold_uv(threshold_uv), .out(out),
    .fast_or(fast_or));

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  // output pulse counting and width check
  logic [N_CH-1:0] out_q = '0;
  int hits [N_CH];
  int width [N_CH];
  int bad_width = 0;
  always @(posedge clk) begin
    out_q <= out;
    if (rst_n) for (int i = 0; i < N_CH; i++) begin
      if (out[i] && !out_q[i]) hits[i]++;
      if (out[i]) width[i]++;
      else if (out_q[i]) begin
        if (width[i] != 10) bad_width++;
        width[i] = 0;
      end
    end
  end

  task automatic tick(int n = 1);
    repeat (n) @(posedge clk);
    #1;
  endtask

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // charge at which the efficiency curve 'eff' crosses 'level'
  function automatic real crossing(real eff [NPTS], real level);
    for (int k = 1; k < NPTS; k++)
      if (eff[k - 1] < level && eff[k] >= level)
        return Q_MIN + Q_STEP * ((k - 1) + (level - eff[k - 1]) / (eff[k] - eff[k - 1]));
    return -1.0;
  endfunction

  real eff [NSEL][NPTS];
  int  stray = 0;

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_t c;
    logic [CFG_BITS-1:0] bits;
    for (int i = 0; i < N_CH; i++) begin charge_e[i] = '0; hits[i] = 0; width[i] = 0; end
    tick(3);
    rst_n = 1'b1;
    tick(2);

    c = '0;
    c.glob.cal_mode = 1'b1;
    for (int i = 0; i < N_CH; i++) c.ch[i].trim = 4'd8;
    for (int s = 0; s < NSEL; s++) begin
      c.ch[SEL[s]].cal_sel = 1'b1;
      c.ch[SEL[s]].trim    = 4'(TRIM[s]);
    end
    bits = c;
    init = 1'b1;
    for (int k = CFG_BITS - 1; k >= 0; k--) begin
      sc_shift = 1'b1; sc_din = bits[k]; tick(1);
    end
    sc_shift = 1'b0; init = 1'b0;
    tick(2);
    checks++;
    if (mode != MODE_CALIB) begin failures++; $display("not in calibration mode"); end

    for (int p = 0; p < NPTS; p++) begin
      int hits_start [NSEL];
      for (int s = 0; s < NSEL; s++) hits_start[s] = hits[SEL[s]];
      cal_charge_e = Q_MIN + p * Q_STEP;
      for (int n = 0; n < NPULSE; n++) begin
        for (int i = 0; i < N_CH; i++) charge_e[i] = int'(SIGMA_E * gauss());
        cal_pulse = 1'b1;
        tick(2);
        cal_pulse = 1'b0;
        for (int i = 0; i < N_CH; i++) charge_e[i] = '0;
        tick(11);
      end
      for (int s = 0; s < NSEL; s++) eff[s][p] = real'(hits[SEL[s]] - hits_start[s]) / NPULSE;
    end

    for (int i = 0; i < N_CH; i++) begin
      bit sel;
      sel = 1'b0;
      for (int s = 0; s < NSEL; s++) if (SEL[s] == i) sel = 1'b1;
      if (!sel) stray += hits[i];
    end
    checks++;
    if (stray != 0) begin failures++; $display("%0d hits on unselected channels", stray); end
    checks++;
    if (bad_width != 0) begin failures++; $display("%0d pulses not 10 cycles long", bad_width); end

    for (int s = 0; s < NSEL; s++) begin
      real q16, q50, q84, sigma, q50_exp;
      q16 = crossing(eff[s], 0.16);
      q50 = crossing(eff[s], 0.50);
      q84 = crossing(eff[s], 0.84);
      sigma = (q84 - q16) / 2.0;
      q50_exp = 27000.0 * (5000.0 + (TRIM[s] - 8) * 500.0) / 5000.0;
      $display("channel %0d trim %0d: 50%% point %0.0f e- (expected %0.0f), noise %0.0f e- (injected %0.0f)",
               SEL[s], TRIM[s], q50, q50_exp, sigma, SIGMA_E);
      checks++;
      if (q50 < q50_exp - 600.0 || q50 > q50_exp + 600.0) begin
        failures++; $display("  50%% point off");
      end
      checks++;
      if (sigma < 0.75 * SIGMA_E || sigma > 1.25 * SIGMA_E) begin
        failures++; $display("  noise estimate off");
      end
      checks++;
      if (eff[s][0] > 0.01 || eff[s][NPTS - 1] < 0.99) begin
        failures++; $display("  curve does not go from 0 to 1");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
