// va_mapmt_tb: end-to-end test of the 64-channel front-end chip at its
// default size.
//
// The testbench programs the chip through the serial interface, drives
// charges on the channel inputs and on the calibration input, and compares
// all 64 outputs and the fast-OR with a reference model every cycle. The
// model works from the testbench's own copy of the configuration and from
// the stated transfer function (5 mV per 27,000 electrons, flat above
// 1,373,000 electrons, threshold trim of 500 uV per step around code 8), and
// from the 10-cycle non-retriggerable pulse.
//
// Phases: inputs while still in INIT; normal mode with masked channels and
// random trims; threshold scan across the trim range; a 3 MHz hit train and a
// retrigger inside a pulse; saturation against a threshold above the linear
// range; fast-OR disabled; calibration mode with a subset of channels;
// negative polarity; read-back of the previous pattern on the serial output.
// Every mechanism is counted, and one that never happened is a failure.
module va_mapmt_tb;
  import va_pkg::*;

  localparam int W       = 10;          // monostable length, cycles
  localparam int GAIN_N  = 5000;
  localparam int GAIN_D  = 27000;
  localparam int SAT_E   = 1373000;

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

  // ---------------------------------------------------------------- model
  cfg_t  shifted;          // pattern last shifted in by the testbench
  cfg_t  ref_cfg = '0;
  logic  ref_configured = 1'b0;
  logic  ref_init_q = 1'b0;
  mode_e ref_mode;
  logic  ref_trig [N_CH];
  logic  ref_trig_q [N_CH];
  int    ref_left [N_CH];
  logic  ref_disc [N_CH];
  logic  ref_active [N_CH];

  // mechanism counters
  int n_normal_hits = 0, n_masked = 0, n_init_blocked = 0, n_cal_hits = 0,
      n_cal_unselected = 0, n_ignored = 0, n_neg_hits = 0, n_trim_decided = 0,
      n_fastor = 0, n_fastor_off = 0, n_saturated = 0, n_readback = 0,
      n_rate_pulses = 0;

  function automatic longint amp_of(longint q);
    if (q > SAT_E) q = SAT_E;
    if (q < -SAT_E) q = -SAT_E;
    return q * GAIN_N / GAIN_D;
  endfunction

  always_comb begin
    if (init || !ref_configured) ref_mode = MODE_INIT;
    else if (ref_cfg.glob.cal_mode) ref_mode = MODE_CALIB;
    else ref_mode = MODE_NORMAL;
    for (int i = 0; i < N_CH; i++) begin
      longint q;
      q = charge_e[i];
      if (ref_mode == MODE_CALIB && ref_cfg.ch[i].cal_sel && cal_pulse) q += cal_charge_e;
      ref_disc[i] = amp_of(q) > longint'(threshold_uv) +
                    (longint'(ref_cfg.ch[i].trim) - 8) * 500;
      case (ref_mode)
        MODE_NORMAL: ref_active[i] = !ref_cfg.ch[i].disable_ch;
        MODE_CALIB:  ref_active[i] = !ref_cfg.ch[i].disable_ch && ref_cfg.ch[i].cal_sel;
        default:     ref_active[i] = 1'b0;
      endcase
      ref_trig[i] = ref_active[i] && (ref_disc[i] ^ ref_cfg.glob.neg_thr);
    end
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      ref_init_q <= 1'b0;
      ref_configured <= 1'b0;
      ref_cfg <= '0;
      for (int i = 0; i < N_CH; i++) begin ref_trig_q[i] <= 1'b0; ref_left[i] <= 0; end
    end else begin
      ref_init_q <= init;
      if (ref_init_q && !init) begin ref_cfg <= shifted; ref_configured <= 1'b1; end
      for (int i = 0; i < N_CH; i++) begin
        logic pol;
        pol = ref_disc[i] ^ ref_cfg.glob.neg_thr;
        ref_trig_q[i] <= ref_trig[i];
        if (ref_left[i] > 0) begin
          ref_left[i] <= ref_left[i] - 1;
          if (ref_trig[i] && !ref_trig_q[i]) n_ignored++;
        end else if (ref_trig[i] && !ref_trig_q[i]) begin
          ref_left[i] <= W;
          if (ref_mode == MODE_NORMAL) n_normal_hits++;
          if (ref_mode == MODE_CALIB && cal_pulse) n_cal_hits++;
          if (ref_cfg.glob.neg_thr) n_neg_hits++;
        end
        // a firing that the channel's state blocked
        if (ref_disc[i] != ref_cfg.glob.neg_thr && !ref_active[i]) begin
          if (ref_mode == MODE_INIT) n_init_blocked++;
          else if (ref_cfg.ch[i].disable_ch) n_masked++;
          else if (ref_mode == MODE_CALIB) n_cal_unselected++;
        end
      end
    end
  end

  always @(negedge clk) begin
    if (rst_n) begin
      logic any;
      any = 1'b0;
      for (int i = 0; i < N_CH; i++) begin
        checks++;
        if (out[i] !== (ref_left[i] > 0)) begin
          failures++;
          if (failures < 20)
            $display("%0t ch %0d: out=%0b expected %0b", $time, i, out[i], ref_left[i] > 0);
        end
        any |= (ref_left[i] > 0);
      end
      checks++;
      if (fast_or !== (any && ref_cfg.glob.test_on2)) begin
        failures++;
        if (failures < 20) $display("%0t fast_or=%0b expected %0b", $time, fast_or, any && ref_cfg.glob.test_on2);
      end
      if (fast_or) n_fastor++;
      if (any && !fast_or) n_fastor_off++;
      checks++;
      if (mode !== ref_mode) begin
        failures++;
        $display("%0t mode=%s expected %s", $time, mode.name(), ref_mode.name());
      end
    end
  end

  // ------------------------------------------------------------ stimulus
  task automatic tick(int n = 1);
    repeat (n) @(posedge clk);
    #1;
  endtask

  task automatic clear_inputs();
    for (int i = 0; i < N_CH; i++) charge_e[i] = '0;
    cal_pulse = 1'b0;
  endtask

  // Shift 'c' in, top bit first, and load it. 'seen' collects sc_dout.
  task automatic program_chip(input cfg_t c, output logic [CFG_BITS-1:0] seen);
    logic [CFG_BITS-1:0] bits;
    bits = c;
    init = 1'b1;
    tick(1);
    for (int k = CFG_BITS - 1; k >= 0; k--) begin
      seen[k] = sc_dout;
      sc_shift = 1'b1; sc_din = bits[k];
      tick(1);
    end
    sc_shift = 1'b0;
    shifted = c;
    init = 1'b0;
    tick(2);
  endtask

  // One hit of 'q' electrons on channel ch, held for 'len' cycles, then idle.
  task automatic pulse_ch(int ch, int q, int len = 2, int gap = W + 3);
    charge_e[ch] = q;
    tick(len);
    charge_e[ch] = 0;
    tick(gap);
  endtask

  cfg_t c1, c2;
  logic [CFG_BITS-1:0] seen;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear_inputs();
    tick(3);
    rst_n = 1'b1;
    tick(2);

    // ---- inputs before any configuration: nothing fires
    for (int i = 0; i < N_CH; i += 7) pulse_ch(i, 200000, 2, 1);
    tick(W);

    // ---- normal mode, random trims, every fifth channel masked
    c1 = '0;
    c1.glob.test_on2 = 1'b1;
    for (int i = 0; i < N_CH; i++) begin
      c1.ch[i].trim       = 4'($urandom_range(0, 15));
      c1.ch[i].disable_ch = (i % 5 == 3);
      c1.ch[i].cal_sel    = (i % 4 == 1);
    end
    program_chip(c1, seen);
    for (int i = 0; i < N_CH; i++) pulse_ch(i, 100000);

    // ---- threshold scan: charges around the trimmed thresholds
    for (int i = 0; i < N_CH; i++) begin
      for (int k = 0; k < 4; k++) begin
        int q;
        int amp;
        q = int'($urandom_range(5000, 50000));
        amp = q * GAIN_N / GAIN_D;
        if ((amp > 5000) != (amp > 5000 + (int'(c1.ch[i].trim) - 8) * 500) &&
            !c1.ch[i].disable_ch)
          n_trim_decided++;
        pulse_ch(i, q);
      end
    end

    // ---- 3 MHz train on channel 0 (an edge every 33 cycles) and a retrigger
    for (int k = 0; k < 20; k++) begin
      charge_e[0] = 100000; tick(2);
      charge_e[0] = 0;
      for (int c = 0; c < 31; c++) begin
        if (out[0] && c == 0) n_rate_pulses++;
        tick(1);
      end
    end
    charge_e[2] = 100000; tick(2); charge_e[2] = 0; tick(3);
    charge_e[2] = 100000; tick(2); charge_e[2] = 0; tick(W + 3);

    // ---- saturation: threshold above the end of the linear range
    threshold_uv = 32'sd260000;
    tick(1);
    for (int i = 0; i < N_CH; i += 9) begin
      if (!c1.ch[i].disable_ch) n_saturated++;
      pulse_ch(i, 5000000);
    end
    threshold_uv = 32'sd5000;
    tick(2);

    // ---- random traffic on all channels
    for (int k = 0; k < 300; k++) begin
      for (int i = 0; i < N_CH; i++)
        charge_e[i] = ($urandom_range(0, 19) == 0) ? int'($urandom_range(0, 80000)) : 0;
      tick(1);
    end
    clear_inputs();
    tick(W + 2);

    // ---- fast-OR switched off; read back c1 while shifting c2
    c2 = c1;
    c2.glob.test_on2 = 1'b0;
    program_chip(c2, seen);
    checks++;
    if (seen !== CFG_BITS'(c1)) begin failures++; $display("read-back mismatch"); end
    else n_readback++;
    for (int i = 0; i < N_CH; i += 3) pulse_ch(i, 100000);

    // ---- calibration mode
    c2.glob.test_on2 = 1'b1;
    c2.glob.cal_mode = 1'b1;
    program_chip(c2, seen);
    cal_charge_e = 100000;
    for (int k = 0; k < 5; k++) begin
      cal_pulse = 1'b1; tick(2); cal_pulse = 1'b0; tick(W + 3);
    end
    for (int i = 0; i < N_CH; i += 2) pulse_ch(i, 100000);   // real input charges
    cal_charge_e = 0;

    // ---- normal mode, negative polarity, negative threshold
    c2.glob.cal_mode = 1'b0;
    c2.glob.neg_thr  = 1'b1;
    threshold_uv = -32'sd5000;
    program_chip(c2, seen);
    for (int i = 0; i < N_CH; i++) pulse_ch(i, -100000);
    for (int i = 0; i < N_CH; i += 4) pulse_ch(i, 100000);   // wrong sign: no hit
    tick(W + 2);

    // ---- every mechanism must have happened
    checks++; if (n_normal_hits == 0)    begin failures++; $display("no normal-mode hit"); end
    checks++; if (n_masked == 0)         begin failures++; $display("no masked channel"); end
    checks++; if (n_init_blocked == 0)   begin failures++; $display("no input during INIT"); end
    checks++; if (n_cal_hits == 0)       begin failures++; $display("no calibration hit"); end
    checks++; if (n_cal_unselected == 0) begin failures++; $display("no unselected channel in calibration"); end
    checks++; if (n_ignored == 0)        begin failures++; $display("no retrigger ignored"); end
    checks++; if (n_neg_hits == 0)       begin failures++; $display("no negative-polarity hit"); end
    checks++; if (n_trim_decided == 0)   begin failures++; $display("trim never decided a hit"); end
    checks++; if (n_fastor == 0)         begin failures++; $display("fast-OR never high"); end
    checks++; if (n_fastor_off == 0)     begin failures++; $display("fast-OR never disabled"); end
    checks++; if (n_saturated == 0)      begin failures++; $display("no saturated input"); end
    checks++; if (n_readback == 0)       begin failures++; $display("no read-back"); end
    checks++; if (n_rate_pulses != 20)   begin failures++; $display("3 MHz train: %0d of 20 pulses", n_rate_pulses); end
    $display("mechanisms: normal=%0d masked=%0d init_blocked=%0d cal=%0d cal_unselected=%0d ignored=%0d neg=%0d trim_decided=%0d fastor_cycles=%0d fastor_off_cycles=%0d saturated=%0d readback=%0d rate_pulses=%0d",
             n_normal_hits, n_masked, n_init_blocked, n_cal_hits, n_cal_unselected, n_ignored,
             n_neg_hits, n_trim_decided, n_fastor, n_fastor_off, n_saturated, n_readback, n_rate_pulses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
