// slow_control_tb: self-checking test of the serial configuration register.
//
// Shifts random 387-bit patterns in (first bit = top bit of the configuration
// word), checks that the working configuration does not move while shifting,
// that it equals the pattern one cycle after 'init' falls, that the mode
// follows INIT -> CALIB/NORMAL as the loaded bit says, that cycles without
// 'sc_shift' do not shift, and that shifting a second pattern in pushes the
// first one out of 'sc_dout' bit for bit.
module slow_control_tb;
  import va_pkg::*;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  init = 1'b0, sc_shift = 1'b0, sc_din = 1'b0;
  logic  sc_dout;
  cfg_t  cfg;
  mode_e mode;
  int checks = 0;
  int failures = 0;

  slow_control dut (.clk(clk), .rst_n(rst_n), .init(init), .sc_shift(sc_shift),
                    .sc_din(sc_din), .sc_dout(sc_dout), .cfg(cfg), .mode(mode));

  always #5 clk = ~clk;

  task automatic tick(int n = 1);
    repeat (n) @(posedge clk);
    #1;
  endtask

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  // Shift 'pat' in, MSB first; with 'gaps' some idle cycles are inserted.
  // Returns in 'outp' the bits seen on sc_dout, MSB first.
  task automatic shift_in(input logic [CFG_BITS-1:0] pat, input bit gaps,
                          output logic [CFG_BITS-1:0] outp);
    cfg_t cfg_prev;
    cfg_prev = cfg;
    init = 1'b1;
    for (int i = CFG_BITS - 1; i >= 0; i--) begin
      if (gaps && $urandom_range(0, 3) == 0) begin
        sc_shift = 1'b0; sc_din = ~pat[i]; tick(1);
      end
      outp[i] = sc_dout;
      sc_shift = 1'b1; sc_din = pat[i]; tick(1);
    end
    sc_shift = 1'b0;
    tick(1);
    chk(mode == MODE_INIT, "mode is INIT during shifting");
    chk(cfg == cfg_prev, "configuration steady while shifting");
  endtask

  logic [CFG_BITS-1:0] p1, p2, seen;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tick(2);
    rst_n = 1'b1;
    tick(1);
    chk(mode == MODE_INIT, "INIT after reset");
    chk(cfg == '0, "configuration cleared by reset");
    for (int round = 0; round < 6; round++) begin
      for (int i = 0; i < CFG_BITS; i++) p1[i] = 1'($urandom);
      p1[CFG_BITS-1] = round[0];   // cal_mode alternates
      shift_in(p1, round[1], seen);
      init = 1'b0;
      tick(1);
      chk(cfg == cfg_t'(p1), "configuration equals the shifted pattern");
      chk(mode == (round[0] ? MODE_CALIB : MODE_NORMAL), "mode after load");
      // spot-check the field layout: channel 0 is the last 6 bits shifted
      chk(cfg.ch[0].cal_sel == p1[0] && cfg.ch[0].disable_ch == p1[1] &&
          cfg.ch[0].trim == p1[5:2], "channel 0 field layout");
      chk(cfg.glob.neg_thr == p1[CFG_BITS-2] && cfg.glob.test_on2 == p1[CFG_BITS-3],
          "global field layout");
      tick(3);
      // read-back: shift a new pattern, the old one appears on sc_dout
      for (int i = 0; i < CFG_BITS; i++) p2[i] = 1'($urandom);
      shift_in(p2, 1'b1, seen);
      chk(seen == p1, "previous pattern read back on sc_dout");
      init = 1'b0;
      tick(1);
      chk(cfg == cfg_t'(p2), "second pattern loaded");
      tick(2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
