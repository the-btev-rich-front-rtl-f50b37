// analog_front_end_tb: checks the charge-to-voltage model against the chip's
// quoted operating point (27,000 electrons give 5 mV), its linear range
// (220 fC, about 1,373,000 electrons), the ratio of about 52 between the
// onset of saturation and the smallest signal at a 5 mV threshold, the
// calibration charge injection and the sign of negative charge.
module analog_front_end_tb;
  logic signed [31:0] charge_e, cal_charge_e, amp_uv;
  logic cal_inject;
  int checks = 0;
  int failures = 0;

  analog_front_end dut (.charge_e(charge_e), .cal_inject(cal_inject),
                        .cal_charge_e(cal_charge_e), .amp_uv(amp_uv));

  task automatic expect_amp(int q, bit inj, int qc, int exp_uv);
    charge_e = q; cal_inject = inj; cal_charge_e = qc;
    #1;
    checks++;
    if (amp_uv !== exp_uv) begin
      failures++;
      $display("q=%0d inj=%0b qc=%0d: amp=%0d uV, expected %0d", q, inj, qc, amp_uv, exp_uv);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    expect_amp(0, 0, 0, 0);
    expect_amp(27000, 0, 0, 5000);              // 5 mV at 27,000 e-
    expect_amp(54000, 0, 0, 10000);
    expect_amp(-27000, 0, 0, -5000);
    expect_amp(27000, 1, 27000, 10000);         // calibration charge adds
    expect_amp(27000, 0, 270000, 5000);         // not injected: ignored
    expect_amp(0, 1, 135000, 25000);
    expect_amp(1373000, 0, 0, 254259);          // top of the linear range
    expect_amp(3000000, 0, 0, 254259);          // saturated
    expect_amp(-3000000, 0, 0, -254259);
    expect_amp(1373000, 1, 1373000, 254259);
    // ratio saturation onset / 27,000 e- is about 51, the chip quotes 52
    checks++;
    if (1373000 / 27000 < 50 || 1373000 / 27000 > 53) failures++;
    for (int k = 0; k < 1000; k++) begin
      automatic int q = int'($urandom_range(0, 2000000)) - 1000000;
      automatic longint e = longint'(q) * 5000 / 27000;
      expect_amp(q, 0, 0, int'(e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
