// discriminator_tb: checks the comparator and the per-channel trim DAC.
//
// For every trim code the threshold moves by (code - 8) * 500 uV; the
// comparator output must be low at the trimmed threshold and high one
// microvolt above it. Random amplitudes and thresholds follow.
module discriminator_tb;
  logic signed [31:0] amp_uv, thr_uv;
  logic [3:0] trim;
  logic disc;
  int checks = 0;
  int failures = 0;

  discriminator dut (.amp_uv(amp_uv), .thr_uv(thr_uv), .trim(trim), .disc(disc));

  task automatic expect_disc(int a, int t, int tr, bit e);
    amp_uv = a; thr_uv = t; trim = 4'(tr);
    #1;
    checks++;
    if (disc !== e) begin
      failures++;
      $display("amp=%0d thr=%0d trim=%0d: disc=%0b expected %0b", a, t, tr, disc, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int tr = 0; tr < 16; tr++) begin
      automatic int eff = 5000 + (tr - 8) * 500;
      expect_disc(eff, 5000, tr, 1'b0);
      expect_disc(eff + 1, 5000, tr, 1'b1);
      expect_disc(eff - 1000, 5000, tr, 1'b0);
    end
    expect_disc(-3000, -5000, 8, 1'b1);
    expect_disc(-6000, -5000, 8, 1'b0);
    for (int k = 0; k < 2000; k++) begin
      automatic int a = int'($urandom_range(0, 40000)) - 20000;
      automatic int t = int'($urandom_range(0, 40000)) - 20000;
      automatic int tr = int'($urandom_range(0, 15));
      expect_disc(a, t, tr, a > t + (tr - 8) * 500);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
