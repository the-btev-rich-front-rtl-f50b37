// channel_digital_tb: self-checking test of one channel's digital section.
//
// A reference model in the testbench applies the polarity select, the channel
// enable and a 10-cycle non-retriggerable one-shot, and predicts 'out' and the
// fast-OR term every cycle. Directed cases cover each control input alone;
// random stimulus then mixes them.
module channel_digital_tb;
  localparam int unsigned W = 10;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic disc = 1'b0, neg_thr = 1'b0, active = 1'b0, test_on2 = 1'b0;
  logic out, fast_or_term;
  int checks = 0;
  int failures = 0;
  int fires = 0;

  channel_digital #(.PULSE_CYCLES(W)) dut (
    .clk(clk), .rst_n(rst_n), .disc(disc), .neg_thr(neg_thr), .active(active),
    .test_on2(test_on2), .out(out), .fast_or_term(fast_or_term));

  always #5 clk = ~clk;

  logic ref_q = 1'b0;
  int   ref_left = 0;
  logic ref_trig;
  assign ref_trig = (disc ^ neg_thr) && active;
  always @(posedge clk) begin
    if (!rst_n) begin
      ref_q <= 1'b0; ref_left <= 0;
    end else begin
      ref_q <= ref_trig;
      if (ref_left > 0) ref_left <= ref_left - 1;
      else if (ref_trig && !ref_q) begin ref_left <= W; fires++; end
    end
  end

  always @(negedge clk) begin
    if (rst_n) begin
      checks += 2;
      if (out !== (ref_left > 0)) begin
        failures++;
        $display("%0t out=%0b expected %0b", $time, out, ref_left > 0);
      end
      if (fast_or_term !== ((ref_left > 0) && test_on2)) begin
        failures++;
        $display("%0t fast_or_term=%0b expected %0b", $time, fast_or_term, (ref_left > 0) && test_on2);
      end
    end
  end

  task automatic tick(int n = 1);
    repeat (n) @(posedge clk);
    #1;
  endtask

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tick(2); rst_n = 1'b1; tick(2);
    // disabled channel ignores the discriminator
    disc = 1'b1; tick(3); disc = 1'b0; tick(W + 2);
    // enabled, positive polarity
    active = 1'b1;
    disc = 1'b1; tick(3); disc = 1'b0; tick(W + 2);
    // fast-OR enabled
    test_on2 = 1'b1;
    disc = 1'b1; tick(3); disc = 1'b0; tick(W + 2);
    // negative polarity: the pulse starts when the comparator output falls
    neg_thr = 1'b1; disc = 1'b1; tick(W + 4);
    disc = 1'b0; tick(W + 4);
    neg_thr = 1'b0; tick(W + 2);
    for (int k = 0; k < 4000; k++) begin
      disc = ($urandom_range(0, 3) == 0);
      if ($urandom_range(0, 99) == 0) neg_thr = ~neg_thr;
      if ($urandom_range(0, 49) == 0) active = ~active;
      if ($urandom_range(0, 49) == 0) test_on2 = ~test_on2;
      tick(1);
    end
    disc = 1'b0; neg_thr = 1'b0; tick(W + 2);
    checks++;
    if (fires < 20) begin failures++; $display("only %0d pulses fired", fires); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
