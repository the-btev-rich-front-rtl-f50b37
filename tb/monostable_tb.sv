// monostable_tb: self-checking test of the one-shot pulse generator.
//
// A reference model kept in the testbench (last trigger level and cycles
// left) predicts the output every cycle. Directed cases check the exact pulse
// width of 10 cycles (100 ns at 100 MHz), that a trigger held high fires once,
// that an edge inside a running pulse is ignored, and that edges arriving at
// 3 MHz (every 33 cycles) each give a full pulse. Random triggers follow.
module monostable_tb;
  localparam int unsigned W = 10;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic trig = 1'b0;
  logic pulse;

  int checks = 0;
  int failures = 0;

  monostable #(.PULSE_CYCLES(W)) dut (.clk(clk), .rst_n(rst_n), .trig(trig), .pulse(pulse));

  always #5 clk = ~clk;

  // reference model
  logic ref_q = 1'b0;
  int   ref_left = 0;
  always @(posedge clk) begin
    if (!rst_n) begin
      ref_q <= 1'b0; ref_left <= 0;
    end else begin
      ref_q <= trig;
      if (ref_left > 0) ref_left <= ref_left - 1;
      else if (trig && !ref_q) ref_left <= W;
    end
  end

  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (pulse !== (ref_left > 0)) begin
        failures++;
        $display("mismatch at %0t: pulse=%0b expected=%0b", $time, pulse, ref_left > 0);
      end
    end
  end

  // measured width of every pulse
  int width = 0;
  int widths_ok = 0;
  int widths_bad = 0;
  always @(posedge clk) begin
    if (!rst_n) width <= 0;
    else if (pulse) width <= width + 1;
    else if (width != 0) begin
      if (width == W) widths_ok++; else widths_bad++;
      width <= 0;
    end
  end

  task automatic tick(int n = 1);
    repeat (n) @(posedge clk);
    #1;
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tick(3);
    rst_n = 1'b1;
    tick(2);
    // single edge, latency 1 and width W
    trig = 1'b1; tick(1); trig = 1'b0;
    checks++; if (pulse !== 1'b1) begin failures++; $display("pulse not high one cycle after edge"); end
    tick(W - 1);
    checks++; if (pulse !== 1'b1) begin failures++; $display("pulse ended early"); end
    tick(1);
    checks++; if (pulse !== 1'b0) begin failures++; $display("pulse longer than %0d cycles", W); end
    tick(5);
    // held trigger fires once
    trig = 1'b1; tick(40); trig = 1'b0; tick(5);
    // edge inside a running pulse is ignored
    trig = 1'b1; tick(1); trig = 1'b0; tick(3); trig = 1'b1; tick(1); trig = 1'b0;
    tick(W + 5);
    // 3 MHz: an edge every 33 cycles
    for (int k = 0; k < 20; k++) begin
      trig = 1'b1; tick(2); trig = 1'b0; tick(31);
    end
    // random
    for (int k = 0; k < 3000; k++) begin
      trig = ($urandom_range(0, 5) == 0);
      tick(1);
    end
    trig = 1'b0;
    tick(W + 2);
    checks++;
    if (widths_bad != 0 || widths_ok < 24) begin
      failures++;
      $display("pulse widths: %0d of %0d cycles, %0d other", widths_ok, W, widths_bad);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
