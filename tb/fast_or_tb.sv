// fast_or_tb: self-checking test of the 64-input fast-OR.
//
// Checks all-zero, every single channel alone, every channel missing from an
// otherwise full set, and random patterns with few bits set.
module fast_or_tb;
  localparam int unsigned N = 64;
  logic [N-1:0] terms;
  logic         any_hit;
  int checks = 0;
  int failures = 0;

  fast_or #(.N(N)) dut (.terms(terms), .any_hit(any_hit));

  task automatic expect_val(logic exp);
    #1;
    checks++;
    if (any_hit !== exp) begin
      failures++;
      $display("terms=%h any_hit=%0b expected %0b", terms, any_hit, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    terms = '0; expect_val(1'b0);
    for (int i = 0; i < N; i++) begin
      terms = '0; terms[i] = 1'b1; expect_val(1'b1);
    end
    terms = '1; expect_val(1'b1);
    for (int k = 0; k < 500; k++) begin
      automatic bit e = 1'b0;
      for (int i = 0; i < N; i++) begin
        terms[i] = ($urandom_range(0, 99) == 0);
        e |= terms[i];
      end
      expect_val(e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
