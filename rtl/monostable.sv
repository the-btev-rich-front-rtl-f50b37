// monostable: one-shot pulse generator of a front-end channel.
//
// Each rising edge of 'trig' starts an output pulse of exactly PULSE_CYCLES
// clock cycles. The chip's monostable is an analog one-shot whose width
// (about 100 ns) is set by a bias; here it is a clocked counter, and the
// default of 10 cycles gives 100 ns at a 100 MHz clock (the clock frequency
// is this design's choice). The pulse is not retriggerable: an edge that
// arrives while a pulse is running is ignored.
//
// Timing: 'trig' must be synchronous to 'clk'. An edge seen in cycle t
// (trig high, previous sample low) makes 'pulse' high from cycle t+1 through
// t+PULSE_CYCLES. A new pulse can start in the cycle after one ends.
module monostable #(
  parameter int unsigned PULSE_CYCLES = 10
) (
  input  logic clk,
  input  logic rst_n,
  input  logic trig,
  output logic pulse
);

  localparam int unsigned CW = $clog2(PULSE_CYCLES + 1);

  logic          trig_q;
  logic [CW-1:0] count;
  logic          edge_seen;

  assign edge_seen = trig & ~trig_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_q <= 1'b0;
      count  <= '0;
    end else begin
      trig_q <= trig;
      if (count != '0) begin
        count <= count - 1'b1;
      end else if (edge_seen) begin
        count <= CW'(PULSE_CYCLES);
      end
    end
  end

  assign pulse = (count != '0);

endmodule
