// slow_control: serial configuration register and mode of operation.
//
// The chip is programmed by shifting a bit pattern in. While 'init' is high,
// each cycle with 'sc_shift' high moves the CFG_BITS-long shift register up by
// one place and takes 'sc_din' into bit 0; the bit that falls off the top is
// 'sc_dout', so chips can be daisy-chained or the pattern read back by
// shifting it out. When 'init' goes low the shift register is copied into the
// working configuration 'cfg' in one cycle, so the channels never see a
// half-shifted pattern.
//
// Mode: INIT while 'init' is high and from reset until the first load; after
// that CALIB or NORMAL according to the loaded 'cal_mode' bit.
//
// The three modes and the serial programming follow the chip description.
// The shift-enable/load protocol, the shadow copy, bit order (see va_pkg) and
// the all-zero reset value are this design's choices.
//
// Timing: the copy happens at the first clock edge that sees 'init' low after
// it was high; 'cfg' and 'mode' change in the following cycle.
module slow_control
  import va_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  init,      // high during the initialization sequence
  input  logic  sc_shift,  // serial clock enable: shift one bit this cycle
  input  logic  sc_din,    // serial data in
  output logic  sc_dout,   // serial data out (top bit of the shift register)
  output cfg_t  cfg,       // configuration in use
  output mode_e mode
);

  logic [CFG_BITS-1:0] sr;
  logic                init_q;
  logic                configured;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr         <= '0;
      cfg        <= '0;
      init_q     <= 1'b0;
      configured <= 1'b0;
    end else begin
      init_q <= init;
      if (init && sc_shift) begin
        sr <= {sr[CFG_BITS-2:0], sc_din};
      end
      if (init_q && !init) begin
        cfg        <= cfg_t'(sr);
        configured <= 1'b1;
      end
    end
  end

  assign sc_dout = sr[CFG_BITS-1];

  always_comb begin
    if (init || !configured) mode = MODE_INIT;
    else if (cfg.glob.cal_mode) mode = MODE_CALIB;
    else mode = MODE_NORMAL;
  end

endmodule
