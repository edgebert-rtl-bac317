// adpll: behavioural model of the all-digital PLL that clocks the
// accelerator; not synthesizable logic.
//
// The real ADPLL is a synthesizable design taken from an open-source SoC
// generator framework, and its internals are not part of this design. This
// model keeps the interface the DVFS controller drives: a requested output
// frequency in MHz. It produces a square wave of that frequency on clk_out
// (no clock when the request is 0) and drops `locked` for LOCK_PS after
// every change of the request, standing for the relock time, whose value is
// an assumption (the paper only calls the relock fast).
//
// Timing is in picoseconds: the half period is 500000 / freq_mhz ps. While
// the request is 0 the model waits in fixed 1 ns steps. Verilator may warn
// of a possible zero delay on the computed half period; the divisor is at
// least 1 MHz, so the delay is never zero for any legal request.
module adpll #(
  parameter int LOCK_PS = 50000
) (
  input  logic [11:0] freq_mhz,
  output logic        clk_out,
  output logic        locked
);
  timeunit 1ps;
  timeprecision 1ps;

  logic [11:0] last;
  int half_ps;
  assign half_ps = 500000 / ((freq_mhz == 0) ? 1 : int'(freq_mhz));
  initial begin clk_out = 1'b0; locked = 1'b0; last = '0; end

  always begin
    if (freq_mhz == 0) begin
      clk_out = 1'b0;
      #1000;
    end else begin
      #(half_ps);
      clk_out = ~clk_out;
    end
  end

  always begin
    @(freq_mhz);
    locked = 1'b0;
    last = freq_mhz;
    #(LOCK_PS);
    if (last == freq_mhz && freq_mhz != 0) locked = 1'b1;
  end
endmodule
