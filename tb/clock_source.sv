// clock_source: behavioural stand-in for the FPGA PLL in simulation.
//
// Produces the two 250 MHz clocks of the TDC, c0 and c90 = c0 delayed by a
// quarter period (1 ns).  c180 and c270 are their inversions inside the
// design.  The 40 MHz reference of the real PLL is not modelled.
module clock_source (
  output logic c0,
  output logic c90
);
  timeunit 1ns; timeprecision 100ps;
  initial begin
    c0 = 1'b0;
    forever #2 c0 = ~c0;
  end
  initial begin
    c90 = 1'b0;
    #1;
    forever #2 c90 = ~c90;
  end
endmodule
