// rf_input: digitizes the 53 MHz beam RF clock.
//
// The RF clock is taken like a hodoscope input: a tdc_channel finds its
// leading edges with 1 ns resolution and a tdc_retime turns them into one
// hit per 16 ns bin (the RF period, 18.9 ns, is longer than a bin, so no RF
// edge is lost).  rf_hit goes through the delay pipeline as a reference
// channel; rf_tick, a one-c0-cycle pulse per RF edge, marks the beam-clock
// cycles for the trigger output retiming.  The paper shows the RF input
// feeding the TDC (Fig. 3) and the trigger retiming (Fig. 5); using the same
// TDC channel for it is this design's choice.
module rf_input
  import trig_pkg::*;
(
  input  logic       c0,
  input  logic       c90,
  input  logic       rst,
  input  logic [1:0] ts,
  input  logic       bin_strobe,
  input  logic       rf_in,
  output hit_t       rf_hit,
  output logic       rf_tick
);
  logic [1:0] t;
  tdc_channel u_ch (.c0, .c90, .din(rf_in), .dv(rf_tick), .t);
  tdc_retime  u_rt (.c0, .rst, .ts, .bin_strobe, .dv(rf_tick), .t, .hit(rf_hit));
endmodule
