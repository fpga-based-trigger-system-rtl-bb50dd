// tdc_retime: the digitizing and retiming stage between one TDC channel and
// the 62.5 MHz side.
//
// During the four c0 cycles of a 16 ns bin it keeps the first hit reported by
// tdc_channel and forms its 4-bit time {TS, T1, T0}.  On the bin strobe it
// hands {DV, time} on as the channel's hit for that bin and starts over, so a
// channel delivers at most one hit per 16 ns (the paper's 16 ns two-hit
// resolution).  Keeping the first of two hits in a bin is this design's
// choice.
//
// Timing: hit changes only on the c0 edge where bin_strobe is high and holds
// for the following bin.  ts is the coarse count of the cycle in which dv was
// produced.
module tdc_retime
  import trig_pkg::*;
(
  input  logic       c0,
  input  logic       rst,
  input  logic [1:0] ts,
  input  logic       bin_strobe,
  input  logic       dv,
  input  logic [1:0] t,
  output hit_t       hit
);
  hit_t acc, nxt;

  always_comb begin
    nxt = acc;
    if (dv && !acc.dv) begin
      nxt.dv = 1'b1;
      nxt.t  = {ts, t};
    end
  end

  always_ff @(posedge c0) begin
    if (rst) begin
      acc <= '0;
      hit <= '0;
    end else if (bin_strobe) begin
      hit <= nxt;
      acc <= '0;
    end else begin
      acc <= nxt;
    end
  end
endmodule
