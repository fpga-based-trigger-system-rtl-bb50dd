// coarse_counter: the coarse time counter of the TDC and the 62.5 MHz bin
// strobe.
//
// A 2-bit counter on the 250 MHz 0-degree clock counts the four 4 ns cycles
// of every 16 ns bin.  Its value is the coarse time TS, the two upper bits of
// the 4-bit hit time.  bin_strobe is high in the last cycle of a bin
// (ts == 3); every block that the text describes as running at 62.5 MHz
// does its work on the c0 edge that ends such a cycle, so the 62.5 MHz clock
// of the original is carried as a clock enable that is phase-locked to c0.
// The counter and TS follow the paper; the clock-enable form is this design's
// choice.  Reset (synchronous, active high) clears the counter.
module coarse_counter (
  input  logic       c0,
  input  logic       rst,
  output logic [1:0] ts,
  output logic       bin_strobe
);
  always_ff @(posedge c0) begin
    if (rst) ts <= '0;
    else     ts <= ts + 2'd1;
  end

  assign bin_strobe = (ts == 2'd3);
endmodule
