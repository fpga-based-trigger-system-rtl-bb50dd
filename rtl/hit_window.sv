// hit_window: the subtractor and in-time window between the delay pipeline
// and the trigger matrix.
//
// For every realigned hit the time since the latest RF leading edge is
// formed: hit time minus RF time when the RF edge lies in the same bin at or
// before the hit, otherwise hit time + 16 minus the time of the last RF edge
// seen in an earlier bin.  A hit is in time when that difference lies in the
// user window [win_lo, win_hi] (ns, 5 bits, both ends included).  The result
// is the hit pattern, one bit per channel per 16 ns bin, that feeds the
// trigger matrix.
//
// The paper shows a subtractor after the pipeline memory and says a
// user-defined time window selects the in-time hits; what is subtracted and
// the window format are this design's choice.  An RF edge later than the hit
// in the same bin is not used for that hit.
//
// Timing: inputs are sampled, and 'pattern' updated, on the bin strobe.
module hit_window
  import trig_pkg::*;
#(
  parameter int N = N_CH
) (
  input  logic         c0,
  input  logic         rst,
  input  logic         bin_strobe,
  input  hit_t [N-1:0] hits,
  input  hit_t         rf,
  input  logic [4:0]   win_lo,
  input  logic [4:0]   win_hi,
  output logic [N-1:0] pattern
);
  logic [3:0] last_rf;   // RF time of the latest earlier bin with an RF edge

  logic [N-1:0] pat_n;
  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [4:0] rel;
      if (rf.dv && rf.t <= hits[i].t) rel = {1'b0, hits[i].t} - {1'b0, rf.t};
      else                            rel = {1'b0, hits[i].t} + 5'd16 - {1'b0, last_rf};
      pat_n[i] = hits[i].dv && rel >= win_lo && rel <= win_hi;
    end
  end

  always_ff @(posedge c0) begin
    if (rst) begin
      last_rf <= '0;
      pattern <= '0;
    end else if (bin_strobe) begin
      pattern <= pat_n;
      if (rf.dv) last_rf <= rf.t;
    end
  end
endmodule
