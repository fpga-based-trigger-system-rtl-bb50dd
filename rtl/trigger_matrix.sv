// trigger_matrix: pipelined coincidence matrix (1st-level roads or
// 2nd-level trigger types).
//
// Every output bit owns N_TERMS coincidence terms.  A term is the AND of up
// to four input bits (detector IDs), e.g. A2&B1&C1&D2 for a 4-of-4 road or
// A2&B1&C1 for one of its 3-of-4 variants.  The terms of an output are then
// OR'ed by a tree of 4-input gates, one register per tree level, all on the
// 250 MHz clock: pipeline level 1 registers the OR of four coincidences,
// each further level the OR of four registers of the level before, until a
// single bit remains (Fig. 9).  An output fires when any of its terms is
// met; several terms met at once still give one fired bit.
//
// The matrix contents are generated at elaboration from trig_pkg: MODE 1
// selects the track-finder roads (l1_term), MODE 2 the track-correlator
// trigger types (l2_term).  The structure follows the paper; the contents
// are example contents of the right shape, since the paper's come from its
// Monte-Carlo road search and are not published.
//
// Timing: LEVELS = or_levels(N_TERMS) c0 cycles from 'pattern' to 'fired'
// (4 for 160 terms, 5 for 288).  A new pattern is accepted every cycle.
module trigger_matrix
  import trig_pkg::*;
#(
  parameter  int N_IN    = N_CH,
  parameter  int N_OUT   = L1_OUT,
  parameter  int N_TERMS = L1_TERMS,
  parameter  int MODE    = 1,
  localparam int LEVELS  = or_levels(N_TERMS),
  localparam int W0      = 4 ** LEVELS
) (
  input  logic             c0,
  input  logic [N_IN-1:0]  pattern,
  output logic [N_OUT-1:0] fired
);
  for (genvar o = 0; o < N_OUT; o++) begin : g_out
    // level 0: coincidence logic, padded to a power of four with zeros
    logic [W0-1:0] coinc;
    for (genvar k = 0; k < W0; k++) begin : g_term
      if (k < N_TERMS) begin : g_used
        localparam coinc_t T = (MODE == 2) ? l2_term(o, k) : l1_term(o, k);
        logic [3:0] in_ok;
        for (genvar e = 0; e < 4; e++) begin : g_in
          if (T.use_[e]) begin : g_on
            assign in_ok[e] = pattern[int'(T.id[e]) % N_IN];
          end else begin : g_off
            assign in_ok[e] = 1'b1;
          end
        end
        assign coinc[k] = (T.use_ != 4'b0000) && (&in_ok);
      end else begin : g_pad
        assign coinc[k] = 1'b0;
      end
    end

    // OR pipeline levels 1..LEVELS
    for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
      localparam int WL = 4 ** (LEVELS - l);
      logic [WL-1:0] q;
      for (genvar i = 0; i < WL; i++) begin : g_gate
        if (l == 1) begin : g_first
          always_ff @(posedge c0) q[i] <= |coinc[4*i +: 4];
        end else begin : g_next
          always_ff @(posedge c0) q[i] <= |g_lvl[l-1].q[4*i +: 4];
        end
      end
    end
    assign fired[o] = g_lvl[LEVELS].q[0];
  end
endmodule
