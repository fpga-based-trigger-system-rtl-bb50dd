// tdc_unit: the N_CH-channel TDC of one trigger FPGA.
//
// Each input gets a tdc_channel (multi-phase sampling, 1 ns) and a
// tdc_retime; all share one coarse_counter, whose TS and bin strobe define
// the 16 ns bins of the whole FPGA.  Output: one hit_t per channel per bin,
// updated on the c0 edge with bin_strobe high; ts and bin_strobe are passed
// on for the later stages.  96 channels as in the paper.
module tdc_unit
  import trig_pkg::*;
#(
  parameter int N = N_CH
) (
  input  logic         c0,
  input  logic         c90,
  input  logic         rst,
  input  logic [N-1:0] din,
  output logic [1:0]   ts,
  output logic         bin_strobe,
  output hit_t [N-1:0] hit
);
  coarse_counter u_cc (.c0, .rst, .ts, .bin_strobe);

  for (genvar i = 0; i < N; i++) begin : g_ch
    logic       dv;
    logic [1:0] t;
    tdc_channel u_ch (.c0, .c90, .din(din[i]), .dv, .t);
    tdc_retime  u_rt (.c0, .rst, .ts, .bin_strobe, .dv, .t, .hit(hit[i]));
  end
endmodule
