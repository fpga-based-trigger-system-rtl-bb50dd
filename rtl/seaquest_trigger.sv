// seaquest_trigger: the two-level SeaQuest trigger, five V1495 FPGAs.
//
// Four 1st-level track finders (upper X, lower X, upper Y, lower Y) each
// digitize their hodoscope planes and send a 24-bit px-binned track word per
// beam-clock cycle; the 2nd-level track correlator digitizes the four words
// (4 x 24 = 96 inputs) with the same TDC and pipeline and applies its
// trigger-type matrix, giving the up-to-5-bit trigger word for the DAQ.  All
// five run the same trigger_fpga; MODE selects the matrix contents.  All
// FPGAs share the 250 MHz clocks, the RF clock and the global trigger, which
// stops every pipeline for the event readout.
//
// The X finders take the 71 X paddles (23+16+16+16) on inputs 0..70 in
// station order (see trig_pkg).  Settings and readout ports are per FPGA,
// index 0..3 for the finders and 4 for the correlator.
module seaquest_trigger
  import trig_pkg::*;
(
  input  logic                   c0,
  input  logic                   c90,
  input  logic                   rst,
  input  logic [3:0][N_CH-1:0]   hodo_in,
  input  logic                   rf_in,
  input  logic [4:0][N_CH-1:0][7:0] delay,
  input  logic [4:0][7:0]        rf_delay,
  input  logic [4:0][4:0]        win_lo,
  input  logic [4:0][4:0]        win_hi,
  input  logic [4:0]             matrix_en,
  input  logic [4:0][6:0]        ro_offset,
  input  logic                   global_trig,
  output logic [3:0][L1_OUT-1:0] l1_out,
  output logic [L2_OUT-1:0]      trigger,
  output logic [4:0]             busy,
  output logic [4:0][8:0]        hit_count,
  input  logic [4:0][7:0]        buf_addr,
  output logic [4:0][31:0]       buf_data,
  output logic [4:0]             primed
);
  for (genvar f = 0; f < 4; f++) begin : g_l1
    trigger_fpga #(.N_OUT(L1_OUT), .N_TERMS(L1_TERMS), .MODE(1)) u_finder (
      .c0, .c90, .rst, .din(hodo_in[f]), .rf_in,
      .delay(delay[f]), .rf_delay(rf_delay[f]), .win_lo(win_lo[f]), .win_hi(win_hi[f]),
      .matrix_en(matrix_en[f]), .ro_offset(ro_offset[f]),
      .trig_out(l1_out[f]),
      .global_trig, .busy(busy[f]), .hit_count(hit_count[f]),
      .buf_addr(buf_addr[f]), .buf_data(buf_data[f]), .primed(primed[f])
    );
  end

  trigger_fpga #(.N_OUT(L2_OUT), .N_TERMS(L2_TERMS), .MODE(2)) u_correlator (
    .c0, .c90, .rst, .din(l1_out), .rf_in,
    .delay(delay[4]), .rf_delay(rf_delay[4]), .win_lo(win_lo[4]), .win_hi(win_hi[4]),
    .matrix_en(matrix_en[4]), .ro_offset(ro_offset[4]),
    .trig_out(trigger),
    .global_trig, .busy(busy[4]), .hit_count(hit_count[4]),
    .buf_addr(buf_addr[4]), .buf_data(buf_data[4]), .primed(primed[4])
  );
endmodule
