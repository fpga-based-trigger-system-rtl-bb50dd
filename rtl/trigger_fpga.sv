// trigger_fpga: the firmware of one V1495 trigger module.
//
// The same chain serves the 1st-level track finders and the 2nd-level track
// correlator; only the trigger matrix contents differ (MODE 1 or 2).
//   din[N] --> tdc_unit (1 ns TDC, one hit per channel per 16 ns bin)
//          --> delay_pipeline (per-channel 0..255 ns delay, 2048 ns history)
//          --> hit_window (time since the RF edge inside the user window)
//          --> trigger_matrix (coincidences and pipelined OR tree, 250 MHz)
//          --> trigger_retime (one output word per RF cycle) --> trig_out
//   rf_in  --> rf_input (RF TDC channel): reference channel of the pipeline
//              and the beam-clock tick of the output retiming
//   global_trig --> zs_readout: stops the pipeline and copies 16 time slots
//              of all channels, zero-suppressed, into the 256-hit buffer.
// Settings that the VME bus loads in the original (delays, window, readout
// offset, matrix enable) and the event buffer read port are plain ports.
//
// Clocks: c0 and c90 are the 0- and 90-degree 250 MHz PLL clocks; the
// 62.5 MHz bin rate is a clock enable derived from c0 (see coarse_counter).
// rst is synchronous to c0, active high.  din, rf_in are asynchronous;
// global_trig is a one-cycle pulse synchronous to c0.
//
// The no_inline_module comment below only asks the simulator to keep this
// module a model of its own, so that the four identical track finders of
// the system share one compiled copy; it does not change the logic.
module trigger_fpga
  import trig_pkg::*;
#(
  parameter  int N       = N_CH,
  parameter  int N_OUT   = L1_OUT,
  parameter  int N_TERMS = L1_TERMS,
  parameter  int MODE    = 1,
  parameter  int DEPTH   = DEPTH_BINS,
  localparam int AW      = $clog2(DEPTH)
) (
  input  logic              c0,
  input  logic              c90,
  input  logic              rst,
  input  logic [N-1:0]      din,
  input  logic              rf_in,
  // settings
  input  logic [N-1:0][7:0] delay,
  input  logic [7:0]        rf_delay,
  input  logic [4:0]        win_lo,
  input  logic [4:0]        win_hi,
  input  logic              matrix_en,
  input  logic [AW-1:0]     ro_offset,
  // trigger
  output logic [N_OUT-1:0]  trig_out,
  // event readout
  input  logic              global_trig,
  output logic              busy,
  output logic [8:0]        hit_count,
  input  logic [7:0]        buf_addr,
  output logic [31:0]       buf_data,
  output logic              primed
);
  /*verilator no_inline_module*/
  logic [1:0]    ts;
  logic          bin_strobe;
  hit_t [N-1:0]  hit, aligned, ro_data;
  hit_t          rf_hit, rf_aligned;
  logic          rf_tick;
  logic [AW-1:0] ptr, ro_addr;
  logic [N-1:0]  pattern;
  logic [N_OUT-1:0] fired;

  tdc_unit #(.N(N)) u_tdc (.c0, .c90, .rst, .din, .ts, .bin_strobe, .hit);

  rf_input u_rf (.c0, .c90, .rst, .ts, .bin_strobe, .rf_in, .rf_hit, .rf_tick);

  delay_pipeline #(.N(N), .DEPTH(DEPTH)) u_pipe (
    .c0, .rst, .ts, .bin_strobe, .stop(busy), .delay, .rf_delay,
    .hit_in(hit), .rf_in(rf_hit), .aligned, .rf_aligned, .ptr,
    .ro_addr, .ro_data, .primed
  );

  hit_window #(.N(N)) u_win (
    .c0, .rst, .bin_strobe, .hits(aligned), .rf(rf_aligned), .win_lo, .win_hi, .pattern
  );

  trigger_matrix #(.N_IN(N), .N_OUT(N_OUT), .N_TERMS(N_TERMS), .MODE(MODE)) u_mat (
    .c0, .pattern, .fired
  );

  trigger_retime #(.N_OUT(N_OUT)) u_out (
    .c0, .rst, .enable(matrix_en), .rf_tick, .fired, .trig_out
  );

  zs_readout #(.N(N), .DEPTH(DEPTH)) u_ro (
    .c0, .rst, .bin_strobe, .trig(global_trig), .offset(ro_offset), .ptr, .ro_addr,
    .ro_data, .busy, .hit_count, .buf_addr, .buf_data
  );
endmodule
