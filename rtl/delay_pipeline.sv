// delay_pipeline: the 96-channel delay-adjustment pipeline and event store.
//
// The TDC hits of N channels, plus the RF reference as channel N, go into
// ceil((N+1)/4) pipeline_ram4 memories that share one pipeline pointer.  The
// pointer advances once per 16 ns bin while the pipeline runs.  The common
// end of the pipeline is the address ptr - RD_LAG: there every channel's hit
// appears delay[7:4] + carry + RD_LAG bins after it was taken, with the low
// delay bits added to its time, so that channels with different cable delays
// come out aligned (Fig. 7).  A stop request (global trigger) freezes the
// pointer and the writes; the memories then keep the history of the last
// 2048 ns, which zs_readout reads through ro_addr.
//
// This design's own choices: RD_LAG = 2 bins keeps the read clear of the
// four write cycles of a bin; after reset the outputs stay empty until every
// word has been written once (DEPTH bins), because memory contents at power
// up are unknown; the RF channel goes through the pipeline like a hodoscope
// channel so that its time is delayed alongside the hits.
//
// Timing: 'aligned' and 'rf_aligned' are registered on the bin strobe and hold
// for one bin.  With run low the shared read port follows ro_addr and ro_data
// is valid one c0 edge later.
module delay_pipeline
  import trig_pkg::*;
#(
  parameter  int N      = N_CH,
  parameter  int DEPTH  = DEPTH_BINS,
  parameter  int RD_LAG = 2,
  localparam int AW     = $clog2(DEPTH),
  localparam int NR     = (N + 1 + 3) / 4
) (
  input  logic              c0,
  input  logic              rst,
  input  logic [1:0]        ts,
  input  logic              bin_strobe,
  input  logic              stop,
  input  logic [N-1:0][7:0] delay,
  input  logic [7:0]        rf_delay,
  input  hit_t [N-1:0]      hit_in,
  input  hit_t              rf_in,
  output hit_t [N-1:0]      aligned,
  output hit_t              rf_aligned,
  output logic [AW-1:0]     ptr,
  input  logic [AW-1:0]     ro_addr,
  output hit_t [N-1:0]      ro_data,
  output logic              primed
);
  logic               run;
  logic [AW:0]        fill;
  logic [AW-1:0]      rd_addr;
  logic [4*NR-1:0][7:0] dl;
  hit_t [4*NR-1:0]    hin, rdat;

  assign run = !stop;

  always_comb begin
    dl  = '0;
    hin = '0;
    dl[N-1:0]  = delay;
    hin[N-1:0] = hit_in;
    dl[N]      = rf_delay;
    hin[N]     = rf_in;
  end

  always_ff @(posedge c0) begin
    if (rst) begin
      ptr  <= '0;
      fill <= '0;
    end else if (bin_strobe && run) begin
      ptr <= ptr + 1'b1;
      if (!fill[AW]) fill <= fill + 1'b1;
    end
  end
  assign primed = fill[AW];

  assign rd_addr = run ? AW'(ptr - AW'(RD_LAG)) : ro_addr;

  for (genvar r = 0; r < NR; r++) begin : g_ram
    pipeline_ram4 #(.DEPTH(DEPTH)) u_ram (
      .c0, .rst, .ts, .bin_strobe, .run, .ptr,
      .delay  (dl[4*r +: 4]),
      .hit_in (hin[4*r +: 4]),
      .rd_addr,
      .rd_data(rdat[4*r +: 4])
    );
  end

  assign ro_data = rdat[N-1:0];

  always_ff @(posedge c0) begin
    if (rst) begin
      aligned    <= '0;
      rf_aligned <= '0;
    end else if (bin_strobe) begin
      if (run && primed) begin
        aligned    <= rdat[N-1:0];
        rf_aligned <= rdat[N];
      end else begin
        aligned    <= '0;
        rf_aligned <= '0;
      end
    end
  end
endmodule
