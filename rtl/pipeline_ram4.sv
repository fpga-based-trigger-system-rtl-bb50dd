// pipeline_ram4: one delay-adjustment pipeline memory serving four channels.
//
// Each channel has an 8-bit delay (0..255 ns).  Once per 16 ns bin the
// channel's hit time (4 bits) is added to the low 4 delay bits; the sum is
// the hit's time inside its new bin.  If the addition carries, the hit is
// held back for one bin before it is written.  The write address is the
// common pipeline pointer of the bin plus the high 4 delay bits, so a hit
// leaves the pipeline D = delay[7:4] + carry bins after a hit with no delay.
// The memory has DEPTH bins (2048 ns); every channel writes every bin (an
// empty bin writes DV = 0), so each word is rewritten once per turn of the
// pointer and nothing stale survives.  The four channels are written one
// after the other in the four 250 MHz cycles of the next bin (channel k when
// ts == k); the read side delivers all four channels of one address in
// parallel.  These mechanisms follow the paper (Sec. 5, Fig. 7).
//
// This design's own choices: when a carried hit and a new uncarried hit land
// in the same bin the earlier one is kept; writes are suspended while 'run'
// is low (pipeline stopped for readout); the read port is a registered read
// of rd_addr on every c0 edge.
//
// Timing: hit_in, delay and ptr are sampled on the c0 edge with bin_strobe
// high; the writes for that bin follow in the next four c0 edges.  rd_data
// is mem[rd_addr] one c0 edge after rd_addr.
module pipeline_ram4
  import trig_pkg::*;
#(
  parameter int DEPTH = DEPTH_BINS,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                c0,
  input  logic                rst,
  input  logic [1:0]          ts,
  input  logic                bin_strobe,
  input  logic                run,
  input  logic [AW-1:0]       ptr,
  input  logic [3:0][7:0]     delay,
  input  hit_t [3:0]          hit_in,
  input  logic [AW-1:0]       rd_addr,
  output hit_t [3:0]          rd_data
);
  hit_t mem [DEPTH][4];

  hit_t [3:0]          held;     // carried hits waiting one bin
  hit_t [3:0]          wdat;     // data of the bin being written
  logic [3:0][AW-1:0]  waddr;
  logic                wen;      // the bin being written is valid

  // carry logic of the next bin
  hit_t [3:0]          wdat_n, held_n;
  always_comb begin
    for (int k = 0; k < 4; k++) begin
      logic [4:0] sum;
      hit_t       now_hit;
      sum         = {1'b0, hit_in[k].t} + {1'b0, delay[k][3:0]};
      now_hit.t   = sum[3:0];
      now_hit.dv  = hit_in[k].dv && !sum[4];
      held_n[k].t  = sum[3:0];
      held_n[k].dv = hit_in[k].dv && sum[4];
      if (held[k].dv && (!now_hit.dv || held[k].t <= now_hit.t))
        wdat_n[k] = held[k];
      else
        wdat_n[k] = now_hit;
    end
  end

  always_ff @(posedge c0) begin
    if (rst) begin
      held <= '0;
      wdat <= '0;
      wen  <= 1'b0;
    end else if (bin_strobe) begin
      wen <= run;
      if (run) begin
        held <= held_n;
        wdat <= wdat_n;
        for (int k = 0; k < 4; k++)
          waddr[k] <= ptr + AW'(delay[k][7:4]);
      end
    end
  end

  // channel-by-channel writes at 250 MHz
  always_ff @(posedge c0) begin
    if (wen) mem[waddr[ts]][ts] <= wdat[ts];
  end

  // parallel 4-channel read
  always_ff @(posedge c0) begin
    for (int k = 0; k < 4; k++) rd_data[k] <= mem[rd_addr][k];
  end
endmodule
