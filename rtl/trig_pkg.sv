// trig_pkg: types, sizes and trigger-matrix contents shared by the SeaQuest
// trigger firmware.
//
// Every V1495 FPGA in the system runs the same chain: a 96-channel TDC with
// 1 ns bins, a delay-adjustment pipeline made of 16 ns bins, an in-time
// window, a pipelined trigger matrix and an output retiming stage.  The
// numbers below that come from the paper are the channel count (96), the
// 16 ns bin holding 4 time bits plus a data-valid bit, the 8-bit per-channel
// delay, the 2048 ns record depth (128 bins), the 16-slot x 256-hit event
// readout and the channel counts of the X hodoscope planes (23+16+16+16).
// The trigger-matrix contents are not published (they come from a Monte-Carlo
// road search); l1_term() and l2_term() generate example contents of the
// right shape: a 4-of-4 road plus its 3-of-4 variants for the track finders,
// and opposite-sign top/bottom pairs with a |px1|+|px2| cut plus single-muon
// terms for the track correlator.
package trig_pkg;

  // ---- sizes -------------------------------------------------------------
  localparam int N_CH        = 96;   // inputs per FPGA
  localparam int CH_PER_RAM  = 4;    // channels sharing one pipeline memory
  localparam int DEPTH_BINS  = 128;  // 2048 ns / 16 ns
  localparam int CH_W        = 7;    // channel number width
  localparam int N_SLOTS     = 16;   // time slots copied per event
  localparam int BUF_WORDS   = 256;  // event buffer capacity in hits

  // ---- one hit in one 16 ns bin ---------------------------------------------
  typedef struct packed {
    logic       dv;    // data valid
    logic [3:0] t;     // time inside the bin, 1 ns LSB
  } hit_t;

  // ---- event buffer words ------------------------------------------------------
  // Hit word: {16'h0, 1'b0, channel[6:0], slot[3:0], time[3:0]};
  // slot 0 is the latest copied time slot.  Unfilled words read as EOB.
  localparam logic [31:0] EOB_WORD = 32'hFFFF_FFFF;

  // ---- trigger matrix coincidence term -------------------------------------------
  // A term fires when every input selected by 'use' is set; a term with no
  // input selected never fires (padding).
  typedef struct packed {
    logic [3:0][CH_W-1:0] id;   // detector IDs (input bit numbers)
    logic [3:0]           use_; // which of the four IDs take part
  } coinc_t;

  // ---- 1st level X track finder channel map (Table 1 paddle counts) ----------
  localparam int ST1_BASE = 0,  ST1_N = 23;
  localparam int ST2_BASE = 23, ST2_N = 16;
  localparam int ST3_BASE = 39, ST3_N = 16;
  localparam int ST4_BASE = 55, ST4_N = 16;

  // Track-finder matrix sizes.
  localparam int L1_OUT   = 24;  // px bins sent to the 2nd level (paper: up to 32)
  localparam int L1_ROADS = 32;  // 4-station roads per px bin
  localparam int L1_TERMS = L1_ROADS * 5; // each road: 4-of-4 and four 3-of-4

  // Track-correlator matrix sizes.
  localparam int L2_OUT   = 5;   // trigger types sent to the DAQ (paper: up to 5)
  localparam int L2_TERMS = 288; // 2 sign combinations x 12 x 12 px bins
  localparam int PX_BINS  = L1_OUT / 2;  // bins per charge sign
  localparam int PX_SUM_CUT = 8;          // |px1|+|px2| threshold, bin units

  function automatic coinc_t mk(input int a, input int b, input int c, input int d,
                                input logic [3:0] u);
    coinc_t r;
    r.id[0] = CH_W'(a); r.id[1] = CH_W'(b); r.id[2] = CH_W'(c); r.id[3] = CH_W'(d);
    r.use_  = u;
    return r;
  endfunction

  // Example track-finder road k of px bin o.  Paddles advance with the road
  // number and the bending grows with the px bin.
  function automatic coinc_t l1_term(input int o, input int k);
    int r, v, a, b, c, d;
    logic [3:0] u;
    r = k / 5;
    v = k % 5;
    a = (r * ST1_N) / L1_ROADS;
    b = ((a * ST2_N) / ST1_N + o / 8) % ST2_N;
    c = (b + (o % 8) / 3) % ST3_N;
    d = (c + o % 3) % ST4_N;
    case (v)
      0: u = 4'b1111;   // A&B&C&D
      1: u = 4'b0111;   // A&B&C
      2: u = 4'b1011;   // A&B&D
      3: u = 4'b1101;   // A&C&D
      default: u = 4'b1110; // B&C&D
    endcase
    return mk(ST1_BASE + a, ST2_BASE + b, ST3_BASE + c, ST4_BASE + d, u);
  endfunction

  // Track-correlator inputs: four 24-bit words, finder f on bits 24f..24f+23
  // (0 upper X, 1 lower X, 2 upper Y, 3 lower Y).  In an X word bit i < 12
  // is a mu+ with |px| = i+1 bins, bit i >= 12 a mu- with |px| = i-11.
  function automatic coinc_t l2_term(input int o, input int k);
    int s, i, j, top, bot;
    coinc_t r;
    r = mk(0, 0, 0, 0, 4'b0000);
    s = k / (PX_BINS * PX_BINS);          // 0: top mu+ / bottom mu-, 1: swapped
    i = (k / PX_BINS) % PX_BINS;          // |px| bin of the top track - 1
    j = k % PX_BINS;                      // |px| bin of the bottom track - 1
    top = (s == 0) ? i : PX_BINS + i;
    bot = L1_OUT + ((s == 0) ? PX_BINS + j : j);
    case (o)
      0: if ((i + 1) + (j + 1) >= PX_SUM_CUT) r = mk(top, bot, 0, 0, 4'b0011); // high-mass dimuon
      1: r = mk(top, bot, 0, 0, 4'b0011);                                      // any opposite-sign pair
      2: if (k < 2 * L1_OUT) r = mk(k, 0, 0, 0, 4'b0001);                      // single muon
      3: if (k < PX_BINS) r = mk(k, 0, 0, 0, 4'b0001);                         // single mu+ top
      4: if (k < PX_BINS) r = mk(L1_OUT + k, 0, 0, 0, 4'b0001);                // single mu+ bottom
      default: ;
    endcase
    return r;
  endfunction

  // Number of 4-input OR pipeline levels needed for n terms (at least one).
  function automatic int or_levels(input int n);
    int l, m;
    l = 1; m = (n + 3) / 4;
    while (m > 1) begin m = (m + 3) / 4; l++; end
    return l;
  endfunction

endpackage
