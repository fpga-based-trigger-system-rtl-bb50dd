// zs_readout: zero-suppressed event readout from the stopped pipeline.
//
// A global trigger stops the pipeline.  The readout then copies a history of
// N_SLOTS time slots for all N channels from the pipeline memories into the
// event buffer, one pipeline word per 16 ns bin (16 x 96 = 1536 words, i.e.
// 24.576 us): it loops over channels 0..N-1 inside each slot, starting with
// the latest slot, and writes only words with DV set.  The buffer holds
// BUF_WORDS hits; once it is full the remaining (older) hits are dropped.
// When the copy is finished the pipeline runs again.  The host reads the
// buffer through buf_addr/buf_data; words at or above hit_count read as the
// end-of-block word EOB_WORD.  Sizes, copy order, suppression and the
// overflow rule follow the paper (Sec. 5).
//
// This design's own choices: the latest copied slot lies 'offset' bins
// behind the common end of the pipeline (to cover the trigger latency); a
// trigger that arrives while a copy is running is ignored; the word format
// is given in trig_pkg.
//
// Timing: trig is a one-c0-cycle pulse; busy (pipeline stopped) rises on the
// next c0 edge and falls after N_SLOTS*N + 1 bin strobes.  buf_data is a
// registered read, valid one c0 edge after buf_addr.
module zs_readout
  import trig_pkg::*;
#(
  parameter  int N      = N_CH,
  parameter  int DEPTH  = DEPTH_BINS,
  parameter  int RD_LAG = 2,
  parameter  int SLOTS  = N_SLOTS,
  parameter  int BUFW   = BUF_WORDS,
  localparam int AW     = $clog2(DEPTH),
  localparam int BW     = $clog2(BUFW)
) (
  input  logic          c0,
  input  logic          rst,
  input  logic          bin_strobe,
  input  logic          trig,
  input  logic [AW-1:0] offset,
  input  logic [AW-1:0] ptr,
  output logic [AW-1:0] ro_addr,
  input  hit_t [N-1:0]  ro_data,
  output logic          busy,
  output logic [BW:0]   hit_count,
  input  logic [BW-1:0] buf_addr,
  output logic [31:0]   buf_data
);
  typedef enum logic [1:0] {IDLE, ARM, COPY} state_e;
  state_e state;

  logic [$clog2(SLOTS)-1:0] slot;
  logic [CH_W-1:0]          ch;
  logic [31:0]              buffer [BUFW];

  assign busy    = (state != IDLE);
  assign ro_addr = AW'(ptr - AW'(RD_LAG) - offset - AW'(slot));

  always_ff @(posedge c0) begin
    if (rst) begin
      state     <= IDLE;
      slot      <= '0;
      ch        <= '0;
      hit_count <= '0;
    end else begin
      case (state)
        IDLE: if (trig) begin
          state     <= ARM;
          hit_count <= '0;
          slot      <= '0;
          ch        <= '0;
        end
        // one bin for the address of the first slot to reach the memories
        ARM:  if (bin_strobe) state <= COPY;
        COPY: if (bin_strobe) begin
          if (ro_data[ch].dv && !hit_count[BW]) begin
            buffer[hit_count[BW-1:0]] <= {16'h0000, 1'b0, ch, 4'(slot), ro_data[ch].t};
            hit_count <= hit_count + 1'b1;
          end
          if (ch == CH_W'(N - 1)) begin
            ch <= '0;
            if (slot == $bits(slot)'(SLOTS - 1)) state <= IDLE;
            else slot <= slot + 1'b1;
          end else begin
            ch <= ch + 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  always_ff @(posedge c0) begin
    if ({1'b0, buf_addr} < hit_count) buf_data <= buffer[buf_addr];
    else                              buf_data <= EOB_WORD;
  end

  // the channel index never leaves the channel range
  a_ch_range: assert property (@(posedge c0) disable iff (rst) ch < CH_W'(N));
endmodule
