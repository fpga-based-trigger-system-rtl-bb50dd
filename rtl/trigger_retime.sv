// trigger_retime: issues the trigger matrix result once per beam RF cycle.
//
// The matrix runs at 250 MHz on 16 ns hit bins; the next stage expects one
// output word per 53 MHz beam-clock cycle.  This block ORs the matrix
// outputs over each RF period and, on the RF tick that ends the period,
// drives the collected word for PULSE c0 cycles (8 ns by default), then zero
// until the next tick.  With 'enable' low the outputs stay zero: the FPGA
// then works as a plain zero-suppressed TDC.  The retiming on the RF clock
// and the matrix disable follow the paper (Fig. 5, Sec. 5); the pulse width
// and the OR over the period are this design's choice.
//
// Timing: rf_tick is a one-c0-cycle pulse; trig_out changes on the c0 edge
// after it.
module trigger_retime #(
  parameter int N_OUT = 24,
  parameter int PULSE = 2
) (
  input  logic             c0,
  input  logic             rst,
  input  logic             enable,
  input  logic             rf_tick,
  input  logic [N_OUT-1:0] fired,
  output logic [N_OUT-1:0] trig_out
);
  logic [N_OUT-1:0]         acc, word;
  logic [$clog2(PULSE+1)-1:0] cnt;

  always_ff @(posedge c0) begin
    if (rst) begin
      acc  <= '0;
      word <= '0;
      cnt  <= '0;
    end else begin
      if (rf_tick) begin
        word <= enable ? (acc | fired) : '0;
        acc  <= '0;
        cnt  <= $bits(cnt)'(PULSE);
      end else begin
        acc <= acc | fired;
        if (cnt != 0) cnt <= cnt - 1'b1;
      end
    end
  end

  assign trig_out = (cnt != 0) ? word : '0;
endmodule
