// rf_input_tb: a 53 MHz (18.9 ns) RF clock with an arbitrary phase.  Checks
// one rf_tick per RF period, one RF hit per RF edge in the 16 ns bins, and
// that the measured edge times (16 ns x bin + time) step by 18 or 19 ns and
// stay within 1 ns of the true times.
module rf_input_tb;
  import trig_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  logic c0, c90, rst, rf_in;
  logic [1:0] ts;
  logic bin_strobe, rf_tick;
  hit_t rf_hit;
  int checks = 0, failures = 0, ticks = 0;
  longint bin = 0;
  longint meas [$];

  clock_source u_clk (.c0, .c90);
  coarse_counter u_cc (.c0, .rst, .ts, .bin_strobe);
  rf_input dut (.c0, .c90, .rst, .ts, .bin_strobe, .rf_in, .rf_hit, .rf_tick);

  always @(posedge c0) begin
    if (rf_tick) ticks++;
    if (bin_strobe) begin
      bin <= bin + 1;
      if (rf_hit.dv) meas.push_back(16 * bin + longint'(rf_hit.t));
    end
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NRF = 200;
  initial begin
    rf_in = 1'b0;
    #300.3;
    repeat (NRF) begin rf_in = 1'b1; #9.45; rf_in = 1'b0; #9.45; end
  end

  initial begin
    rst = 1'b1;
    repeat (3) @(posedge c0);
    #0.5 rst = 1'b0;
    #4200;
    checks++;
    if (ticks != NRF) begin failures++; $display("%0d ticks for %0d RF edges", ticks, NRF); end
    checks++;
    if (meas.size() != NRF) begin failures++; $display("%0d RF hits for %0d edges", meas.size(), NRF); end
    else begin
      for (int i = 1; i < NRF; i++) begin
        real err;
        checks++;
        if (meas[i] - meas[i - 1] != 18 && meas[i] - meas[i - 1] != 19) begin
          failures++; $display("RF step %0d: %0d ns", i, meas[i] - meas[i - 1]);
        end
        err = real'(meas[i] - meas[0]) - 18.9 * i;
        checks++;
        if (err > 1.0 || err < -1.0) begin failures++; $display("RF edge %0d off by %f ns", i, err); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
