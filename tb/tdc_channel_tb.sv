// tdc_channel_tb: drives pulses whose leading edges sweep all sixteen 1 ns
// phases of the 250 MHz clock and checks that the measured time
// (4 ns x cycle + fine code) follows the true edge time with a constant
// offset, that each pulse gives exactly one hit, and that pulses shorter
// than 3 ns are rejected while 3 ns pulses are kept.
module tdc_channel_tb;
  timeunit 1ns; timeprecision 100ps;
  logic c0, c90, din;
  logic dv;
  logic [1:0] t;
  int checks = 0, failures = 0;
  longint cycle = 0;
  int nhits = 0;
  longint last_meas = 0;

  clock_source u_clk (.c0, .c90);
  tdc_channel dut (.c0, .c90, .din, .dv, .t);

  // cycle counter and hit capture; c0 rises at 2 + 4n ns
  always @(posedge c0) begin
    cycle <= cycle + 1;
    if (dv) begin
      nhits++;
      last_meas = 4 * cycle + longint'(t);
    end
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // wait until absolute time start_ps (in 100 ps units), then pulse
  task automatic pulse(input longint start_ps, input longint width_ps);
    longint now_ps;
    now_ps = longint'($realtime * 10.0);
    if (start_ps > now_ps) #((start_ps - now_ps) * 0.1);
    din = 1'b1;
    #(width_ps * 0.1);
    din = 1'b0;
  endtask

  initial begin
    longint offset;
    real st;
    int edge_ns;
    din = 1'b0;
    offset = 0;
    #50;   // let the power-up register contents flush out
    for (int i = 0; i < 48; i++) begin
      st = 100.0 + 53.0 * i + 0.5;
      edge_ns = 100 + 53 * i + 1;          // first integer-ns sample that is high
      nhits = 0;
      pulse(longint'(st * 10.0), 100);
      #30;
      checks++;
      if (nhits != 1) begin failures++; $display("pulse %0d gave %0d hits", i, nhits); end
      if (i == 0) offset = last_meas - edge_ns;
      else begin
        checks++;
        if (last_meas - edge_ns != offset) begin
          failures++;
          $display("pulse %0d edge %0d ns: measured %0d, offset %0d expected %0d",
                   i, edge_ns, last_meas, last_meas - edge_ns, offset);
        end
      end
    end
    // ringing: 2 ns pulses at all phases are not digitized
    for (int i = 0; i < 8; i++) begin
      nhits = 0;
      pulse(longint'($realtime * 10.0) + 310 + 5 * (i % 2), 20);
      #30;
      checks++;
      if (nhits != 0) begin failures++; $display("2 ns pulse %0d digitized", i); end
    end
    // 3 ns pulses are kept
    for (int i = 0; i < 8; i++) begin
      nhits = 0;
      pulse(longint'($realtime * 10.0) + 335, 30);
      #30;
      checks++;
      if (nhits != 1) begin failures++; $display("3 ns pulse %0d gave %0d hits", i, nhits); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
