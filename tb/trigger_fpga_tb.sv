// trigger_fpga_tb: one 1st-level track-finder FPGA end to end.
//
// Hodoscope hits are generated in time with a 53 MHz RF clock and reach the
// inputs through cables of different length; the per-channel delay registers
// make every channel's total delay 100 ns.  Events (all on one road of the
// example matrix): all four stations in time; one station late (a 3-of-4
// variant must still fire); two stations late; the matrix disabled.  For each
// the expected trigger word is worked out by evaluating the matrix terms on
// the in-time channels.  A global trigger after a last event must stop the
// pipeline and give exactly those hits, with their channel numbers, in the
// event buffer.  The hit-to-trigger latency is printed.
module trigger_fpga_tb;
  import trig_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  localparam int N = N_CH;
  logic c0, c90, rst, rf_in;
  logic [N-1:0] din;
  logic [N-1:0][7:0] delay;
  logic [7:0] rf_delay;
  logic [4:0] win_lo, win_hi;
  logic matrix_en, global_trig, busy, primed;
  logic [6:0] ro_offset;
  logic [L1_OUT-1:0] trig_out;
  logic [8:0] hit_count;
  logic [7:0] buf_addr;
  logic [31:0] buf_data;
  int checks = 0, failures = 0;
  logic [L1_OUT-1:0] seen;
  int pulses;
  realtime first_out;

  clock_source u_clk (.c0, .c90);
  trigger_fpga dut (.c0, .c90, .rst, .din, .rf_in, .delay, .rf_delay, .win_lo, .win_hi,
                    .matrix_en, .ro_offset, .trig_out, .global_trig, .busy, .hit_count,
                    .buf_addr, .buf_data, .primed);

  function automatic int cable(input int i);
    return (i * 13) % 40;
  endfunction

  // RF clock: edges at 300.3 + 18.9 k ns
  initial begin
    rf_in = 1'b0;
    #300.3;
    forever begin rf_in = 1'b1; #9.45; rf_in = 1'b0; #9.45; end
  end

  always @(posedge c0) if (trig_out != '0) begin
    if (seen == '0) first_out = $realtime;
    seen |= trig_out;
    pulses++;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // fire channel ch 'late' ns after RF edge k (plus its cable)
  task automatic hit(input int ch, input int k, input real late);
    fork
      begin
        realtime at;
        at = 300.3 + 18.9 * k + 5.0 + late + real'(cable(ch));
        #(at - $realtime);
        din[ch] = 1'b1;
        #10;
        din[ch] = 1'b0;
      end
    join_none
  endtask

  function automatic logic [L1_OUT-1:0] expect_word(input logic [N-1:0] p);
    logic [L1_OUT-1:0] w;
    w = '0;
    for (int o = 0; o < L1_OUT; o++)
      for (int k = 0; k < L1_TERMS; k++) begin
        coinc_t c;
        logic ok;
        c = l1_term(o, k);
        ok = (c.use_ != 0);
        for (int e = 0; e < 4; e++) if (c.use_[e] && !p[c.id[e]]) ok = 1'b0;
        if (ok) w[o] = 1'b1;
      end
    return w;
  endfunction

  task automatic run_event(input int k, input int nlate, input logic en, input string name);
    coinc_t road;
    logic [N-1:0] intime;
    logic [L1_OUT-1:0] want;
    road = l1_term(5, 50);            // 4-of-4 term of road 10, px bin 5
    matrix_en = en;
    intime = '0;
    for (int e = 0; e < 4; e++) begin
      int ch;
      ch = int'(road.id[e]);
      if (e >= 4 - nlate) hit(ch, k, 8.0);
      else begin hit(ch, k, 0.0); intime[ch] = 1'b1; end
    end
    want = en ? expect_word(intime) : '0;
    seen = '0; pulses = 0;
    #(300.3 + 18.9 * k - $realtime + 400.0);
    checks++;
    if (seen !== want) begin
      failures++;
      $display("%s: trigger word %h expected %h", name, seen, want);
    end else
      $display("%s: trigger word %h in %0d output cycles, %0.1f ns after the RF edge", name, seen,
               pulses, first_out - (300.3 + 18.9 * k));
    if (want != '0) begin
      checks++;
      if (pulses == 0) begin failures++; $display("%s: no output pulse", name); end
    end
  endtask

  initial begin
    rst = 1'b1; din = '0; global_trig = 1'b0; buf_addr = '0; ro_offset = '0;
    for (int i = 0; i < N; i++) delay[i] = 8'(100 - cable(i));
    rf_delay = 8'd95;   // RF realigned 10 ns before in-time hits
    win_lo = 5'd7; win_hi = 5'd13;
    matrix_en = 1'b1;
    repeat (3) @(posedge c0);
    #0.5 rst = 1'b0;
    wait (primed);
    run_event(150, 0, 1'b1, "4 of 4 in time");
    checks++;
    if (seen == '0) begin failures++; $display("road did not fire"); end
    run_event(200, 1, 1'b1, "3 of 4 in time");
    checks++;
    if (seen == '0) begin failures++; $display("3-of-4 road did not fire"); end
    run_event(250, 2, 1'b1, "2 of 4 in time");
    run_event(300, 0, 1'b0, "matrix disabled");
    // event readout
    begin
      coinc_t road;
      int got [N];
      road = l1_term(5, 50);
      seen = '0;
      run_event(350, 0, 1'b1, "readout event");
      @(negedge c0);
      global_trig = 1'b1; @(negedge c0); global_trig = 1'b0;
      @(negedge c0);
      checks++;
      if (!busy) begin failures++; $display("pipeline did not stop"); end
      while (busy) @(negedge c0);
      ro_offset = '0;
      checks++;
      if (hit_count != 9'd4) begin failures++; $display("readout: %0d hits, expected 4", hit_count); end
      for (int i = 0; i < N; i++) got[i] = 0;
      for (int w = 0; w < int'(hit_count); w++) begin
        buf_addr = 8'(w); @(negedge c0); @(negedge c0);
        got[buf_data[14:8]]++;
      end
      for (int e = 0; e < 4; e++) begin
        checks++;
        if (got[road.id[e]] != 1) begin failures++; $display("readout: channel %0d missing", road.id[e]); end
      end
      buf_addr = 8'd4; @(negedge c0); @(negedge c0);
      checks++;
      if (buf_data != EOB_WORD) begin failures++; $display("readout: no end-of-block word"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
