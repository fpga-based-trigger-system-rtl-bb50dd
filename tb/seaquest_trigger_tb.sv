// seaquest_trigger_tb: the whole two-level trigger, all sizes at their
// defaults.
//
// Hodoscope hits are generated in time with a 53 MHz RF clock; every input
// has its own cable delay, compensated by its delay register.  Events:
//   1. dimuon: a mu+ road in the upper X finder and a mu- road in the lower
//      X finder, with one station late in the lower one (3-of-4);
//   2. single muon: only the upper road;
//   3. out of time: the upper road 8 ns late, rejected by the window;
//   4. matrix disabled in the upper finder;
//   5. a dimuon with a ringing (2 ns) pulse on a spare channel, then a global
//      trigger: every FPGA stops and reads out its hits;
//   6. a burst of more than 256 hits in the upper Y finder, then a global
//      trigger: that buffer must overflow at 256 hits.
// The 1st-level words are checked against the matrix terms evaluated on the
// in-time channels, the 2nd-level word against the correlator terms
// evaluated on the observed 1st-level words.  Each mechanism (3-of-4 road,
// delay carry, window rejection, matrix disable, ringing rejection, readout
// stop, buffer overflow, dimuon and single-muon triggers) is counted and
// must occur at least once.  Latencies from the RF edge are printed.
module seaquest_trigger_tb;
  import trig_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  localparam int N = N_CH;
  logic c0, c90, rst, rf_in, global_trig;
  logic [3:0][N-1:0] hodo_in;
  logic [4:0][N-1:0][7:0] delay;
  logic [4:0][7:0] rf_delay;
  logic [4:0][4:0] win_lo, win_hi;
  logic [4:0] matrix_en, busy, primed;
  logic [4:0][6:0] ro_offset;
  logic [3:0][L1_OUT-1:0] l1_out;
  logic [L2_OUT-1:0] trigger;
  logic [4:0][8:0] hit_count;
  logic [4:0][7:0] buf_addr;
  logic [4:0][31:0] buf_data;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_3of4 = 0, n_carry = 0, n_window = 0, n_disable = 0, n_ringing = 0;
  int n_stop = 0, n_overflow = 0, n_dimuon = 0, n_single = 0;

  logic [3:0][L1_OUT-1:0] l1_seen;
  logic [L2_OUT-1:0] l2_seen;
  realtime l1_first, l2_first;

  clock_source u_clk (.c0, .c90);
  seaquest_trigger dut (.*);

  function automatic int cable(input int f, input int i);
    return (i * 13 + f * 7) % 40;
  endfunction

  initial begin
    rf_in = 1'b0;
    #300.3;
    forever begin rf_in = 1'b1; #9.45; rf_in = 1'b0; #9.45; end
  end

  always @(posedge c0) begin
    for (int f = 0; f < 4; f++) if (l1_out[f] != '0) begin
      if (l1_seen == '0) l1_first = $realtime;
      l1_seen[f] |= l1_out[f];
    end
    if (trigger != '0) begin
      if (l2_seen == '0) l2_first = $realtime;
      l2_seen |= trigger;
    end
  end

  // count delay carries in the upper X finder's pipeline memories
  for (genvar r = 0; r < (N + 4) / 4; r++) begin : g_carry
    always @(posedge c0)
      if (dut.g_l1[0].u_finder.u_pipe.bin_strobe)
        for (int k = 0; k < 4; k++)
          if (dut.g_l1[0].u_finder.u_pipe.g_ram[r].u_ram.held_n[k].dv) n_carry++;
  end

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic realtime rf_edge(input int k);
    return 300.3 + 18.9 * k;
  endfunction

  task automatic pulse(input int f, input int ch, input realtime at, input real width);
    fork
      begin
        #(at - $realtime);
        hodo_in[f][ch] = 1'b1;
        #(width);
        hodo_in[f][ch] = 1'b0;
      end
    join_none
  endtask

  // hit on finder f, channel ch, RF cycle k, 'late' ns after in-time
  task automatic hit(input int f, input int ch, input int k, input real late);
    pulse(f, ch, rf_edge(k) + 5.0 + late + real'(cable(f, ch)), 10.0);
  endtask

  function automatic logic [L1_OUT-1:0] l1_expect(input logic [N-1:0] p);
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

  function automatic logic [L2_OUT-1:0] l2_expect(input logic [3:0][L1_OUT-1:0] p);
    logic [L2_OUT-1:0] w;
    w = '0;
    for (int o = 0; o < L2_OUT; o++)
      for (int k = 0; k < L2_TERMS; k++) begin
        coinc_t c;
        logic ok;
        c = l2_term(o, k);
        ok = (c.use_ != 0);
        for (int e = 0; e < 4; e++) if (c.use_[e] && !p[c.id[e] / L1_OUT][c.id[e] % L1_OUT]) ok = 1'b0;
        if (ok) w[o] = 1'b1;
      end
    return w;
  endfunction

  // one event: upper road (px bin o_up) and/or lower road (px bin o_dn)
  task automatic event_run(input string name, input int k, input int o_up, input int o_dn,
                           input real late_up, input int nlate_dn);
    logic [3:0][N-1:0] intime;
    logic [3:0][L1_OUT-1:0] want1;
    logic [L2_OUT-1:0] want2;
    intime = '0;
    if (o_up >= 0) begin
      coinc_t c;
      c = l1_term(o_up, 0);
      for (int e = 0; e < 4; e++) begin
        hit(0, int'(c.id[e]), k, late_up);
        if (late_up == 0.0) intime[0][c.id[e]] = 1'b1;
      end
    end
    if (o_dn >= 0) begin
      coinc_t c;
      c = l1_term(o_dn, 0);
      for (int e = 0; e < 4; e++) begin
        hit(1, int'(c.id[e]), k, (e >= 4 - nlate_dn) ? 8.0 : 0.0);
        if (e < 4 - nlate_dn) intime[1][c.id[e]] = 1'b1;
      end
    end
    for (int f = 0; f < 4; f++) want1[f] = matrix_en[f] ? l1_expect(intime[f]) : '0;
    l1_seen = '0; l2_seen = '0;
    #(rf_edge(k) - $realtime + 600.0);
    for (int f = 0; f < 4; f++) begin
      checks++;
      if (l1_seen[f] !== want1[f]) begin
        failures++; $display("%s: finder %0d word %h expected %h", name, f, l1_seen[f], want1[f]);
      end
    end
    want2 = l2_expect(l1_seen);
    checks++;
    if (l2_seen !== want2) begin
      failures++; $display("%s: trigger %b expected %b", name, l2_seen, want2);
    end
    $display("%s: L1 %h %h, trigger %b, L1 at %0.1f ns, L2 at %0.1f ns after the RF edge", name,
             l1_seen[0], l1_seen[1], l2_seen,
             (l1_seen != '0) ? l1_first - rf_edge(k) : 0.0, (l2_seen != '0) ? l2_first - rf_edge(k) : 0.0);
    if (l2_seen[0]) n_dimuon++;
    if (l2_seen[2] && !l2_seen[1]) n_single++;
    if (nlate_dn == 1 && o_dn >= 0 && l1_seen[1] != '0) n_3of4++;
    if (late_up != 0.0 && o_up >= 0 && l1_seen[0] == '0) n_window++;
    if (!matrix_en[0] && o_up >= 0 && l1_seen[0] == '0) n_disable++;
  endtask

  task automatic readout(output int counts [5]);
    @(negedge c0);
    global_trig = 1'b1; @(negedge c0); global_trig = 1'b0;
    @(negedge c0);
    checks++;
    if (busy != 5'b11111) begin failures++; $display("not every pipeline stopped: %b", busy); end
    else n_stop++;
    while (busy != '0) @(negedge c0);
    for (int f = 0; f < 5; f++) counts[f] = int'(hit_count[f]);
  endtask

  initial begin
    int counts [5];
    rst = 1'b1; hodo_in = '0; global_trig = 1'b0; buf_addr = '0;
    // the latest copied slot lies this many bins behind the end of the pipeline
    ro_offset = {7'd12, 7'd20, 7'd20, 7'd20, 7'd20};
    for (int f = 0; f < 4; f++) begin
      for (int i = 0; i < N; i++) delay[f][i] = 8'(100 - cable(f, i));
      rf_delay[f] = 8'd95;
      win_lo[f] = 5'd7; win_hi[f] = 5'd13;
    end
    // the correlator's inputs are synchronous to the beam clock: accept the whole RF cycle
    for (int i = 0; i < N; i++) delay[4][i] = 8'd40;
    rf_delay[4] = 8'd40;
    win_lo[4] = 5'd0; win_hi[4] = 5'd18;
    matrix_en = '1;
    repeat (3) @(posedge c0);
    #0.5 rst = 1'b0;
    wait (primed == 5'b11111);

    event_run("dimuon, lower road 3 of 4", 150, 2, 12 + 9, 0.0, 1);
    event_run("single muon", 200, 4, -1, 0.0, 0);
    event_run("upper road out of time", 250, 4, -1, 8.0, 0);
    matrix_en[0] = 1'b0;
    event_run("upper matrix disabled", 300, 4, 12 + 3, 0.0, 0);
    matrix_en[0] = 1'b1;

    // dimuon plus a ringing pulse, then read out
    pulse(0, 90, rf_edge(350) + 5.0, 2.0);
    event_run("dimuon for readout", 350, 6, 12 + 6, 0.0, 0);
    readout(counts);
    checks++;
    if (counts[0] != 4 || counts[1] != 4) begin
      failures++; $display("readout: X finders hold %0d and %0d hits, expected 4 and 4", counts[0], counts[1]);
    end else n_ringing++;   // channel 90's 2 ns pulse was not recorded
    checks++;
    if (counts[4] < 2) begin failures++; $display("readout: correlator holds %0d hits", counts[4]); end
    for (int w = 0; w < 5; w++) begin
      buf_addr[0] = 8'(w); @(negedge c0); @(negedge c0);
      checks++;
      if (w < 4 ? (buf_data[0] == EOB_WORD || buf_data[0][14:8] == 7'd90) : (buf_data[0] != EOB_WORD)) begin
        failures++; $display("readout word %0d of the upper X finder: %h", w, buf_data[0]);
      end
    end

    // burst: 72 channels of the upper Y finder fire in 4 RF cycles
    for (int k = 0; k < 4; k++)
      for (int i = 0; i < 72; i++) hit(2, i, 2000 + 2 * k, 0.0);
    #(rf_edge(2008) - $realtime + 300.0);
    ro_offset[2] = 7'd8;
    readout(counts);
    checks++;
    if (counts[2] != BUF_WORDS) begin failures++; $display("burst: %0d hits kept, expected %0d", counts[2], BUF_WORDS); end
    else n_overflow++;
    buf_addr[2] = 8'd255; @(negedge c0); @(negedge c0);
    checks++;
    if (buf_data[2] == EOB_WORD) begin failures++; $display("burst: last buffer word empty"); end

    $display("mechanisms: 3of4=%0d carry=%0d window=%0d disable=%0d ringing=%0d stop=%0d overflow=%0d dimuon=%0d single=%0d",
             n_3of4, n_carry, n_window, n_disable, n_ringing, n_stop, n_overflow, n_dimuon, n_single);
    checks++; if (n_3of4 == 0)     begin failures++; $display("3-of-4 never seen"); end
    checks++; if (n_carry == 0)    begin failures++; $display("delay carry never seen"); end
    checks++; if (n_window == 0)   begin failures++; $display("window rejection never seen"); end
    checks++; if (n_disable == 0)  begin failures++; $display("matrix disable never seen"); end
    checks++; if (n_ringing == 0)  begin failures++; $display("ringing rejection never seen"); end
    checks++; if (n_stop == 0)     begin failures++; $display("readout stop never seen"); end
    checks++; if (n_overflow == 0) begin failures++; $display("overflow never seen"); end
    checks++; if (n_dimuon == 0)   begin failures++; $display("dimuon trigger never seen"); end
    checks++; if (n_single == 0)   begin failures++; $display("single-muon trigger never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
