// delay_pipeline_tb: the full 96-channel pipeline plus the RF channel, with
// a different delay on every channel.  Random hits are placed by a
// scoreboard at bin n + delay[7:4] + carry + 2 (the read lag) and compared
// with 'aligned' every bin.  It also checks that nothing comes out before the
// memories have been written through ('primed'), that a stop freezes the
// pointer, and that the readout port returns stored history while stopped.
module delay_pipeline_tb;
  import trig_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  localparam int N = N_CH;
  localparam int DEPTH = DEPTH_BINS;
  localparam int AW = $clog2(DEPTH);
  localparam int NB = 700;
  logic c0, c90, rst, stop;
  logic [1:0] ts;
  logic bin_strobe, primed;
  logic [N-1:0][7:0] delay;
  logic [7:0] rf_delay;
  hit_t [N-1:0] hit_in, aligned, ro_data;
  hit_t rf_in, rf_aligned;
  logic [AW-1:0] ptr, ro_addr;
  int checks = 0, failures = 0;
  hit_t expect_q [NB + 40][N + 1];

  clock_source u_clk (.c0, .c90);
  coarse_counter u_cc (.c0, .rst, .ts, .bin_strobe);
  delay_pipeline dut (.c0, .rst, .ts, .bin_strobe, .stop, .delay, .rf_delay, .hit_in, .rf_in,
                      .aligned, .rf_aligned, .ptr, .ro_addr, .ro_data, .primed);

  initial begin
    #300000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int dl(input int i);
    return (i == N) ? int'(rf_delay) : int'(delay[i]);
  endfunction

  initial begin
    int seen_early;
    logic [AW-1:0] ptr_at_stop;
    rst = 1'b1; stop = 1'b0; hit_in = '0; rf_in = '0; ro_addr = '0;
    for (int i = 0; i < N; i++) delay[i] = 8'((i * 37 + 5) % 256);
    rf_delay = 8'd77;
    for (int b = 0; b < NB + 40; b++) for (int i = 0; i <= N; i++) expect_q[b][i] = '0;
    repeat (3) @(posedge c0);
    #0.5 rst = 1'b0;
    seen_early = 0;
    for (int n = 0; n < NB; n++) begin
      do @(negedge c0); while (!bin_strobe);
      // aligned was updated at the previous bin strobe, from absolute bin n-1-2
      if (n - 3 >= 0 && n < DEPTH) if (aligned != '0) seen_early++;
      if (n - 3 >= DEPTH + 20 && n - 3 < NB - 20) begin
        for (int i = 0; i <= N; i++) begin
          hit_t got;
          got = (i == N) ? rf_aligned : aligned[i];
          checks++;
          if (got.dv != expect_q[n - 3][i].dv || (got.dv && got.t != expect_q[n - 3][i].t)) begin
            failures++;
            if (failures < 10) $display("bin %0d ch %0d: %b/%0d expected %b/%0d", n - 3, i,
                     got.dv, got.t, expect_q[n - 3][i].dv, expect_q[n - 3][i].t);
          end
        end
      end
      for (int i = 0; i <= N; i++) begin
        hit_t h;
        logic [4:0] s;
        h.dv = ($urandom % 9) == 0 && n < NB - 60;
        h.t  = 4'($urandom);
        if (i == N) rf_in = h; else hit_in[i] = h;
        if (h.dv) begin
          int b;
          s = {1'b0, h.t} + {1'b0, 4'(dl(i))};
          b = n + dl(i) / 16 + int'(s[4]);
          if (!expect_q[b][i].dv || s[3:0] < expect_q[b][i].t) begin
            expect_q[b][i].dv = 1'b1; expect_q[b][i].t = s[3:0];
          end
        end
      end
    end
    checks++;
    if (!primed) begin failures++; $display("never primed"); end
    checks++;
    if (seen_early != 0) begin failures++; $display("%0d outputs before the memory was primed", seen_early); end
    // stop: the pointer freezes and the history can be read
    do @(negedge c0); while (!bin_strobe);
    stop = 1'b1;
    ptr_at_stop = ptr;
    repeat (40) @(negedge c0);
    checks++;
    if (ptr != ptr_at_stop) begin failures++; $display("pointer moved while stopped"); end
    // ro_addr = address of absolute bin b is b mod DEPTH; check 20 bins of history
    for (int b = NB - 100; b < NB - 80; b++) begin
      ro_addr = AW'(b);
      @(negedge c0); @(negedge c0);
      for (int i = 0; i < N; i++) begin
        checks++;
        if (ro_data[i].dv != expect_q[b][i].dv || (ro_data[i].dv && ro_data[i].t != expect_q[b][i].t)) begin
          failures++;
          if (failures < 20) $display("history bin %0d ch %0d wrong", b, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
