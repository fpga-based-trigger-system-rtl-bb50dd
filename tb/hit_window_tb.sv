// hit_window_tb: random realigned hits and RF edges.  A reference model
// keeps the last RF time itself, computes each hit's time since the RF edge
// and the in-window decision, and compares the hit pattern every bin, for
// several windows.
module hit_window_tb;
  import trig_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  localparam int N = N_CH;
  logic c0, c90, rst;
  logic [1:0] ts;
  logic bin_strobe;
  hit_t [N-1:0] hits;
  hit_t rf;
  logic [4:0] win_lo, win_hi;
  logic [N-1:0] pattern;
  int checks = 0, failures = 0, n_in = 0, n_out = 0;

  clock_source u_clk (.c0, .c90);
  coarse_counter u_cc (.c0, .rst, .ts, .bin_strobe);
  hit_window dut (.c0, .rst, .bin_strobe, .hits, .rf, .win_lo, .win_hi, .pattern);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last_rf, rf_phase;
    logic [N-1:0] exp_pat;
    rst = 1'b1; hits = '0; rf = '0; win_lo = 5'd3; win_hi = 5'd9;
    repeat (3) @(posedge c0);
    #0.5 rst = 1'b0;
    last_rf = 0;
    rf_phase = 5;      // RF edges every 19 ns on a 1 ns grid
    for (int b = 0; b < 600; b++) begin
      do @(negedge c0); while (!bin_strobe);
      if (b > 0) begin
        checks++;
        if (pattern !== exp_pat) begin
          failures++;
          if (failures < 10) $display("bin %0d: pattern %h expected %h", b, pattern, exp_pat);
        end
      end
      if (b == 200) begin win_lo = 5'd0; win_hi = 5'd18; end
      if (b == 400) begin win_lo = 5'd10; win_hi = 5'd12; end
      // RF edge in this bin?
      rf = '0;
      if (rf_phase < 16) begin rf.dv = 1'b1; rf.t = 4'(rf_phase); end
      for (int i = 0; i < N; i++) begin
        hits[i].dv = ($urandom % 4) == 0;
        hits[i].t  = 4'($urandom);
      end
      // reference
      for (int i = 0; i < N; i++) begin
        int rel;
        if (rf.dv && int'(rf.t) <= int'(hits[i].t)) rel = int'(hits[i].t) - int'(rf.t);
        else rel = int'(hits[i].t) + 16 - last_rf;
        exp_pat[i] = hits[i].dv && rel >= int'(win_lo) && rel <= int'(win_hi);
        if (hits[i].dv) begin if (exp_pat[i]) n_in++; else n_out++; end
      end
      if (rf.dv) last_rf = int'(rf.t);
      rf_phase = (rf_phase < 16) ? rf_phase + 19 - 16 : rf_phase - 16;
    end
    checks++;
    if (n_in == 0 || n_out == 0) begin failures++; $display("window never selected/rejected"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
