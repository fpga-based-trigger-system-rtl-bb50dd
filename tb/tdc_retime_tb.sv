// tdc_retime_tb: feeds random TDC hits (none, one or two per 16 ns bin) and
// checks that each bin delivers the first hit of that bin with time
// {TS, T1, T0}, or DV = 0 for an empty bin.
module tdc_retime_tb;
  import trig_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  logic c0, c90, rst;
  logic [1:0] ts;
  logic bin_strobe, dv;
  logic [1:0] t;
  hit_t hit;
  int checks = 0, failures = 0;

  clock_source u_clk (.c0, .c90);
  tdc_retime dut (.c0, .rst, .ts, .bin_strobe, .dv, .t, .hit);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hit_t expect_hit;
    int two = 0;
    rst = 1'b1; ts = 2'd0; bin_strobe = 1'b0; dv = 1'b0; t = 2'd0;
    repeat (4) @(negedge c0);
    rst = 1'b0;
    for (int b = 0; b < 400; b++) begin
      int n;
      expect_hit = '0;
      n = 0;
      for (int s = 0; s < 4; s++) begin
        @(negedge c0);
        ts = 2'(s);
        bin_strobe = (s == 3);
        dv = ($urandom % 3) == 0;
        t  = 2'($urandom);
        if (dv) begin
          n++;
          if (!expect_hit.dv) begin expect_hit.dv = 1'b1; expect_hit.t = {2'(s), t}; end
        end
      end
      if (n > 1) two++;
      @(posedge c0); #0.5;
      checks++;
      if (hit !== expect_hit) begin
        failures++;
        $display("bin %0d: hit %b/%0d expected %b/%0d", b, hit.dv, hit.t, expect_hit.dv, expect_hit.t);
      end
      #0.1;
    end
    checks++;
    if (two == 0) begin failures++; $display("no bin with two hits was tried"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
