// coarse_counter_tb: checks that TS counts 0,1,2,3 after reset and that the
// bin strobe is high exactly in the cycle with TS = 3, i.e. once per 16 ns.
module coarse_counter_tb;
  timeunit 1ns; timeprecision 100ps;
  logic c0, c90, rst;
  logic [1:0] ts;
  logic bin_strobe;
  int checks = 0, failures = 0;

  clock_source u_clk (.c0, .c90);
  coarse_counter dut (.c0, .rst, .ts, .bin_strobe);

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expect_ts, strobes;
    time last_strobe;
    rst = 1'b1;
    repeat (3) @(posedge c0);
    #0.5 rst = 1'b0;
    expect_ts = 0; strobes = 0; last_strobe = 0;
    repeat (64) begin
      #0.5;
      checks++;
      if (ts != 2'(expect_ts)) begin failures++; $display("ts %0d expected %0d", ts, expect_ts); end
      checks++;
      if (bin_strobe != (expect_ts == 3)) begin failures++; $display("strobe wrong at ts %0d", ts); end
      if (bin_strobe) begin
        if (strobes > 0) begin
          checks++;
          if ($time - last_strobe != 16) begin failures++; $display("strobe period %0t", $time - last_strobe); end
        end
        strobes++; last_strobe = $time;
      end
      @(posedge c0);
      expect_ts = (expect_ts + 1) % 4;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
