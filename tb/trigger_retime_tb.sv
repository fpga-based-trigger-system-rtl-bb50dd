// trigger_retime_tb: random matrix outputs and RF ticks every 4 or 5 cycles
// (18.9 ns).  The reference ORs the outputs between ticks; after every tick
// the output word must appear for exactly PULSE cycles and be zero
// otherwise.  With enable low the outputs must stay zero.
module trigger_retime_tb;
  timeunit 1ns; timeprecision 100ps;
  localparam int NO = 24;
  localparam int PULSE = 2;
  logic c0, c90, rst, enable, rf_tick;
  logic [NO-1:0] fired, trig_out;
  int checks = 0, failures = 0, disabled = 0, nonzero = 0;

  clock_source u_clk (.c0, .c90);
  trigger_retime #(.N_OUT(NO), .PULSE(PULSE)) dut (.c0, .rst, .enable, .rf_tick, .fired, .trig_out);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NO-1:0] acc, word;
    int since, period, tnext;
    rst = 1'b1; enable = 1'b1; rf_tick = 1'b0; fired = '0;
    repeat (3) @(posedge c0);
    #0.5 rst = 1'b0;
    acc = '0; word = '0; since = 100; tnext = 4;
    for (int c = 0; c < 3000; c++) begin
      @(negedge c0);
      // output seen now results from the previous edge
      checks++;
      if (trig_out !== ((since >= 1 && since <= PULSE) ? word : '0)) begin
        failures++;
        if (failures < 10) $display("cycle %0d: out %h expected %h", c, trig_out,
                                    (since >= 1 && since <= PULSE) ? word : '0);
      end
      if (trig_out != '0) nonzero++;
      if (c == 2000) enable = 1'b0;
      fired = ($urandom % 6 == 0) ? NO'(1) << ($urandom % NO) : '0;
      rf_tick = (tnext == 0);
      if (rf_tick) begin
        word = enable ? (acc | fired) : '0;
        if (!enable) disabled++;
        acc = '0; since = 0;
        tnext = (c % 10 < 9) ? 4 : 3;   // 19, 19, ... ns on average 18.9
      end else begin
        acc |= fired;
        tnext--;
      end
      since++;
    end
    checks++;
    if (nonzero == 0 || disabled == 0) begin failures++; $display("no output or no disabled period"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
