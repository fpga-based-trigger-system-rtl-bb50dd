// tdc_unit_tb: all 96 channels at once.  Every channel gets one pulse with
// its own leading-edge time; the measured time 16 ns x bin + hit time must
// differ from the true edge time by the same constant on every channel, and
// every channel must report exactly one hit.  A second round does the same
// with other edge times.
module tdc_unit_tb;
  import trig_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  localparam int N = N_CH;
  logic c0, c90, rst;
  logic [N-1:0] din;
  logic [1:0] ts;
  logic bin_strobe;
  hit_t [N-1:0] hit;
  int checks = 0, failures = 0;
  longint bin = 0;
  int nhits [N];
  longint meas [N];

  clock_source u_clk (.c0, .c90);
  tdc_unit dut (.c0, .c90, .rst, .din, .ts, .bin_strobe, .hit);

  always @(posedge c0) if (bin_strobe) begin
    bin <= bin + 1;
    for (int i = 0; i < N; i++)
      if (hit[i].dv) begin nhits[i]++; meas[i] = 16 * bin + longint'(hit[i].t); end
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar i = 0; i < N; i++) begin : g_drv
    initial begin
      din[i] = 1'b0;
      #(400.5 + (i * 7) % 61);
      din[i] = 1'b1; #8; din[i] = 1'b0;
      #(600 + (i * 11) % 47);
      din[i] = 1'b1; #12; din[i] = 1'b0;
    end
  end

  initial begin
    longint off;
    rst = 1'b1;
    repeat (10) @(posedge c0);   // flushes the power-up contents of the sampling registers
    #0.5 rst = 1'b0;
    for (int i = 0; i < N; i++) nhits[i] = 0;
    for (int r = 0; r < 2; r++) begin
      int edge_ns [N];
      #(r == 0 ? 600 : 700);
      for (int i = 0; i < N; i++)
        edge_ns[i] = (r == 0) ? 401 + (i * 7) % 61 : 401 + (i * 7) % 61 + 8 + 600 + (i * 11) % 47;
      off = meas[0] - edge_ns[0];
      for (int i = 0; i < N; i++) begin
        checks++;
        if (nhits[i] != r + 1) begin failures++; $display("ch %0d round %0d: %0d hits", i, r, nhits[i]); end
        checks++;
        if (meas[i] - edge_ns[i] != off) begin
          failures++;
          $display("ch %0d round %0d: offset %0d, channel 0 has %0d", i, r, meas[i] - edge_ns[i], off);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
