// zs_readout_tb: the readout against a model of a stopped pipeline whose
// contents are a fixed function of (address, channel).  For a sparse event
// and for a dense one (more than 256 hits) it checks the buffer word by
// word against the expected copy order (latest slot first, channels 0..95),
// the zero suppression, the 256-hit limit, the end-of-block words after the
// last hit, and that the copy takes 1536 bins (24.576 us at 16 ns per word).
module zs_readout_tb;
  import trig_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  localparam int N = N_CH;
  localparam int AW = $clog2(DEPTH_BINS);
  logic c0, c90, rst, trig, busy;
  logic [1:0] ts;
  logic bin_strobe;
  logic [AW-1:0] offset, ptr, ro_addr;
  hit_t [N-1:0] ro_data;
  logic [8:0] hit_count;
  logic [7:0] buf_addr;
  logic [31:0] buf_data;
  int checks = 0, failures = 0, density = 20, overflows = 0;

  clock_source u_clk (.c0, .c90);
  coarse_counter u_cc (.c0, .rst, .ts, .bin_strobe);
  zs_readout dut (.c0, .rst, .bin_strobe, .trig, .offset, .ptr, .ro_addr, .ro_data, .busy,
                  .hit_count, .buf_addr, .buf_data);

  function automatic hit_t pipe_cell(input int a, input int ch);
    hit_t h;
    int x;
    x = (a * 131 + ch * 71 + (a * ch) % 17) % 100;
    h.dv = x < density;
    h.t  = 4'(a + 3 * ch);
    return h;
  endfunction

  // pipeline memory model: registered read
  always @(posedge c0)
    for (int i = 0; i < N; i++) ro_data[i] <= pipe_cell(int'(ro_addr), i);

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1; trig = 1'b0; offset = 7'd40; ptr = 7'd100; buf_addr = '0;
    repeat (3) @(posedge c0);
    #0.5 rst = 1'b0;
    for (int ev = 0; ev < 2; ev++) begin
      logic [31:0] exp_buf [$];
      int cycles;
      density = (ev == 0) ? 5 : 30;
      ptr = (ev == 0) ? 7'd100 : 7'd3;
      exp_buf = {};
      for (int s = 0; s < 16; s++)
        for (int ch = 0; ch < N; ch++) begin
          hit_t h;
          int a;
          a = (int'(ptr) - 2 - int'(offset) - s) & (DEPTH_BINS - 1);
          h = pipe_cell(a, ch);
          if (h.dv && exp_buf.size() < BUF_WORDS)
            exp_buf.push_back({16'h0, 1'b0, 7'(ch), 4'(s), h.t});
        end
      repeat (5) @(negedge c0);
      trig = 1'b1; @(negedge c0); trig = 1'b0;
      // a second trigger while busy is ignored
      repeat (50) @(negedge c0);
      trig = 1'b1; @(negedge c0); trig = 1'b0;
      cycles = 52;
      while (busy) begin @(negedge c0); cycles++; end
      checks++;
      if (cycles < 4 * 16 * N || cycles > 4 * 16 * N + 5) begin
        failures++; $display("event %0d: copy took %0d cycles", ev, cycles);
      end
      checks++;
      if (int'(hit_count) != exp_buf.size()) begin
        failures++; $display("event %0d: %0d hits, expected %0d", ev, hit_count, exp_buf.size());
      end
      if (exp_buf.size() == BUF_WORDS) overflows++;
      for (int w = 0; w < BUF_WORDS; w++) begin
        buf_addr = 8'(w);
        @(negedge c0);
        checks++;
        if (buf_data !== ((w < exp_buf.size()) ? exp_buf[w] : EOB_WORD)) begin
          failures++;
          if (failures < 10) $display("event %0d word %0d: %h expected %h", ev, w, buf_data,
                                      (w < exp_buf.size()) ? exp_buf[w] : EOB_WORD);
        end
      end
      $display("event %0d: %0d hits, %0d cycles", ev, hit_count, cycles);
    end
    checks++;
    if (overflows == 0) begin failures++; $display("buffer overflow never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
