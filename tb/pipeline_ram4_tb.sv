// pipeline_ram4_tb: one four-channel pipeline memory with random delays
// (0..255 ns) and random hits.  A scoreboard places every hit at bin
// n + delay[7:4] + carry with time (t + delay[3:0]) mod 16, keeping the
// earlier of two hits that land in the same bin, and the common end of the
// pipeline (address ptr - 2) is compared with it every bin once the memory
// has been written through.  A stop of 20 bins in the middle checks that
// nothing is written while the pipeline is stopped.
module pipeline_ram4_tb;
  import trig_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  localparam int DEPTH = DEPTH_BINS;
  localparam int AW = $clog2(DEPTH);
  localparam int NB = 1200;
  logic c0, c90, rst, run;
  logic [1:0] ts;
  logic bin_strobe;
  logic [AW-1:0] ptr, rd_addr;
  logic [3:0][7:0] delay;
  hit_t [3:0] hit_in, rd_data;
  int checks = 0, failures = 0, carries = 0, merges = 0;
  hit_t expect_q [NB + 40][4];

  clock_source u_clk (.c0, .c90);
  coarse_counter u_cc (.c0, .rst, .ts, .bin_strobe);
  pipeline_ram4 dut (.c0, .rst, .ts, .bin_strobe, .run, .ptr, .delay, .hit_in, .rd_addr, .rd_data);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic place(input int b, input int k, input hit_t h);
    if (!expect_q[b][k].dv || h.t < expect_q[b][k].t) begin
      if (expect_q[b][k].dv) merges++;
      expect_q[b][k] = h;
    end else merges++;
  endtask

  initial begin
    int n;
    rst = 1'b1; run = 1'b1; ptr = '0; rd_addr = '0; hit_in = '0;
    for (int k = 0; k < 4; k++) delay[k] = 8'($urandom);
    delay[0] = 8'd0;
    delay[1] = 8'd255;
    for (int b = 0; b < NB + 40; b++) for (int k = 0; k < 4; k++) expect_q[b][k] = '0;
    repeat (3) @(posedge c0);
    #0.5 rst = 1'b0;
    n = 0;
    for (int step = 0; step < NB + 20; step++) begin
      // move to the cycle that ends a bin
      do @(negedge c0); while (!bin_strobe);
      // compare the common end for absolute bin n-2 (read during the last bin)
      if (n >= DEPTH + 20 && n - 2 < NB) begin
        for (int k = 0; k < 4; k++) begin
          checks++;
          if (rd_data[k] !== expect_q[n - 2][k] &&
              !(rd_data[k].dv == 1'b0 && expect_q[n - 2][k].dv == 1'b0)) begin
            failures++;
            $display("bin %0d lane %0d: %b/%0d expected %b/%0d", n - 2, k,
                     rd_data[k].dv, rd_data[k].t, expect_q[n - 2][k].dv, expect_q[n - 2][k].t);
          end
        end
      end
      if (step >= 600 && step < 620) begin
        // stopped: pointer frozen, inputs ignored
        run = 1'b0;
        for (int k = 0; k < 4; k++) begin hit_in[k].dv = 1'b1; hit_in[k].t = 4'($urandom); end
      end else begin
        run = 1'b1;
        ptr = AW'(n);
        rd_addr = AW'(n - 1);   // read address of the next bin's check
        for (int k = 0; k < 4; k++) begin
          hit_in[k].dv = ($urandom % 3) == 0 && n < NB - 300;
          hit_in[k].t  = 4'($urandom);
          if (hit_in[k].dv) begin
            hit_t h;
            logic [4:0] s;
            s = {1'b0, hit_in[k].t} + {1'b0, delay[k][3:0]};
            h.dv = 1'b1; h.t = s[3:0];
            if (s[4]) carries++;
            place(n + int'(delay[k][7:4]) + int'(s[4]), k, h);
          end
        end
        n++;
      end
    end
    checks++;
    if (carries == 0 || merges == 0) begin failures++; $display("carry %0d merge %0d", carries, merges); end
    $display("carries=%0d merges=%0d", carries, merges);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
