// trigger_matrix_tb: random hit patterns every 250 MHz cycle into the
// track-finder matrix (MODE 1, 24 outputs x 160 terms) and the
// track-correlator matrix (MODE 2, 5 outputs x 288 terms).  The reference
// evaluates every coincidence term itself and ORs them per output; the
// outputs must match exactly LEVELS cycles later (4 and 5 cycles), and every
// output must be seen both fired and not fired.
module trigger_matrix_tb;
  import trig_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  localparam int LAT1 = 4, LAT2 = 5;   // 160 -> 40 -> 10 -> 3 -> 1, 288 -> 72 -> 18 -> 5 -> 2 -> 1
  logic c0, c90;
  logic [N_CH-1:0] pattern;
  logic [L1_OUT-1:0] fired1;
  logic [L2_OUT-1:0] fired2;
  int checks = 0, failures = 0;
  int ones1 [L1_OUT], ones2 [L2_OUT];

  clock_source u_clk (.c0, .c90);
  trigger_matrix dut1 (.c0, .pattern, .fired(fired1));
  trigger_matrix #(.N_IN(N_CH), .N_OUT(L2_OUT), .N_TERMS(L2_TERMS), .MODE(2)) dut2 (
    .c0, .pattern, .fired(fired2));

  function automatic logic term_ok(input coinc_t c, input logic [N_CH-1:0] p);
    logic ok;
    ok = (c.use_ != 0);
    for (int e = 0; e < 4; e++) if (c.use_[e] && !p[c.id[e]]) ok = 1'b0;
    return ok;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [L1_OUT-1:0] exp1 [$];
    logic [L2_OUT-1:0] exp2 [$];
    for (int o = 0; o < L1_OUT; o++) ones1[o] = 0;
    for (int o = 0; o < L2_OUT; o++) ones2[o] = 0;
    pattern = '0;
    for (int c = 0; c < 1500; c++) begin
      logic [L1_OUT-1:0] e1;
      logic [L2_OUT-1:0] e2;
      @(negedge c0);
      if (exp1.size() > LAT1) begin
        void'(exp1.pop_front());
        checks++;
        if (fired1 !== exp1[0]) begin failures++; if (failures < 10) $display("L1 cycle %0d: %h expected %h", c, fired1, exp1[0]); end
        for (int o = 0; o < L1_OUT; o++) ones1[o] += int'(fired1[o]);
      end
      if (exp2.size() > LAT2) begin
        void'(exp2.pop_front());
        checks++;
        if (fired2 !== exp2[0]) begin failures++; if (failures < 10) $display("L2 cycle %0d: %h expected %h", c, fired2, exp2[0]); end
        for (int o = 0; o < L2_OUT; o++) ones2[o] += int'(fired2[o]);
      end
      // density varies so that both sparse and busy patterns occur
      for (int i = 0; i < N_CH; i++) pattern[i] = ($urandom % 100) < ((c / 100) % 3 == 0 ? 8 : 40);
      e1 = '0; e2 = '0;
      for (int o = 0; o < L1_OUT; o++)
        for (int k = 0; k < L1_TERMS; k++) if (term_ok(l1_term(o, k), pattern)) e1[o] = 1'b1;
      for (int o = 0; o < L2_OUT; o++)
        for (int k = 0; k < L2_TERMS; k++) if (term_ok(l2_term(o, k), pattern)) e2[o] = 1'b1;
      exp1.push_back(e1);
      exp2.push_back(e2);
    end
    for (int o = 0; o < L1_OUT; o++) begin
      checks++;
      if (ones1[o] == 0 || ones1[o] > 1490) begin failures++; $display("L1 output %0d never toggles (%0d)", o, ones1[o]); end
    end
    for (int o = 0; o < L2_OUT; o++) begin
      checks++;
      if (ones2[o] == 0 || ones2[o] > 1490) begin failures++; $display("L2 output %0d never toggles (%0d)", o, ones2[o]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
