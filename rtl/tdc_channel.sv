// tdc_channel: one channel of the multi-phase sampling TDC (1 ns bins from a
// 250 MHz clock).
//
// The input is sampled by four registers clocked on c0, c90, c180 = ~c0 and
// c270 = ~c90, so that together they take one sample per nanosecond.  A
// clock-domain-changing stage moves the samples towards c0: the c0, c90 and
// c180 samples are re-registered on c0 (QF, QE, QD), the c270 sample on c90,
// which leaves 2 ns instead of 1 ns for that transfer.  A further c0 stage
// gives Q3..Q0.  After a c0 edge the seven bits Q3,Q2,Q1,Q0,QF,QE,QD are
// seven consecutive samples, oldest first.  A registered look-up table
// (transition detection and encode) looks for a rising transition between
// sample j and j+1 (j = 0..3, i.e. from Q3/Q2 to Q0/QF) that is followed by
// three samples at 1, and reports the first such j as the fine time T1,T0
// with DV.  Pulses shorter than 3 ns (ringing) are therefore not digitized,
// and each transition falls in exactly one cycle's window.
//
// The register structure, clock phases and QD..Q3 naming follow the paper's
// Fig. 6.  The exact look-up-table contents (the 0-then-111 rule) are this
// design's choice: the paper only says the table decides whether a sample is
// at the edge of a well-established pulse.
//
// Timing: dv/t are valid for one c0 cycle, 4 c0 edges after the edge that
// took the first high sample.  din is asynchronous.
module tdc_channel (
  input  logic       c0,
  input  logic       c90,
  input  logic       din,
  output logic       dv,
  output logic [1:0] t
);
  // multiple sampling
  logic s0, s90, s180, s270;
  always_ff @(posedge c0)  s0   <= din;
  always_ff @(posedge c90) s90  <= din;
  always_ff @(negedge c0)  s180 <= din;   // c180
  always_ff @(negedge c90) s270 <= din;   // c270

  // clock domain changing
  logic qf, qe, qd, r3;
  always_ff @(posedge c0) begin
    qf <= s0;
    qe <= s90;
    qd <= s180;
  end
  always_ff @(posedge c90) r3 <= s270;

  // c0 stage
  logic q3, q2, q1, q0;
  always_ff @(posedge c0) begin
    q3 <= qf;
    q2 <= qe;
    q1 <= qd;
    q0 <= r3;
  end

  // transition detection and encode
  logic [6:0] w;       // w[0] oldest sample
  assign w = {qd, qe, qf, q0, q1, q2, q3};

  logic       dv_n;
  logic [1:0] t_n;
  always_comb begin
    dv_n = 1'b0;
    t_n  = 2'd0;
    for (int j = 3; j >= 0; j--) begin
      if (!w[j] && w[j+1] && w[j+2] && w[j+3]) begin
        dv_n = 1'b1;
        t_n  = 2'(j);
      end
    end
  end

  always_ff @(posedge c0) begin
    dv <= dv_n;
    t  <= t_n;
  end
endmodule
