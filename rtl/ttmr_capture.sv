// ttmr_capture: temporal triple modular redundancy (TTMR) on a
// combinational result.
//
// A transient glitch (single-event transient) on the output of a large
// combinational block is harmful only if a flip-flop samples it. TTMR samples
// the same value three times, at three different instants of one base clock
// period, into three flip-flop banks clocked at f, 2f and 3f, and votes. A
// glitch shorter than the gap between two sampling instants can corrupt only
// one copy, which the voter outvotes. Three flip-flop banks, clocks f/2f/3f
// and the voter follow the paper; the choice of edges is this design's.
//
// Timing (T = base period, t = 0 at a rising edge of clk_f, where the
// producer's inputs change; the three clocks are phase aligned at that edge):
//   copy f  : falling edge of clk_f           t = T/2
//   copy 3f : second rising edge of clk_3f    t = 2T/3
//   copy 2f : second falling edge of clk_2f   t = 3T/4
// The voted output q is therefore valid from 3T/4 until the next f copy is
// taken at 3T/2, and a consumer clocked on the next rising edge of clk_f
// (t = T) sees it: one base clock of latency, as in the unprotected design.
// The combinational logic feeding d must settle within T/2. The 2f and 3f
// copies are enabled only on their chosen edge by small phase counters. These
// counters need rst_n to be released on a rising edge of clk_f, or at least
// before the first clk_3f edge after it (salsa_cmn synchronises the reset to
// clk_f); an assertion checks the alignment at every rising edge of clk_f.
// The counters themselves are not triplicated.
//
// Interface: clk_f, clk_2f, clk_3f, async active-low rst_n, d in (W bits),
// q out (W bits, voted).
module ttmr_capture #(
  parameter int unsigned W = cmn_pkg::SAMPLE_W
) (
  input  logic         clk_f,
  input  logic         clk_2f,
  input  logic         clk_3f,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  logic         ph2;       // 2f cycle within the base period: 0 first, 1 second
  logic [1:0]   ph3;       // 3f cycle within the base period: 0, 1, 2
  logic [W-1:0] q_f, q_2f, q_3f;

  always_ff @(posedge clk_2f or negedge rst_n) begin
    if (!rst_n) ph2 <= 1'b0;
    else        ph2 <= ~ph2;
  end

  always_ff @(posedge clk_3f or negedge rst_n) begin
    if (!rst_n)          ph3 <= 2'd0;
    else if (ph3 == 2'd2) ph3 <= 2'd0;
    else                 ph3 <= ph3 + 2'd1;
  end

  // copy f: t = T/2
  always_ff @(negedge clk_f or negedge rst_n) begin
    if (!rst_n) q_f <= '0;
    else        q_f <= d;
  end

  // copy 2f: falling edge inside the second 2f cycle, t = 3T/4
  always_ff @(negedge clk_2f or negedge rst_n) begin
    if (!rst_n)   q_2f <= '0;
    else if (ph2) q_2f <= d;
  end

  // copy 3f: rising edge that ends the second 3f cycle, t = 2T/3
  always_ff @(posedge clk_3f or negedge rst_n) begin
    if (!rst_n)            q_3f <= '0;
    else if (ph3 == 2'd1)  q_3f <= d;
  end

  // Clocking rule: just before every rising edge of clk_f both phase counters
  // must be in their last state, or the copies are taken at the wrong instants
  // (clocks not aligned, or reset released off the clk_f edge).
  a_phase_aligned: assert property (@(posedge clk_f) disable iff (!rst_n)
                                    (ph2 == 1'b1) && (ph3 == 2'd2))
    else $error("ttmr_capture: 2f/3f phase counters out of step with clk_f");

  majority_voter #(.W(W)) u_voter (
    .a (q_f),
    .b (q_2f),
    .c (q_3f),
    .y (q)
  );

endmodule
