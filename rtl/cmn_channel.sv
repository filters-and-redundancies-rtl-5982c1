// cmn_channel: the per-channel half of the common mode noise subtraction.
//
// The channel's raw sample goes through a DEPTH-stage delay line so that it
// reaches the 14-bit adder together with the adjustment value the central CMN
// computed from the same sampling instant, and the adjustment is subtracted:
//   sample_out = sample - (median - offset) = sample - median + offset.
// The delay line and the 14-bit adder follow the paper. The paper leaves the
// depth as "N"; here it equals the central CMN's latency, one cycle with the
// CSMF. The paper says the median is subtracted from all channels while its
// drawing labels the channel's arithmetic an adder; the adder is used as a
// subtractor (sample plus the two's complement of the adjustment). The output
// register and the reset values are this design's.
//
// Timing: a sample presented before rising edge k of clk enters the delay
// line at edge k; its corrected value is registered at edge k + DEPTH, when
// adjust must hold the value derived from the same sampling instant.
//
// Interface: clk, async active-low rst_n, sample_in (W bits, unsigned),
// adjust (signed CMN_W bits) in; sample_out (signed CMN_W bits) out.
module cmn_channel #(
  parameter int unsigned W     = cmn_pkg::SAMPLE_W,
  parameter int unsigned CMN_W = cmn_pkg::CMN_W,
  parameter int unsigned DEPTH = cmn_pkg::CSMF_CYCLES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [W-1:0]            sample_in,
  input  logic signed [CMN_W-1:0] adjust,
  output logic signed [CMN_W-1:0] sample_out
);

  logic [W-1:0] pipe [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < DEPTH; i++) pipe[i] <= '0;
      sample_out <= '0;
    end else begin
      pipe[0] <= sample_in;
      for (int unsigned i = 1; i < DEPTH; i++) pipe[i] <= pipe[i-1];
      sample_out <= signed'(CMN_W'(pipe[DEPTH-1]) + ~adjust + CMN_W'(1));
    end
  end

endmodule
