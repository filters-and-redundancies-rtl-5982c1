// central_cmn: the shared half of the common mode noise subtraction.
//
// Collects one sample from every channel, finds their median with the CSMF
// (csmf_median), protects the median with temporal TMR (ttmr_capture) and adds
// the two's complement of the programmable CMN offset in a 14-bit adder. The
// result, median - offset, is the adjustment value broadcast to every CMN
// channel, which subtracts it from its own delayed sample. This arrangement
// (median finder, two's complement of the offset, 14-bit adder, broadcast)
// follows the paper's drawing; the sample register in front of the median
// finder, the 12-bit unsigned offset and the reset values are this design's.
//
// Timing: samples are registered on the rising edge of clk_f at t = 0; the
// median of that set and the adjustment derived from it are valid for a
// consumer clocked on the next rising edge of clk_f (one cycle, the CSMF's
// latency). The 2f and 3f clocks must be phase aligned with clk_f and rst_n
// released in step with its rising edge (see ttmr_capture).
//
// Interface: clocks, async active-low rst_n, samples[N_CH] and cmn_offset in;
// median (voted, W bits) and adjust (signed CMN_W bits) out.
module central_cmn #(
  parameter int unsigned N_CH  = cmn_pkg::N_CH,
  parameter int unsigned W     = cmn_pkg::SAMPLE_W,
  parameter int unsigned CMN_W = cmn_pkg::CMN_W,
  parameter int unsigned RANK  = cmn_pkg::MEDIAN_RANK
) (
  input  logic                    clk_f,
  input  logic                    clk_2f,
  input  logic                    clk_3f,
  input  logic                    rst_n,
  input  logic [W-1:0]            samples [N_CH],
  input  logic [W-1:0]            cmn_offset,
  output logic [W-1:0]            median,
  output logic signed [CMN_W-1:0] adjust
);

  logic [W-1:0]     samples_q [N_CH];
  logic [W-1:0]     median_comb;
  logic [CMN_W-1:0] offset_neg;

  always_ff @(posedge clk_f or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N_CH; i++) samples_q[i] <= '0;
    end else begin
      samples_q <= samples;
    end
  end

  csmf_median #(.N_CH(N_CH), .W(W), .RANK(RANK)) u_csmf (
    .samples (samples_q),
    .median  (median_comb)
  );

  ttmr_capture #(.W(W)) u_ttmr (
    .clk_f  (clk_f),
    .clk_2f (clk_2f),
    .clk_3f (clk_3f),
    .rst_n  (rst_n),
    .d      (median_comb),
    .q      (median)
  );

  // two's complement of the offset, then the 14-bit adder
  always_comb begin
    offset_neg = ~CMN_W'(cmn_offset) + CMN_W'(1);
    adjust     = signed'(CMN_W'(median) + offset_neg);
  end

endmodule
