// salsa_cmn: common mode noise subtraction stage of the SALSA readout DSP.
//
// Coherent noise moves all 64 channels of the chip together. In any one
// sampling period only a few channels carry a real signal, so the median of
// the 64 samples tracks the coherent noise. This stage computes that median
// every clock with the combinatorial sum median finder, protected against
// single-event transients by temporal TMR, and subtracts it, less a
// programmable offset, from every channel:
//   ch_out[j] = adc_samples[j] - median + cmn_offset.
// It holds one central_cmn and N_CH cmn_channel blocks, wired as in the
// paper's drawing of the CMN subtraction. The choice of the CSMF with TTMR as
// the median finder follows the paper's conclusion. The reset synchroniser is
// this design's: it releases reset on a rising edge of clk_f, which the TTMR
// phase counters need. Its flops are reset asynchronously and clocked
// synchronously, as any reset synchroniser is, which a linter may flag.
//
// Timing: a set of samples presented before rising edge k of clk_f is
// registered at edge k and its corrected values appear after edge k + 2; a new
// set is taken every clock (50 MS/s on the chip). clk_2f and clk_3f run at two
// and three times the frequency of clk_f, with rising edges aligned to it.
//
// Interface: clk_f, clk_2f, clk_3f, rst_n (async assert, active low),
// adc_samples[N_CH] (12-bit unsigned), cmn_offset (12-bit unsigned) in;
// ch_out[N_CH] (14-bit signed), and the median and adjustment value for
// observation, out.
module salsa_cmn
  import cmn_pkg::*;
#(
  parameter int unsigned N_CHANNELS = cmn_pkg::N_CH,
  parameter int unsigned RANK       = cmn_pkg::MEDIAN_RANK
) (
  input  logic      clk_f,
  input  logic      clk_2f,
  input  logic      clk_3f,
  input  logic      rst_n,
  input  sample_t   adc_samples [N_CHANNELS],
  input  sample_t   cmn_offset,
  output cmn_word_t ch_out      [N_CHANNELS],
  output sample_t   median,
  output cmn_word_t adjust
);

  logic [1:0] rst_sync;
  logic       rst_n_int;

  always_ff @(posedge clk_f or negedge rst_n) begin
    if (!rst_n) rst_sync <= 2'b00;
    else        rst_sync <= {rst_sync[0], 1'b1};
  end
  assign rst_n_int = rst_sync[1];

  central_cmn #(
    .N_CH  (N_CHANNELS),
    .W     (SAMPLE_W),
    .CMN_W (CMN_W),
    .RANK  (RANK)
  ) u_central (
    .clk_f      (clk_f),
    .clk_2f     (clk_2f),
    .clk_3f     (clk_3f),
    .rst_n      (rst_n_int),
    .samples    (adc_samples),
    .cmn_offset (cmn_offset),
    .median     (median),
    .adjust     (adjust)
  );

  for (genvar j = 0; j < N_CHANNELS; j++) begin : g_ch
    cmn_channel #(
      .W     (SAMPLE_W),
      .CMN_W (CMN_W),
      .DEPTH (CSMF_CYCLES)
    ) u_ch (
      .clk        (clk_f),
      .rst_n      (rst_n_int),
      .sample_in  (adc_samples[j]),
      .adjust     (adjust),
      .sample_out (ch_out[j])
    );
  end

endmodule
