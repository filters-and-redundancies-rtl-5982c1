// cmn_pkg: sizes and word types shared by the common mode noise (CMN)
// subtraction blocks.
//
// The SALSA readout chip digitises 64 detector channels with 12-bit ADCs at
// 50 MS/s. Once per sampling clock the CMN stage finds the median of the 64
// samples (the coherent noise estimate), shifts it by a programmable offset
// and subtracts the result from every channel. Channel count, sample width,
// the 14-bit adders and the median rank (a hamming weight of 31, i.e. 31 other
// channels below the chosen one) follow the paper. The offset width is this
// design's choice: 12 bits, so that median minus offset and sample minus
// adjustment both fit the 14-bit signed words the paper's adders carry.
package cmn_pkg;

  localparam int unsigned N_CH        = 64;  // channels per chip
  localparam int unsigned SAMPLE_W    = 12;  // ADC resolution
  localparam int unsigned CMN_W       = 14;  // width of the CMN adders
  localparam int unsigned MEDIAN_RANK = 31;  // hamming weight that marks the median
  localparam int unsigned CSMF_CYCLES = 1;   // latency of the CSMF median finder

  typedef logic        [SAMPLE_W-1:0] sample_t;   // raw ADC sample
  typedef logic signed [CMN_W-1:0]    cmn_word_t; // adjustment / corrected sample

endpackage
