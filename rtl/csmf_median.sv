// csmf_median: Combinatorial Sum Median Finder (CSMF) for N_CH samples.
//
// Every unordered pair of channels (x, y) with x < y gets one magnitude
// comparator, N_CH*(N_CH-1)/2 of them (2016 for 64 channels). The comparator's
// "X >= Y" output is sent to channel x's hamming weight and its "X < Y" output
// to channel y's, so each pair hands exactly one point to one of its two
// channels. Equal samples are thereby ordered by channel index and the 64
// counts are a permutation of 0..63: exactly one channel reaches RANK. Its
// sample is the median and is routed to the output through an AND-OR
// multiplexer (the paper draws tri-state buffers on a shared line).
//
// The structure follows the paper. RANK = 31 follows its text ("the channel
// whose 1's counter has the value of 31"); the paper's drawing compares
// against 32, which would select the other middle sample. With 64 inputs
// RANK = 31 yields the lower of the two middle values, the 32nd smallest.
//
// Interface: samples[N_CH] in, median out. Purely combinational; the paper's
// single-cycle latency is obtained by registering the inputs and capturing the
// output in the next cycle (central_cmn, ttmr_capture).
module csmf_median #(
  parameter int unsigned N_CH = cmn_pkg::N_CH,
  parameter int unsigned W    = cmn_pkg::SAMPLE_W,
  parameter int unsigned RANK = cmn_pkg::MEDIAN_RANK
) (
  input  logic [W-1:0] samples [N_CH],
  output logic [W-1:0] median
);

  localparam int unsigned CNT_W = $clog2(N_CH);

  // x_ge_y[i][j], only for j > i: result of the comparator of pair (i, j)
  logic [N_CH-1:0] x_ge_y [N_CH];
  // wins[i]: the N_CH-1 points that channel i can receive, one per other channel
  logic [N_CH-2:0] wins   [N_CH];
  logic [CNT_W-1:0] count [N_CH];
  logic [N_CH-1:0]  match;

  for (genvar i = 0; i < N_CH; i++) begin : g_row
    for (genvar j = 0; j < N_CH; j++) begin : g_col
      if (j > i) begin : g_cmp
        assign x_ge_y[i][j] = (samples[i] >= samples[j]);
      end else begin : g_none
        assign x_ge_y[i][j] = 1'b0;
      end
    end
  end

  for (genvar i = 0; i < N_CH; i++) begin : g_chan
    for (genvar j = 0; j < N_CH; j++) begin : g_pt
      if (j > i) begin : g_hi
        assign wins[i][j-1] = x_ge_y[i][j];   // i is X of pair (i, j)
      end else if (j < i) begin : g_lo
        assign wins[i][j]   = ~x_ge_y[j][i];  // i is Y of pair (j, i): X < Y
      end
    end

    hamming_weight #(.N(N_CH-1)) u_hw (
      .bits  (wins[i]),
      .count (count[i])
    );

    assign match[i] = (count[i] == CNT_W'(RANK));
  end

  // The index tie-break makes the counts a permutation of 0..N_CH-1, so one
  // and only one channel can match.
  always_comb begin
    assert ($onehot(match)) else $error("csmf_median: %0d channels at rank %0d", $countones(match), RANK);
  end

  always_comb begin
    median = '0;
    for (int unsigned i = 0; i < N_CH; i++) begin
      median = median | ({W{match[i]}} & samples[i]);
    end
  end

endmodule
