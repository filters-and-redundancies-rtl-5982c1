// tb_salsa_cmn: end-to-end test of the CMN subtraction stage at its
// default size (64 channels, 12-bit samples, CSMF with temporal TMR).
//
// Stimulus, one set of 64 samples per base period (T = 60 ns, clk_2f and
// clk_3f phase aligned):
//   - detector-like sets: a per-channel pedestal, a coherent noise term
//     shared by all channels (a bounded random walk), small independent
//     noise and, now and then, a signal pulse on a few neighbouring channels;
//   - flat sets where most channels hold the same value (ties at the median);
//   - uniform random sets.
// Every output of every cycle is compared with sample - median + offset, the
// median being element 31 of the sorted set, two cycles after the set was
// applied (the stage's latency). The offset changes every 100 cycles; it is
// a static setting that reaches the outputs combinationally, so the expected
// value uses the offset present at the output register's clock edge.
//
// Mechanisms that must each occur at least once (counted, and a failure if
// never seen): coherent noise removed from hit-free channels, ties at the
// median, negative corrected samples, a nonzero offset, single-event
// transients on the median finder's output masked by the temporal TMR (a
// forced glitch around one of the three sampling instants), a glitch over two
// instants that the vote cannot mask (the stage must then show the glitched
// median, proving the instants), and a reset in mid-run.
module tb_salsa_cmn;

  import cmn_pkg::*;

  localparam int T = 60;
  localparam int NCYC = 1200;

  logic clk_f, clk_2f, clk_3f, rst_n;
  sample_t   adc_samples [N_CH];
  sample_t   cmn_offset, median;
  cmn_word_t ch_out [N_CH];
  cmn_word_t adjust;

  int checks = 0, failures = 0;
  int hist_v   [NCYC][N_CH];
  int hist_med [NCYC];
  int hist_off [NCYC];
  int hist_glitch [NCYC];   // 0 none, 1..3 one instant, 4 two instants
  int hist_mask [NCYC];
  bit hist_quiet0 [NCYC];   // detector-like set, no hit on channel 0, large coherent term
  logic hist_valid [NCYC];
  int n_cycles_checked = 0, n_ties = 0, n_negative = 0, n_offset = 0;
  int n_set_masked = 0, n_set_double = 0, n_reset = 0, n_cmn_removed = 0;

  salsa_cmn dut (
    .clk_f(clk_f), .clk_2f(clk_2f), .clk_3f(clk_3f), .rst_n(rst_n),
    .adc_samples(adc_samples), .cmn_offset(cmn_offset),
    .ch_out(ch_out), .median(median), .adjust(adjust)
  );

  initial begin clk_f  = 1'b1; forever #(T/2) clk_f  = ~clk_f;  end
  initial begin clk_2f = 1'b1; forever #(T/4) clk_2f = ~clk_2f; end
  initial begin clk_3f = 1'b1; forever #(T/6) clk_3f = ~clk_3f; end

  initial begin
    #(T * (NCYC + 200));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sorted_at(int v [N_CH], int rank);
    for (int i = 1; i < N_CH; i++) begin
      int key = v[i];
      int j = i - 1;
      while (j >= 0 && v[j] > key) begin
        v[j+1] = v[j];
        j--;
      end
      v[j+1] = key;
    end
    return v[rank];
  endfunction

  // Glitch on the median finder's combinational output during [from, to)
  // ns after the rising edge of clk_f that registered the samples.
  sample_t glitch_value;

  task automatic inject(int from, int to, int mask);
    fork
      begin
        #(from - 1);
        glitch_value = dut.u_central.median_comb ^ SAMPLE_W'(mask);
        force dut.u_central.median_comb = glitch_value;
        #(to - from);
        release dut.u_central.median_comb;
      end
    join_none
  endtask

  int pedestal [N_CH];
  int ped_median;
  int cmn_walk = 0;

  initial begin
    rst_n = 1'b0;
    cmn_offset = '0;
    foreach (adc_samples[i]) adc_samples[i] = '0;
    foreach (pedestal[i]) pedestal[i] = 900 + int'($urandom % 200);
    ped_median = sorted_at(pedestal, MEDIAN_RANK);
    foreach (hist_valid[i]) hist_valid[i] = 1'b0;
    repeat (3) @(posedge clk_f);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk_f);   // reset synchroniser
    #1;
    for (int c = 0; c < NCYC; c++) begin
      int v [N_CH];
      int kind;

      // ---- check the outputs for the set applied two cycles ago
      if (c >= 2 && hist_valid[c-2]) begin
        int m, expect_m;
        bit all_ok;
        m = hist_med[c-2];
        expect_m = m;
        all_ok = 1'b1;
        if (hist_glitch[c-2] == 4) expect_m = m ^ hist_mask[c-2];
        checks++;
        if (int'(median) != expect_m) begin
          failures++; all_ok = 1'b0;
          if (failures < 10) $display("FAIL c=%0d median=%0d expected=%0d", c, median, expect_m);
        end
        for (int j = 0; j < N_CH; j++) begin
          int e;
          e = hist_v[c-2][j] - expect_m + hist_off[c-1];
          checks++;
          if (int'(ch_out[j]) != e) begin
            failures++; all_ok = 1'b0;
            if (failures < 10) $display("FAIL c=%0d ch=%0d out=%0d expected=%0d", c, j, ch_out[j], e);
          end
          if (e < 0) n_negative++;
        end
        n_cycles_checked++;
        if (hist_off[c-1] != 0) n_offset++;
        // coherent noise removal seen on the stage's output: channel 0 must sit
        // near its pedestal relative to the median pedestal, whatever the
        // coherent term was
        if (hist_quiet0[c-2]) begin
          int resid;
          resid = int'(ch_out[0]) - (pedestal[0] - ped_median + hist_off[c-1]);
          if (resid >= -20 && resid <= 20) n_cmn_removed++;
        end
        if (all_ok && hist_glitch[c-2] >= 1 && hist_glitch[c-2] <= 3) n_set_masked++;
        if (all_ok && hist_glitch[c-2] == 4) n_set_double++;
      end

      // ---- mid-run reset
      if (c == NCYC / 2) begin
        @(negedge clk_f);
        rst_n = 1'b0;
        #2;
        checks++;
        if (ch_out[0] != '0 || median != '0) begin
          failures++; $display("FAIL outputs not cleared by reset");
        end else n_reset++;
        @(posedge clk_f);
        rst_n <= 1'b1;
        repeat (2) @(posedge clk_f);
        #1;
        for (int k = c - 2; k < c; k++) begin
          hist_valid[k]  = 1'b0;
          hist_quiet0[k] = 1'b0;
        end
      end

      // ---- new sample set
      if (c % 100 == 0) cmn_offset = (c == 0) ? '0 : SAMPLE_W'(int'($urandom % 1024));
      kind = (c % 10 == 7) ? 1 : (c % 10 == 9) ? 2 : 0;
      cmn_walk += int'($urandom % 41) - 20;
      if (cmn_walk > 600) cmn_walk = 600;
      if (cmn_walk < -600) cmn_walk = -600;
      for (int j = 0; j < N_CH; j++) begin
        case (kind)
          0: v[j] = pedestal[j] + cmn_walk + int'($urandom % 7) - 3;
          1: v[j] = 2000 + (($urandom % 4 == 0) ? int'($urandom % 3) : 0);
          default: v[j] = int'($urandom % 4096);
        endcase
      end
      if (kind == 0 && (c % 3 == 0)) begin
        int first;
        first = int'($urandom % (N_CH - 4));
        for (int j = first; j < first + 4; j++) v[j] += 1500 + int'($urandom % 500);
      end
      for (int j = 0; j < N_CH; j++) begin
        if (v[j] < 0) v[j] = 0;
        if (v[j] > 4095) v[j] = 4095;
        adc_samples[j] = SAMPLE_W'(v[j]);
        hist_v[c][j] = v[j];
      end
      hist_med[c] = sorted_at(v, MEDIAN_RANK);
      hist_off[c] = int'(cmn_offset);
      hist_valid[c] = 1'b1;
      begin
        int eq;
        eq = 0;
        for (int j = 0; j < N_CH; j++) if (v[j] == hist_med[c]) eq++;
        if (eq > 1) n_ties++;
      end
      hist_quiet0[c] = (kind == 0) && (v[0] < pedestal[0] + cmn_walk + 100)
                       && (cmn_walk > 100 || cmn_walk < -100);

      // ---- glitch on the median finder output while this set is evaluated
      hist_mask[c] = int'($urandom % 4095) + 1;
      case ((c % 8 == 3) ? int'($urandom % 4) + 1 : 0)
        1: begin hist_glitch[c] = 1; end
        2: begin hist_glitch[c] = 2; end
        3: begin hist_glitch[c] = 3; end
        4: begin hist_glitch[c] = 4; end
        default: hist_glitch[c] = 0;
      endcase

      @(posedge clk_f);   // this edge registers the set
      case (hist_glitch[c])
        1: inject(T/2 - 3, T/2 + 3, hist_mask[c]);
        2: inject(2*T/3 - 3, 2*T/3 + 3, hist_mask[c]);
        3: inject(3*T/4 - 3, 3*T/4 + 3, hist_mask[c]);
        4: inject(T/2 - 3, 2*T/3 + 3, hist_mask[c]);
        default: ;
      endcase
      #1;
    end

    $display("cycles checked %0d, ties %0d, negative outputs %0d, nonzero offset %0d",
             n_cycles_checked, n_ties, n_negative, n_offset);
    $display("coherent noise removed %0d, SET masked %0d, double SET shown %0d, resets %0d",
             n_cmn_removed, n_set_masked, n_set_double, n_reset);
    checks++; if (n_ties == 0)        begin failures++; $display("FAIL no ties"); end
    checks++; if (n_negative == 0)    begin failures++; $display("FAIL no negative outputs"); end
    checks++; if (n_offset == 0)      begin failures++; $display("FAIL no offset"); end
    checks++; if (n_cmn_removed == 0) begin failures++; $display("FAIL no coherent noise case"); end
    checks++; if (n_set_masked == 0)  begin failures++; $display("FAIL no SET masked"); end
    checks++; if (n_set_double == 0)  begin failures++; $display("FAIL no double SET"); end
    checks++; if (n_reset == 0)       begin failures++; $display("FAIL no reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
