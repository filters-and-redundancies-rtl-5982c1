// tb_csmf_median: self-checking test of the combinatorial sum median finder.
//
// Drives the 64-channel, 12-bit finder with sets of samples of several
// kinds: uniform random, a narrow noise band (many equal values), all equal,
// a few large hits over a common pedestal, and sorted / reverse-sorted sets.
// The reference sorts a copy of the set and takes element RANK (31) counted
// from the smallest, which is the sample with exactly 31 others ranked below
// it whatever order equal values are given.
module tb_csmf_median;

  localparam int unsigned N_CH = 64;
  localparam int unsigned W    = 12;
  localparam int unsigned RANK = 31;

  logic [W-1:0] samples [N_CH];
  logic [W-1:0] median;
  int checks = 0, failures = 0;

  csmf_median #(.N_CH(N_CH), .W(W), .RANK(RANK)) dut (.samples(samples), .median(median));

  function automatic logic [W-1:0] ref_median(logic [W-1:0] s [N_CH]);
    int v [N_CH];
    for (int i = 0; i < N_CH; i++) v[i] = int'(s[i]);
    // insertion sort, ascending
    for (int i = 1; i < N_CH; i++) begin
      int key = v[i];
      int j = i - 1;
      while (j >= 0 && v[j] > key) begin
        v[j+1] = v[j];
        j--;
      end
      v[j+1] = key;
    end
    return W'(v[RANK]);
  endfunction

  task automatic check();
    logic [W-1:0] expect_m;
    #1;
    expect_m = ref_median(samples);
    checks++;
    if (median !== expect_m) begin
      failures++;
      if (failures < 10) $display("FAIL median=%0d expected=%0d", median, expect_m);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 300; k++) begin
      int kind, ped;
      kind = k % 6;
      ped  = int'($urandom % 3000);
      for (int i = 0; i < N_CH; i++) begin
        case (kind)
          0: samples[i] = W'($urandom);
          1: samples[i] = W'(ped + int'($urandom % 4));            // many ties
          2: samples[i] = W'(ped);                                  // all equal
          3: samples[i] = (($urandom % 8) == 0) ? W'(ped + 900 + int'($urandom % 100))
                                                : W'(ped + int'($urandom % 16));
          4: samples[i] = W'(i * 64);                               // ascending
          default: samples[i] = W'((N_CH - 1 - i) * 64 + int'($urandom % 2));
        endcase
      end
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
