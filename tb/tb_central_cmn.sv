// tb_central_cmn: self-checking test of the central CMN block.
//
// Full size: 64 channels of 12 bits, base period T = 60 ns with phase
// aligned 2f and 3f clocks. Each cycle a new set of samples (random,
// noise band with ties, pedestal with a few hits) is applied 1 ns after the
// rising edge of clk_f. After the next-but-one edge (sample register, then
// one cycle through the median finder and its TTMR capture) the median must
// equal the sorted reference element 31 and the adjustment must equal
// median - offset. The offset is changed every 50 cycles, the samples every
// cycle.
module tb_central_cmn;

  localparam int unsigned N_CH = 64;
  localparam int unsigned W = 12;
  localparam int unsigned CMN_W = 14;
  localparam int T = 60;
  localparam int NCYC = 400;

  logic clk_f, clk_2f, clk_3f, rst_n;
  logic [W-1:0] samples [N_CH];
  logic [W-1:0] cmn_offset, median;
  logic signed [CMN_W-1:0] adjust;
  int ref_med [NCYC];
  int checks = 0, failures = 0;

  central_cmn dut (
    .clk_f(clk_f), .clk_2f(clk_2f), .clk_3f(clk_3f), .rst_n(rst_n),
    .samples(samples), .cmn_offset(cmn_offset), .median(median), .adjust(adjust)
  );

  initial begin clk_f  = 1'b1; forever #(T/2) clk_f  = ~clk_f;  end
  initial begin clk_2f = 1'b1; forever #(T/4) clk_2f = ~clk_2f; end
  initial begin clk_3f = 1'b1; forever #(T/6) clk_3f = ~clk_3f; end

  initial begin
    #(T * (NCYC + 100));
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

  initial begin
    rst_n = 1'b0;
    cmn_offset = '0;
    foreach (samples[i]) samples[i] = '0;
    repeat (3) @(posedge clk_f);
    rst_n <= 1'b1;
    #1;
    for (int c = 0; c < NCYC; c++) begin
      int v [N_CH];
      int ped;
      if (c >= 2) begin
        checks++;
        if (int'(median) != ref_med[c-2]) begin
          failures++;
          if (failures < 10) $display("FAIL c=%0d median=%0d expected=%0d", c, median, ref_med[c-2]);
        end
        checks++;
        if (int'(adjust) != ref_med[c-2] - int'(cmn_offset)) begin
          failures++;
          if (failures < 10) $display("FAIL c=%0d adjust=%0d expected=%0d", c, adjust, ref_med[c-2] - int'(cmn_offset));
        end
      end
      if (c % 50 == 0) cmn_offset = W'($urandom);
      ped = int'($urandom % 3500);
      for (int i = 0; i < N_CH; i++) begin
        case (c % 3)
          0: v[i] = int'($urandom % 4096);
          1: v[i] = ped + int'($urandom % 5);
          default: v[i] = (($urandom % 10) == 0) ? ped + 500 : ped + int'($urandom % 20);
        endcase
        samples[i] = W'(v[i]);
      end
      ref_med[c] = sorted_at(v, 31);
      @(posedge clk_f);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
