// tb_cmn_channel: self-checking test of one CMN channel.
//
// Two channels run side by side: one with the default delay (one stage) and
// one with a ten-stage delay line. Every clock each gets a random 12-bit
// sample and a random signed adjustment in [-4095, 4095]. A sample driven in
// cycle c must leave, after edge c + DEPTH + 1, as itself minus the
// adjustment driven in cycle c + DEPTH; both outputs are checked every cycle
// against that reference, which also checks the latency.
module tb_cmn_channel;

  localparam int unsigned W = 12;
  localparam int unsigned CMN_W = 14;
  localparam int NCYC = 500;

  logic clk, rst_n;
  logic [W-1:0] s_in;
  logic signed [CMN_W-1:0] adj;
  logic signed [CMN_W-1:0] out1, out10;
  int s_hist [NCYC];
  int a_hist [NCYC];
  int checks = 0, failures = 0;

  cmn_channel dut1 (.clk(clk), .rst_n(rst_n), .sample_in(s_in), .adjust(adj), .sample_out(out1));
  cmn_channel #(.DEPTH(10)) dut10 (.clk(clk), .rst_n(rst_n), .sample_in(s_in), .adjust(adj), .sample_out(out10));

  initial begin clk = 1'b0; forever #5 clk = ~clk; end

  initial begin
    #(10 * (NCYC + 100));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_out(string name, logic signed [CMN_W-1:0] got, int expect_v);
    checks++;
    if (int'(got) != expect_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%0d expected=%0d", name, got, expect_v);
    end
  endtask

  initial begin
    rst_n = 1'b0;
    s_in  = '0;
    adj   = '0;
    repeat (2) @(posedge clk);
    #1;
    check_out("reset", out1, 0);
    rst_n = 1'b1;
    for (int c = 0; c < NCYC; c++) begin
      // outputs of the edge that just passed
      if (c >= 2)  check_out("depth1",  out1,  s_hist[c-2]  - a_hist[c-1]);
      if (c >= 11) check_out("depth10", out10, s_hist[c-11] - a_hist[c-1]);
      s_hist[c] = int'($urandom % 4096);
      a_hist[c] = int'($urandom % 8191) - 4095;
      s_in = W'(s_hist[c]);
      adj  = CMN_W'(a_hist[c]);
      @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
