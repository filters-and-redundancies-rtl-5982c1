// tb_ttmr_capture: self-checking test of the temporal TMR capture stage.
//
// Base period T = 60 ns with clk_2f and clk_3f phase aligned to clk_f. A new
// random word is applied 1 ns after each rising edge of clk_f; the voted
// output is checked 1 ns after the following rising edge (one base cycle of
// latency). On most cycles a glitch (an XOR mask standing for a single-event
// transient) is laid over the input around one or two of the sampling
// instants T/2, 2T/3 and 3T/4, or around T/3 where nothing samples:
//   glitch over one instant      -> output must be the clean word
//   glitch over two instants     -> output must be the glitched word
// Each single-instant case must be seen masked at least once.
module tb_ttmr_capture;

  localparam int unsigned W = 12;
  localparam int T = 60;

  logic clk_f, clk_2f, clk_3f, rst_n;
  logic [W-1:0] d_base, glitch, d, q;
  int checks = 0, failures = 0;
  int masked [4];   // 0: T/2 (f copy), 1: 2T/3 (3f copy), 2: 3T/4 (2f copy), 3: T/3 (none)
  int outvoted = 0;

  assign d = d_base ^ glitch;

  ttmr_capture #(.W(W)) dut (
    .clk_f(clk_f), .clk_2f(clk_2f), .clk_3f(clk_3f), .rst_n(rst_n), .d(d), .q(q)
  );

  initial begin clk_f  = 1'b1; forever #(T/2) clk_f  = ~clk_f;  end
  initial begin clk_2f = 1'b1; forever #(T/4) clk_2f = ~clk_2f; end
  initial begin clk_3f = 1'b1; forever #(T/6) clk_3f = ~clk_3f; end

  initial begin
    #(T * 5000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // glitch window [from, to) in ns after the rising edge of clk_f
  task automatic glitch_at(int from, int to, logic [W-1:0] mask);
    fork
      begin
        #(from - 1) glitch = mask;
        #(to - from) glitch = '0;
      end
    join_none
  endtask

  logic [W-1:0] expect_q;
  int scenario, prev_scenario;

  initial begin
    rst_n  = 1'b0;
    d_base = '0;
    glitch = '0;
    foreach (masked[i]) masked[i] = 0;
    repeat (3) @(posedge clk_f);
    rst_n <= 1'b1;
    #1;
    checks++;
    if (q !== '0) begin failures++; $display("FAIL q not cleared by reset"); end
    prev_scenario = -1;
    for (int k = 0; k < 600; k++) begin
      logic [W-1:0] mask;
      // new input word and scenario for this base period
      d_base   = W'($urandom);
      mask     = W'($urandom) | W'(1);
      scenario = (k < 12) ? (k % 6) : int'($urandom % 7);
      case (scenario)
        0: expect_q = d_base;                                         // no glitch
        1: begin glitch_at(T/2 - 3, T/2 + 3, mask);  expect_q = d_base; end
        2: begin glitch_at(2*T/3 - 3, 2*T/3 + 3, mask); expect_q = d_base; end
        3: begin glitch_at(3*T/4 - 3, 3*T/4 + 3, mask); expect_q = d_base; end
        4: begin glitch_at(T/3 - 3, T/3 + 3, mask);  expect_q = d_base; end
        5: begin glitch_at(T/2 - 3, 2*T/3 + 3, mask); expect_q = d_base ^ mask; end
        default: begin glitch_at(2*T/3 - 3, 3*T/4 + 3, mask); expect_q = d_base ^ mask; end
      endcase
      @(posedge clk_f);
      #1;
      checks++;
      if (q !== expect_q) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d scenario=%0d q=%h expected=%h", k, scenario, q, expect_q);
      end else begin
        if (scenario >= 1 && scenario <= 4) masked[scenario-1]++;
        if (scenario >= 5) outvoted++;
      end
    end
    foreach (masked[i]) begin
      checks++;
      if (masked[i] == 0) begin failures++; $display("FAIL glitch case %0d never masked", i); end
    end
    checks++;
    if (outvoted == 0) begin failures++; $display("FAIL double glitch never seen"); end
    $display("masked glitches: T/2=%0d 2T/3=%0d 3T/4=%0d T/3=%0d, double=%0d",
             masked[0], masked[1], masked[2], masked[3], outvoted);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
