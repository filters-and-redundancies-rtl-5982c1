// tb_majority_voter: self-checking test of the 2-of-3 voter.
//
// Exhaustive over all 3-bit input combinations on every bit lane (random
// words), plus single-copy corruption: two equal copies and a third random
// one must always yield the common copy.
module tb_majority_voter;

  localparam int unsigned W = 12;

  logic [W-1:0] a, b, c, y;
  int checks = 0, failures = 0;

  majority_voter #(.W(W)) dut (.a(a), .b(b), .c(c), .y(y));

  function automatic logic [W-1:0] ref_vote(logic [W-1:0] x0, x1, x2);
    logic [W-1:0] r;
    for (int i = 0; i < W; i++) r[i] = (int'(x0[i]) + int'(x1[i]) + int'(x2[i])) >= 2;
    return r;
  endfunction

  task automatic check(logic [W-1:0] x0, x1, x2, logic [W-1:0] expect_y);
    a = x0; b = x1; c = x2;
    #1;
    checks++;
    if (y !== expect_y) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h c=%h y=%h expected=%h", x0, x1, x2, y, expect_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 8; k++) check({W{k[0]}}, {W{k[1]}}, {W{k[2]}}, ref_vote({W{k[0]}}, {W{k[1]}}, {W{k[2]}}));
    for (int k = 0; k < 1000; k++) begin
      logic [W-1:0] x0, x1, x2;
      x0 = W'($urandom); x1 = W'($urandom); x2 = W'($urandom);
      check(x0, x1, x2, ref_vote(x0, x1, x2));
      // one corrupted copy in each position
      check(x0, x0, x1, x0);
      check(x0, x1, x0, x0);
      check(x1, x0, x0, x0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
