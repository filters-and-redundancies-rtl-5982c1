// tb_hamming_weight: self-checking test of the population counter.
//
// Applies the all-zero and all-one vectors, every single-one vector and
// 2000 random vectors of densities from sparse to dense to a 63-bit counter,
// and compares the count with a bit-by-bit reference loop.
module tb_hamming_weight;

  localparam int unsigned N = 63;

  logic [N-1:0]           bits;
  logic [$clog2(N+1)-1:0] count;
  int checks = 0, failures = 0;

  hamming_weight #(.N(N)) dut (.bits(bits), .count(count));

  function automatic int ref_count(logic [N-1:0] v);
    int c = 0;
    for (int i = 0; i < N; i++) if (v[i]) c++;
    return c;
  endfunction

  task automatic check(logic [N-1:0] v);
    bits = v;
    #1;
    checks++;
    if (int'(count) != ref_count(v)) begin
      failures++;
      if (failures < 10) $display("FAIL bits=%h count=%0d expected=%0d", v, count, ref_count(v));
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
    check('0);
    check('1);
    for (int i = 0; i < N; i++) check(N'(1) << i);
    for (int k = 0; k < 2000; k++) begin
      logic [N-1:0] v;
      int density;
      density = k % 8;
      for (int i = 0; i < N; i++) v[i] = (($urandom % 8) < density);
      check(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
