// group_sum_tb: the 256-bit score counter. All zeros, all ones, single bits
// and random vectors of varied density, each compared with $countones.
module group_sum_tb;
  localparam int unsigned N  = 256;
  localparam int unsigned SW = $clog2(N + 1);

  logic [N-1:0]  bits;
  logic [SW-1:0] score;
  int checks = 0, failures = 0;

  group_sum #(.N(N)) u_dut (.bits(bits), .score(score));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    #1;
    checks++;
    if (int'(score) != $countones(bits)) begin
      failures++;
      if (failures < 10) $display("FAIL got %0d expected %0d", score, $countones(bits));
    end
  endtask

  initial begin
    bits = '0;  check();
    bits = '1;  check();
    for (int i = 0; i < N; i++) begin bits = '0; bits[i] = 1'b1; check(); end
    for (int it = 0; it < 500; it++) begin
      int unsigned dens;
      dens = $urandom_range(0, 100);
      for (int i = 0; i < N; i++) bits[i] = ($urandom_range(0, 99) < dens);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
