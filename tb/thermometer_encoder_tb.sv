// thermometer_encoder_tb: the encoder at its default size (252 pixels,
// thresholds {10, 20, 30}). Checks the two worked examples (15 -> 100,
// 25 -> 110), the threshold edges (x equal to a threshold sets its bit),
// zero and full scale, then random images against lgn_ref_pkg::ref_thermo.
module thermometer_encoder_tb;
  import lgn_pkg::*;
  import lgn_ref_pkg::*;

  logic [N_PIX-1:0][PIX_W-1:0] pix;
  logic [N_PIX*N_THR-1:0]      code;
  int checks = 0, failures = 0;
  int unsigned thr[$] = '{10, 20, 30};

  thermometer_encoder u_dut (.pix(pix), .code(code));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    #1;
    for (int p = 0; p < N_PIX; p++) begin
      logic [N_THR-1:0] exp_c;
      exp_c = N_THR'(ref_thermo(int'(pix[p]), thr));
      checks++;
      if (code[p*N_THR +: N_THR] !== exp_c) begin
        failures++;
        if (failures < 10)
          $display("FAIL pixel %0d value %0d: got %b expected %b", p, pix[p], code[p*N_THR +: N_THR], exp_c);
      end
    end
  endtask

  initial begin
    // Paper's examples on every pixel.
    for (int p = 0; p < N_PIX; p++) pix[p] = PIX_W'(15);
    #1;
    checks++; if (code[3*N_THR +: N_THR] !== 3'b100) begin failures++; $display("FAIL 15 -> %b", code[2:0]); end
    for (int p = 0; p < N_PIX; p++) pix[p] = PIX_W'(25);
    #1;
    checks++; if (code[7*N_THR +: N_THR] !== 3'b110) begin failures++; $display("FAIL 25 -> %b", code[2:0]); end
    // Edges: each pixel gets a value around a threshold.
    begin
      int unsigned edges[$] = '{0, 9, 10, 11, 19, 20, 21, 29, 30, 31, 1023};
      for (int p = 0; p < N_PIX; p++) pix[p] = PIX_W'(edges[p % edges.size()]);
      check_all();
    end
    // Random images, mostly small values like a calorimeter.
    for (int it = 0; it < 50; it++) begin
      for (int p = 0; p < N_PIX; p++)
        pix[p] = (it % 2 == 0) ? PIX_W'($urandom_range(0, 40)) : PIX_W'($urandom);
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
