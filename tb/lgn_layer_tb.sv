// lgn_layer_tb: a 64-in, 48-out layer (layer index 1). For random inputs,
// each node's output is recomputed from the node's two source bits and gate
// code (lgn_pkg's configuration functions) with the truth-table reference
// gate, and compared with the layer output.
module lgn_layer_tb;
  import lgn_pkg::*;
  import lgn_ref_pkg::*;

  localparam int unsigned IN_W  = 64;
  localparam int unsigned OUT_W = 48;
  localparam int unsigned LAYER = 1;

  logic [IN_W-1:0]  x;
  logic [OUT_W-1:0] y;
  int checks = 0, failures = 0;

  lgn_layer #(.LAYER(LAYER), .IN_W(IN_W), .OUT_W(OUT_W)) u_dut (.x(x), .y(y));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit seen[IN_W];
    for (int it = 0; it < 200; it++) begin
      x = {$urandom, $urandom};
      #1;
      for (int n = 0; n < OUT_W; n++) begin
        int unsigned sa, sb;
        logic exp_y;
        sa = node_src(LAYER, n, 0, IN_W);
        sb = node_src(LAYER, n, 1, IN_W);
        exp_y = ref_gate(4'(node_gate(LAYER, n)), x[sa], x[sb]);
        checks++;
        if (y[n] !== exp_y) begin
          failures++;
          if (failures < 10) $display("FAIL node %0d: got %0b expected %0b", n, y[n], exp_y);
        end
      end
    end
    // Every input bit is read by some node when 2*OUT_W >= IN_W.
    for (int n = 0; n < OUT_W; n++) begin
      seen[node_src(LAYER, n, 0, IN_W)] = 1'b1;
      seen[node_src(LAYER, n, 1, IN_W)] = 1'b1;
    end
    for (int i = 0; i < IN_W; i++) begin
      checks++;
      if (!seen[i]) begin failures++; $display("FAIL input %0d unread", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
