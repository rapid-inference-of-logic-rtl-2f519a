// lgn_top_tb: end-to-end test of the LGN anomaly detector at its default size
// (18 x 14 image, 3 thresholds, layers 2048-2048-1024-256, no parameter
// overrides).
//
// A reference model in this file evaluates the whole network for every image
// sent: thermometer code from the definition, each node from its truth-table
// code and its two source bits, the score as the count of ones in the last
// layer. Images are driven on the falling edge and captured on the rising
// edge; every score that comes out is checked against the queue of expected
// scores and against the 3-cycle latency: an image captured at rising edge c
// must show out_valid after edge c+2, so that a consumer samples it at c+3.
//
// Traffic: back-to-back images, gaps (bubbles), images of every kind (empty,
// saturated, sparse "pile-up like", random), and a reset in the middle of
// traffic that must drop the images in flight. Each of these mechanisms is
// counted, and one that never happened counts as a failure; so is every
// input pair at every gate type in the network.
module lgn_top_tb;
  import lgn_pkg::*;
  import lgn_ref_pkg::*;

  localparam int unsigned N_OUT = LAYER_W_DEFAULT[NUM_LAYERS-1];
  localparam int unsigned SW    = $clog2(N_OUT + 1);
  localparam int unsigned N_IMG = 400;

  logic                        clk = 1'b0;
  logic                        rst_n;
  logic                        in_valid;
  logic [N_PIX-1:0][PIX_W-1:0] pix;
  logic                        out_valid;
  logic [SW-1:0]               score;

  lgn_top u_dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .pix(pix),
    .out_valid(out_valid), .score(score)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int unsigned cyc = 0;          // number of rising edges so far
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------------------------------------------------------- reference
  // lgn_ref_pkg::ref_net_score evaluates the network node by node.

  // ---------------------------------------------------------------- scoreboard
  typedef struct { int unsigned exp_score; int unsigned cap_edge; } pend_t;
  pend_t pending[$];

  // mechanism counters
  int n_back_to_back = 0, n_bubble = 0, n_reset_flush = 0;
  int n_empty = 0, n_saturated = 0, n_random = 0, n_sparse = 0;
  int n_scores = 0, n_distinct = 0;
  bit score_seen[int unsigned];
  int n_level[N_THR+1];

  // The output is examined on the falling edge, after the rising edge's
  // updates have settled.
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (pending.size() == 0) begin
        failures++;
        $display("FAIL out_valid with no image in flight at edge %0d", cyc);
      end else begin
        pend_t e;
        e = pending.pop_front();
        if (int'(score) != e.exp_score) begin
          failures++;
          $display("FAIL score %0d expected %0d", score, e.exp_score);
        end
        checks++;
        if (cyc + 1 - e.cap_edge != LATENCY) begin
          failures++;
          $display("FAIL latency %0d cycles, expected %0d", cyc + 1 - e.cap_edge, LATENCY);
        end
        n_scores++;
        if (!score_seen.exists(e.exp_score)) begin
          score_seen[e.exp_score] = 1'b1;
          n_distinct++;
        end
      end
    end
  end

  // ---------------------------------------------------------------- stimulus
  task automatic make_image(input int kind);
    for (int p = 0; p < N_PIX; p++) begin
      case (kind)
        0: pix[p] = '0;
        1: pix[p] = '1;
        2: pix[p] = ($urandom_range(0, 9) == 0) ? PIX_W'($urandom_range(0, 60)) : '0;
        default: pix[p] = PIX_W'($urandom_range(0, 40));
      endcase
      if (pix[p] < 10) n_level[0]++;
      else if (pix[p] < 20) n_level[1]++;
      else if (pix[p] < 30) n_level[2]++;
      else n_level[3]++;
    end
    case (kind)
      0: n_empty++;
      1: n_saturated++;
      2: n_sparse++;
      default: n_random++;
    endcase
  endtask

  // Drive one cycle (call right after a falling edge). When `valid`, the image
  // is captured at the next rising edge, whose number will be cyc + 1.
  task automatic drive(input bit valid, input int kind);
    in_valid = valid;
    if (valid) begin
      make_image(kind);
      pending.push_back('{exp_score: ref_net_score(pix), cap_edge: cyc + 1});
    end else begin
      for (int p = 0; p < N_PIX; p++) pix[p] = PIX_W'($urandom);
    end
    @(negedge clk);
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit prev_valid;
    ref_net_init();

    rst_n = 1'b0;
    in_valid = 1'b0;
    pix = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Fixed opening: empty, saturated, back-to-back, then a bubble.
    drive(1, 0);
    drive(1, 1);
    drive(1, 2);
    drive(0, 0);
    drive(1, 3);
    prev_valid = 1'b1;

    for (int i = 0; i < N_IMG; i++) begin
      bit v;
      v = ($urandom_range(0, 3) != 0);
      if (v && prev_valid) n_back_to_back++;
      if (!v && (pending.size() != 0)) n_bubble++;
      drive(v, (i < 8) ? i % 4 : $urandom_range(0, 3));
      prev_valid = v;
      // Reset in the middle of traffic: whatever is in flight is dropped.
      if (i == N_IMG / 2) begin
        drive(1, 3);
        drive(1, 3);
        rst_n = 1'b0;
        in_valid = 1'b0;
        @(negedge clk);
        checks++;
        if (out_valid) begin failures++; $display("FAIL out_valid during reset"); end
        if (pending.size() != 0) n_reset_flush++;
        pending.delete();
        rst_n = 1'b1;
        repeat (4) begin
          @(negedge clk);
          checks++;
          if (out_valid) begin failures++; $display("FAIL stale score after reset"); end
        end
        prev_valid = 1'b0;
      end
    end
    in_valid = 1'b0;
    repeat (LATENCY + 2) @(negedge clk);

    checks++;
    if (pending.size() != 0) begin
      failures++;
      $display("FAIL %0d images never produced a score", pending.size());
    end

    $display("mechanisms: back_to_back=%0d bubble=%0d reset_flush=%0d", n_back_to_back, n_bubble, n_reset_flush);
    $display("images: empty=%0d saturated=%0d sparse=%0d random=%0d scores=%0d distinct=%0d",
             n_empty, n_saturated, n_sparse, n_random, n_scores, n_distinct);
    $display("thermometer levels: %0d %0d %0d %0d", n_level[0], n_level[1], n_level[2], n_level[3]);
    begin
      int mech[$];
      mech = '{n_back_to_back, n_bubble, n_reset_flush, n_empty, n_saturated, n_sparse,
               n_random, n_level[0], n_level[1], n_level[2], n_level[3]};
      foreach (mech[i]) begin
        checks++;
        if (mech[i] == 0) begin failures++; $display("FAIL mechanism %0d never exercised", i); end
      end
      // Every gate type of the network has seen every input pair.
      for (int g = 0; g < 16; g++)
        for (int c = 0; c < 4; c++) begin
          checks++;
          if (gate_hits[g][c] == 0) begin
            failures++;
            $display("FAIL gate code %0d never saw inputs %02b", g, 2'(c));
          end
        end
      checks++;
      if (n_distinct < 5) begin failures++; $display("FAIL only %0d distinct scores", n_distinct); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
