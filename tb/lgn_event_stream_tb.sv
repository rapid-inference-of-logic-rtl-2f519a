// lgn_event_stream_tb: the default-size detector fed a continuous stream of
// synthetic events at the full rate of one image per clock cycle, the way a
// trigger would feed it.
//
// Two kinds of event are generated here (no recorded data is used):
//   quiet      - most pixels below the first threshold, a few low deposits,
//                like minimum-bias (zero-bias) collisions;
//   multi-jet  - quiet background plus four to six 3 x 3 clusters of large
//                deposits, a crude stand-in for all-hadronic top-pair events.
// Every score is compared with the reference network in lgn_ref_pkg. The test
// also checks the throughput: once the first score appears, out_valid must
// stay high for exactly as many cycles as there were events, and the first
// score must appear LATENCY cycles after the first image was captured.
// The mean score of each kind is printed for information only: with the
// untrained stand-in network it carries no physics meaning.
module lgn_event_stream_tb;
  import lgn_pkg::*;
  import lgn_ref_pkg::*;

  localparam int unsigned N_OUT  = LAYER_W_DEFAULT[NUM_LAYERS-1];
  localparam int unsigned SW     = $clog2(N_OUT + 1);
  localparam int unsigned N_EVT  = 600;

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
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int unsigned exp_q[$];
  bit          kind_q[$];
  int unsigned n_out = 0, first_out_edge = 0, last_out_edge = 0, first_cap_edge = 0;
  longint unsigned sum_score[2];
  int unsigned n_kind[2];

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      int unsigned e;
      bit k;
      if (n_out == 0) first_out_edge = cyc;
      last_out_edge = cyc;
      n_out++;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected score");
      end else begin
        e = exp_q.pop_front();
        k = kind_q.pop_front();
        sum_score[k] += score;
        if (int'(score) != e) begin
          failures++;
          if (failures < 10) $display("FAIL event %0d: score %0d expected %0d", n_out - 1, score, e);
        end
      end
    end
  end

  task automatic make_event(input bit jets);
    for (int p = 0; p < N_PIX; p++)
      pix[p] = ($urandom_range(0, 19) == 0) ? PIX_W'($urandom_range(0, 15)) : PIX_W'($urandom_range(0, 3));
    if (jets) begin
      int unsigned nj;
      nj = $urandom_range(4, 6);
      repeat (nj) begin
        int r0, c0;
        r0 = $urandom_range(1, IMG_ROWS - 2);
        c0 = $urandom_range(1, IMG_COLS - 2);
        for (int dr = -1; dr <= 1; dr++)
          for (int dc = -1; dc <= 1; dc++)
            pix[(r0 + dr) * IMG_COLS + (c0 + dc)] =
              (dr == 0 && dc == 0) ? PIX_W'($urandom_range(60, 300)) : PIX_W'($urandom_range(8, 60));
      end
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
    ref_net_init();
    rst_n = 1'b0;
    in_valid = 1'b0;
    pix = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    for (int i = 0; i < N_EVT; i++) begin
      bit jets;
      jets = ($urandom_range(0, 3) == 0);
      make_event(jets);
      in_valid = 1'b1;
      if (i == 0) first_cap_edge = cyc + 1;
      exp_q.push_back(ref_net_score(pix));
      kind_q.push_back(jets);
      n_kind[jets]++;
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (LATENCY + 3) @(negedge clk);

    checks++;
    if (n_out != N_EVT) begin failures++; $display("FAIL %0d scores for %0d events", n_out, N_EVT); end
    checks++;
    if (last_out_edge - first_out_edge + 1 != N_EVT) begin
      failures++;
      $display("FAIL scores spread over %0d cycles for %0d events", last_out_edge - first_out_edge + 1, N_EVT);
    end
    checks++;
    if (first_out_edge + 1 - first_cap_edge != LATENCY) begin
      failures++;
      $display("FAIL first-score latency %0d", first_out_edge + 1 - first_cap_edge);
    end
    checks++;
    if (n_kind[0] == 0 || n_kind[1] == 0) begin failures++; $display("FAIL one event kind never generated"); end
    if (n_kind[0] != 0 && n_kind[1] != 0)
      $display("quiet events %0d mean score %0d; multi-jet events %0d mean score %0d",
               n_kind[0], sum_score[0] / n_kind[0], n_kind[1], sum_score[1] / n_kind[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
