// group_sum: turns the last LGN layer's output bits into an integer anomaly
// score by counting how many of them are 1.
//
// The paper says the student network outputs an anomaly score trained to
// match the teacher's, but not how a network of binary gates produces a
// number. Counting the ones of the output layer (the "group sum" of
// differentiable logic gate networks, with a single group) is the simplest
// mechanism that does it and is this design's choice. Any scale factor used
// in training is a constant and is left to the consumer of the score.
//
// Interface: bits (N bits) in, score ($clog2(N+1) bits) out. Combinational;
// synthesis turns the loop into an adder tree of LUTs, no multipliers.
module group_sum #(
  parameter int unsigned N = 256,
  localparam int unsigned SW = $clog2(N + 1)
) (
  input  logic [N-1:0]  bits,
  output logic [SW-1:0] score
);

  always_comb begin
    score = '0;
    for (int i = 0; i < N; i++) begin
      score = score + SW'(bits[i]);
    end
  end

endmodule
