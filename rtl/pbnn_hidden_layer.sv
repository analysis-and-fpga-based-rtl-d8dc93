// Hidden layer of the PBNN: the local binary connections.
//
// Every hidden neuron i looks at its own state and its two ring neighbours
// and outputs y_i = sgn(w_a x_{i-1} + w_b x_i + w_c x_{i+1}); neuron 1's
// left neighbour is neuron N and neuron N's right neighbour is neuron 1.
// Following the paper's hidden-layer code, the sign function is written as
// a sum of products: each of the eight neighbourhood patterns
// (x_{i-1}, x_i, x_{i+1}) is one AND term, gated by one bit of a rule
// vector, and the eight terms are ORed. The rule vector is derived here from
// the connection number CN by pbnn_pkg::cn_rule (the paper's listing writes
// it as a literal; deriving it keeps it consistent with the CN weights).
//
// Interface: x is the state vector x^t, y the hidden vector y^t; bit i-1 is
// neuron i, 1 = +1 and 0 = -1. Purely combinational, no clock.
module pbnn_hidden_layer
  import pbnn_pkg::*;
#(
  parameter int unsigned N  = 17,  // number of neurons (a prime in the paper)
  parameter int unsigned CN = 1    // connection number 0..7
) (
  input  logic [N-1:0] x,
  output logic [N-1:0] y
);

  localparam rule_t RULE = cn_rule(3'(CN));

  if (N < 3) begin : g_bad_n
    $error("pbnn_hidden_layer: N must be at least 3");
  end
  if (CN > 7) begin : g_bad_cn
    $error("pbnn_hidden_layer: CN must be 0..7");
  end

  for (genvar j = 0; j < N; j++) begin : g_neuron
    // Ring neighbours of neuron j+1.
    localparam int unsigned L = (j + N - 1) % N;
    localparam int unsigned R = (j + 1) % N;
    logic a, b, c;
    logic [RULE_BITS-1:0] term;
    assign a = x[L];
    assign b = x[j];
    assign c = x[R];
    always_comb begin
      term[0] = RULE[0] & (~a & ~b & ~c);
      term[1] = RULE[1] & (~a & ~b &  c);
      term[2] = RULE[2] & (~a &  b & ~c);
      term[3] = RULE[3] & (~a &  b &  c);
      term[4] = RULE[4] & ( a & ~b & ~c);
      term[5] = RULE[5] & ( a & ~b &  c);
      term[6] = RULE[6] & ( a &  b & ~c);
      term[7] = RULE[7] & ( a &  b &  c);
    end
    assign y[j] = |term;
  end

endmodule
