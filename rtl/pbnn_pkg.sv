// Shared definitions of the permutation binary neural network (PBNN).
//
// A neuron state is one bit: 1 stands for the value +1 and 0 for -1. Bit
// i-1 of a state vector holds neuron i (neurons are numbered 1..N, as in the
// permutation identifiers P(sigma(1) ... sigma(N))).
//
// cn_rule() turns a connection number CN0..CN7 into the 8-entry truth table
// of the 3-input Boolean function that each hidden neuron evaluates. The
// three bits of the connection number are the signs of the local weights
// (w_a, w_b, w_c), bit 2 being w_a (1 = +1, 0 = -1); so CN1 is (-1,-1,+1).
// Entry k of the table is the neuron output for the neighbourhood
// (x_{i-1}, x_i, x_{i+1}) = (k[2], k[1], k[0]), i.e. sgn of the weighted sum
// with sgn(0) = +1. The sum of three odd terms is never 0, so the table is
// the majority of the three sign-adjusted inputs.
package pbnn_pkg;

  // Number of entries of a 3-input truth table.
  localparam int unsigned RULE_BITS = 8;

  typedef logic [RULE_BITS-1:0] rule_t;

  // +1 for a set bit, -1 for a clear one.
  function automatic int pm1(input logic b);
    return b ? 1 : -1;
  endfunction

  function automatic rule_t cn_rule(input logic [2:0] cn);
    rule_t r;
    for (int k = 0; k < RULE_BITS; k++) begin
      int s;
      s = pm1(cn[2]) * pm1(k[2]) + pm1(cn[1]) * pm1(k[1]) + pm1(cn[0]) * pm1(k[0]);
      r[k] = (s >= 0);
    end
    return r;
  endfunction

endpackage
