// Output layer of the PBNN: state register and global permutation connection.
//
// The register holds the state x^t of the N neurons. On every clock edge
// with step high it takes the next state x_i^{t+1} = y_{sigma(i)}^t, where y
// is the output of the hidden layer (instantiated here, as in the paper's
// output-layer code) and sigma is the permutation identifier
// P(sigma(1) ... sigma(N)) given by the SIGMA parameter, values 1..N with
// SIGMA[0] = sigma(1). The permutation is pure wiring.
//
// Control, all synchronous to clk, in the paper's priority order:
//   load  - x <= init (initial condition), highest priority;
//   rst   - x <= 0, i.e. every neuron at -1 (the end point x_-);
//   step  - x <= permuted hidden vector.
// Otherwise x holds. The step enable is this design's addition: the paper
// clocks the register directly with a divided 1 kHz clock, here the clock
// stays at full rate and a divider supplies a one-cycle enable. load and
// rst act on any clock edge, whether or not step is high.
//
// Timing: x changes one clock after load, rst or step is sampled high.
module pbnn_output_layer
  import pbnn_pkg::*;
#(
  parameter int unsigned N  = 17,
  parameter int unsigned CN = 1,
  parameter int unsigned SIGMA [N] =
    '{1, 3, 11, 14, 4, 13, 8, 15, 12, 7, 16, 10, 5, 17, 6, 2, 9}
) (
  input  logic         clk,
  input  logic         step,
  input  logic         load,
  input  logic         rst,
  input  logic [N-1:0] init,
  output logic [N-1:0] x
);

  // Elaboration-time check that SIGMA is a permutation of 1..N.
  function automatic bit sigma_ok();
    for (int v = 1; v <= int'(N); v++) begin
      int hits;
      hits = 0;
      for (int k = 0; k < int'(N); k++) if (SIGMA[k] == v) hits++;
      if (hits != 1) return 1'b0;
    end
    return 1'b1;
  endfunction

  if (!sigma_ok()) begin : g_bad_sigma
    $error("pbnn_output_layer: SIGMA is not a permutation of 1..N");
  end

  logic [N-1:0] y;       // hidden vector y^t
  logic [N-1:0] x_next;  // permuted hidden vector x^{t+1}

  pbnn_hidden_layer #(.N(N), .CN(CN)) u_hl (
    .x(x),
    .y(y)
  );

  for (genvar k = 0; k < N; k++) begin : g_perm
    assign x_next[k] = y[SIGMA[k] - 1];
  end

  always_ff @(posedge clk) begin
    if (load)      x <= init;
    else if (rst)  x <= '0;
    else if (step) x <= x_next;
  end

endmodule
