// FPGA prototype of a permutation binary neural network (PBNN).
//
// N binary neurons sit on a ring. Each time step every neuron computes the
// sign of a weighted sum of itself and its two ring neighbours (weights
// +1/-1 chosen by the connection number CN), and the resulting hidden vector
// is fed back to the state through a fixed permutation SIGMA. Started from
// almost any state, a suitable (CN, SIGMA) pair settles into one long
// periodic binary sequence; the defaults, CN1 with
// P(1 3 11 14 4 13 8 15 12 7 16 10 5 17 6 2 9), give an orbit of period 100
// that every state other than all-0 and all-1 falls into.
//
// Structure: pbnn_clock_divider turns the 100 MHz clock into a one-cycle
// step enable every DIV cycles (1 kHz by default, the rate the paper uses);
// pbnn_output_layer holds the state and contains the hidden layer
// pbnn_hidden_layer.
//
// Interface: clk is the board clock; rst (synchronous) clears the state to
// all 0 (all neurons at -1) and restarts the divider; load copies init into
// the state and takes precedence over rst. x is the state, bit i-1 = neuron
// i, 1 = +1; these are the signals the paper records on an instrument.
// step marks the cycle on which the next update is taken (x changes one
// cycle later).
module pbnn_top #(
  parameter int unsigned N   = 17,
  parameter int unsigned CN  = 1,
  parameter int unsigned SIGMA [N] =
    '{1, 3, 11, 14, 4, 13, 8, 15, 12, 7, 16, 10, 5, 17, 6, 2, 9},
  parameter int unsigned DIV = 100_000
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         load,
  input  logic [N-1:0] init,
  output logic [N-1:0] x,
  output logic         step
);

  pbnn_clock_divider #(.DIV(DIV)) u_div (
    .clk (clk),
    .rst (rst),
    .tick(step)
  );

  pbnn_output_layer #(.N(N), .CN(CN), .SIGMA(SIGMA)) u_ol (
    .clk (clk),
    .step(step),
    .load(load),
    .rst (rst),
    .init(init),
    .x   (x)
  );

endmodule
