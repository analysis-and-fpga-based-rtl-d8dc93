// Self-checking testbench of pbnn_output_layer at its default parameters
// (N = 17, CN1, permutation P(1 3 11 14 4 13 8 15 12 7 16 10 5 17 6 2 9)).
//
// Checks, against the integer reference model:
//   - load copies init into the state one cycle later, and wins over rst;
//   - rst clears the state to all 0 one cycle later;
//   - with step low the state holds;
//   - every step gives exactly the reference next state (500 steps from
//     each of several random initial conditions, with random gaps);
//   - the orbit reached has period 100, the paper's value for this
//     permutation.
module tb_pbnn_output_layer;
  import pbnn_ref_pkg::*;

  localparam int N = 17;
  localparam int SIG [N] = '{1, 3, 11, 14, 4, 13, 8, 15, 12, 7, 16, 10, 5, 17, 6, 2, 9};
  localparam int PERIOD = 100;  // published period of this network

  int checks = 0;
  int failures = 0;
  int sig_dyn [];

  logic clk;
  initial clk = 1'b0;
  logic step, load, rst;
  logic [N-1:0] init, x;

  pbnn_output_layer dut (.clk(clk), .step(step), .load(load), .rst(rst), .init(init), .x(x));

  always #5 clk = ~clk;

  task automatic expect_x(input logic [N-1:0] e, input string what);
    checks++;
    if (x !== e) begin
      failures++;
      if (failures < 10) $display("FAIL %s: x=%b expected=%b", what, x, e);
    end
  endtask

  task automatic cyc(input logic s, input logic l, input logic r, input logic [N-1:0] v);
    step = s; load = l; rst = r; init = v;
    @(posedge clk);
    #1;
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] v, e, s0;
    int p;
    sig_dyn = new[N];
    foreach (SIG[k]) sig_dyn[k] = SIG[k];
    step = 0; load = 0; rst = 1; init = '0;
    @(posedge clk); #1;
    expect_x('0, "reset");
    // load wins over rst
    v = N'($urandom);
    cyc(0, 1, 1, v);
    expect_x(v, "load over rst");
    // hold without step
    repeat (5) cyc(0, 0, 0, ~v);
    expect_x(v, "hold");
    // rst alone, even with step
    cyc(1, 0, 1, v);
    expect_x('0, "rst");
    for (int run = 0; run < 6; run++) begin
      v = N'($urandom);
      cyc(0, 1, 0, v);
      expect_x(v, "load");
      e = v;
      for (int t = 0; t < 500; t++) begin
        if (($urandom % 4) == 0) begin
          cyc(0, 0, 0, '0);
          expect_x(e, "hold between steps");
        end
        e = ref_next(state_t'(e), N, 1, sig_dyn);
        cyc(1, 0, 0, '0);
        expect_x(e, "step");
      end
      // period measured on the RTL from a point on the orbit
      s0 = x;
      p = 0;
      do begin
        cyc(1, 0, 0, '0);
        p++;
      end while (x != s0 && p < 1000);
      checks++;
      if (p != PERIOD) begin
        failures++;
        $display("FAIL period %0d, expected %0d", p, PERIOD);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
