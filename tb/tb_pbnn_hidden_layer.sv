// Self-checking testbench of pbnn_hidden_layer.
//
// Instantiates the hidden layer for all eight connection numbers at the
// default size N = 17, plus CN1 at the smallest ring N = 3, and compares the
// outputs with the integer reference model (weighted sum and sign) for
// directed and random state vectors. The block is combinational, so each
// vector is checked after a 1 ns settle.
module tb_pbnn_hidden_layer;
  import pbnn_ref_pkg::*;

  localparam int N = 17;

  int checks = 0;
  int failures = 0;

  logic [N-1:0] x;
  logic [N-1:0] y [8];
  logic [2:0]   x3;
  logic [2:0]   y3;

  for (genvar c = 0; c < 8; c++) begin : g_cn
    pbnn_hidden_layer #(.N(N), .CN(c)) dut (.x(x), .y(y[c]));
  end
  pbnn_hidden_layer #(.N(3), .CN(1)) dut3 (.x(x3), .y(y3));

  task automatic check_vec(input logic [N-1:0] v);
    x = v;
    #1;
    for (int c = 0; c < 8; c++) begin
      state_t exp;
      exp = ref_hidden(state_t'(v), N, c);
      checks++;
      if (y[c] !== exp[N-1:0]) begin
        failures++;
        if (failures < 10)
          $display("FAIL CN%0d x=%b y=%b expected=%b", c, v, y[c], exp[N-1:0]);
      end
    end
  endtask

  initial begin : watchdog
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Directed: both end points, single neurons on and off, alternating.
    check_vec('0);
    check_vec('1);
    for (int i = 0; i < N; i++) begin
      check_vec(N'(1) << i);
      check_vec(~(N'(1) << i));
    end
    check_vec({(N+1)/2{2'b01}});
    for (int r = 0; r < 20000; r++) check_vec(N'($urandom));
    // N = 3 ring: every neuron sees all three, exhaustive.
    for (int v = 0; v < 8; v++) begin
      state_t exp;
      x3 = 3'(v);
      #1;
      exp = ref_hidden(state_t'(v), 3, 1);
      checks++;
      if (y3 !== exp[2:0]) begin
        failures++;
        $display("FAIL N=3 x=%b y=%b expected=%b", x3, y3, exp[2:0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
