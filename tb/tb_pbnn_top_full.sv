// Full-size testbench of pbnn_top at its default parameters: N = 17, CN1,
// permutation P(1 3 11 14 4 13 8 15 12 7 16 10 5 17 6 2 9), one update every
// 100000 clocks (1 kHz from 100 MHz).
//
// One complete operation: reset, load an initial condition, let the network
// run until it is on its periodic orbit, then run one more full period. A
// cycle-accurate scoreboard compares the state after every clock with the
// integer reference model; the testbench also checks that updates come
// exactly 100000 clocks apart and that the orbit has period 100.
module tb_pbnn_top_full;
  import pbnn_ref_pkg::*;

  localparam int N = 17;
  localparam int SIG [N] = '{1, 3, 11, 14, 4, 13, 8, 15, 12, 7, 16, 10, 5, 17, 6, 2, 9};
  localparam int PERIOD = 100;      // published period of this network
  localparam longint DIV = 100000;  // 100 MHz / 1 kHz

  int checks = 0;
  int failures = 0;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;  // 100 MHz

  logic rst = 1, load = 0;
  logic [N-1:0] init = '0, x;
  logic step;

  pbnn_top dut (.clk(clk), .rst(rst), .load(load), .init(init), .x(x), .step(step));

  int sig [];
  bit orbit [state_t];
  state_t m = 0;
  longint cyc = 0, last_step = -1;
  int n_step_gap = 0;

  always @(posedge clk) begin
    logic l, r, s;
    logic [N-1:0] v;
    l = load; r = rst; s = step; v = init;
    cyc++;
    if (l) m = state_t'(v);
    else if (r) m = 0;
    else if (s) m = ref_next(m, N, 1, sig);
    if (s && !r) begin
      if (last_step >= 0) begin
        checks++;
        n_step_gap++;
        if (cyc - last_step != DIV) begin
          failures++;
          $display("FAIL step gap %0d", cyc - last_step);
        end
      end
      last_step = cyc;
    end
    #1;
    checks++;
    if (x !== m[N-1:0]) begin
      failures++;
      if (failures < 10) $display("FAIL x=%b model=%b", x, m[N-1:0]);
    end
  end

  initial begin : watchdog
    repeat (60_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int steps, p;
    logic [N-1:0] v, s0;
    sig = new[N];
    foreach (SIG[k]) sig[k] = SIG[k];
    checks++;
    if (ref_orbit(state_t'(1), N, 1, sig, orbit) != PERIOD) begin
      failures++;
      $display("FAIL reference period");
    end
    repeat (3) @(negedge clk);
    rst = 0;
    do v = N'($urandom); while (v == '0 || v == '1);
    load = 1; init = v;
    @(negedge clk);
    load = 0;
    checks++;
    if (x != v) begin failures++; $display("FAIL load"); end
    steps = 0;
    while (!orbit.exists(state_t'(x)) && steps < 1000) begin
      @(posedge clk iff step); @(negedge clk); steps++;
    end
    checks++;
    if (steps >= 1000) begin failures++; $display("FAIL orbit not reached"); end
    $display("initial state %b reached the orbit after %0d steps", v, steps);
    s0 = x;
    p = 0;
    do begin
      @(posedge clk iff step); @(negedge clk); p++;
      checks++;
      if (!orbit.exists(state_t'(x))) begin failures++; $display("FAIL left the orbit"); end
    end while (x != s0 && p < 1000);
    checks++;
    if (p != PERIOD) begin failures++; $display("FAIL period %0d", p); end
    checks++;
    if (n_step_gap == 0) begin failures++; $display("FAIL no step gap measured"); end
    $display("period %0d, %0d clock cycles simulated", p, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
