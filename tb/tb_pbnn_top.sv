// End-to-end testbench of pbnn_top.
//
// Two networks run side by side with a short update divider so that many
// orbits fit in a short simulation:
//   u7  - N = 7, CN1, P(1 5 2 6 3 7 4), DIV = 3. Every one of the 128
//         initial states is loaded in turn; all but the two end points
//         (all 0, all 1) must fall into the single orbit of period 42, and
//         the end points must alternate with period 2.
//   u17 - N = 17, CN1, the default permutation P(1 3 11 14 4 13 8 15 12 7 16
//         10 5 17 6 2 9), DIV = 2. 300 random initial states must all reach
//         the period-100 orbit.
// A cycle-accurate scoreboard per network follows load, rst and the step
// enable and compares the state after every clock edge with the integer
// reference model. Mechanisms counted, each must occur: load, load together
// with rst (load wins), rst, step, a cycle without step (hold), entry into
// the orbit, an end point.
module tb_pbnn_top;
  import pbnn_ref_pkg::*;

  localparam int N7  = 7;
  localparam int N17 = 17;
  localparam int SIG7  [N7]  = '{1, 5, 2, 6, 3, 7, 4};
  localparam int SIG17 [N17] = '{1, 3, 11, 14, 4, 13, 8, 15, 12, 7, 16, 10, 5, 17, 6, 2, 9};
  localparam int PER7  = 42;   // published period of this network
  localparam int PER17 = 100;  // published period of this network

  int checks = 0;
  int failures = 0;
  int n_load = 0, n_load_rst = 0, n_rst = 0, n_step = 0, n_hold = 0, n_entry = 0, n_endpt = 0;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  logic rst7 = 1, load7 = 0, rst17 = 1, load17 = 0;
  logic [N7-1:0]  init7 = '0, x7;
  logic [N17-1:0] init17 = '0, x17;
  logic step7, step17;

  pbnn_top #(.N(N7),  .CN(1), .SIGMA(SIG7),  .DIV(3)) u7
    (.clk(clk), .rst(rst7),  .load(load7),  .init(init7),  .x(x7),  .step(step7));
  pbnn_top #(.N(N17), .CN(1), .SIGMA(SIG17), .DIV(2)) u17
    (.clk(clk), .rst(rst17), .load(load17), .init(init17), .x(x17), .step(step17));

  int sig7 [], sig17 [];
  bit orbit7 [state_t];
  bit orbit17 [state_t];
  state_t m7 = 0, m17 = 0;

  // Scoreboards: model state updated from the controls sampled at the edge.
  always @(posedge clk) begin
    logic l, r, s;
    logic [N7-1:0] v;
    l = load7; r = rst7; s = step7; v = init7;
    if (l) begin m7 = state_t'(v); n_load++; if (r) n_load_rst++; end
    else if (r) begin m7 = 0; n_rst++; end
    else if (s) begin m7 = ref_next(m7, N7, 1, sig7); n_step++; end
    else n_hold++;
    #1;
    checks++;
    if (x7 !== m7[N7-1:0]) begin
      failures++;
      if (failures < 10) $display("FAIL u7 x=%b model=%b", x7, m7[N7-1:0]);
    end
  end

  always @(posedge clk) begin
    logic l, r, s;
    logic [N17-1:0] v;
    l = load17; r = rst17; s = step17; v = init17;
    if (l) m17 = state_t'(v);
    else if (r) m17 = 0;
    else if (s) m17 = ref_next(m17, N17, 1, sig17);
    #1;
    checks++;
    if (x17 !== m17[N17-1:0]) begin
      failures++;
      if (failures < 10) $display("FAIL u17 x=%b model=%b", x17, m17[N17-1:0]);
    end
  end

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    if (failures < 10) $display("FAIL %s", msg);
  endtask

  // Loads v into u7 and runs until the state is on the orbit; returns steps.
  task automatic run7(input logic [N7-1:0] v, input logic use_rst, output int steps);
    @(negedge clk);
    load7 = 1; rst7 = use_rst; init7 = v;
    @(negedge clk);
    load7 = 0; rst7 = 0;
    steps = 0;
    while (!orbit7.exists(state_t'(x7)) && steps < 200) begin
      @(posedge clk iff step7);
      @(negedge clk);
      steps++;
    end
  endtask

  initial begin
    int p, st, maxst;
    logic [N7-1:0] s0;
    logic [N17-1:0] s17;
    sig7 = new[N7];   foreach (SIG7[k])  sig7[k]  = SIG7[k];
    sig17 = new[N17]; foreach (SIG17[k]) sig17[k] = SIG17[k];

    checks++;
    if (ref_orbit(state_t'(1), N7, 1, sig7, orbit7) != PER7) fail("reference period N=7");
    checks++;
    if (ref_orbit(state_t'(1), N17, 1, sig17, orbit17) != PER17) fail("reference period N=17");

    repeat (3) @(negedge clk);
    rst7 = 0; rst17 = 0;

    // --- N = 7: every initial state -------------------------------------
    maxst = 0;
    for (int v = 0; v < (1 << N7); v++) begin
      bit endpt;
      endpt = (v == 0 || v == (1 << N7) - 1);
      run7(N7'(v), (v % 5) == 0, st);
      checks++;
      if (endpt) begin
        n_endpt++;
        if (st != 200) fail($sformatf("end point %b entered the orbit", N7'(v)));
        // end points alternate: all 0 <-> all 1
        @(posedge clk iff step7); #1;
        checks++;
        if (x7 != ~N7'(v) && x7 != N7'(v)) fail("end point orbit");
      end else begin
        if (st >= 200) fail($sformatf("initial state %b never reached the orbit", N7'(v)));
        else n_entry++;
        if (st > maxst) maxst = st;
      end
    end
    $display("N=7: longest transient %0d steps", maxst);

    // period measured on the RTL, from a point on the orbit
    run7(N7'(1), 1'b0, st);
    s0 = x7;
    p = 0;
    do begin @(posedge clk iff step7); @(negedge clk); p++; end while (x7 != s0 && p < 1000);
    checks++;
    if (p != PER7) fail($sformatf("N=7 period %0d", p));

    // rst mid-run clears the state
    @(negedge clk); rst7 = 1; @(negedge clk); rst7 = 0;
    checks++;
    if (x7 != '0) fail("rst");

    // --- N = 17: random initial states ----------------------------------
    maxst = 0;
    for (int r = 0; r < 300; r++) begin
      int steps;
      do s17 = N17'($urandom); while (s17 == '0 || s17 == '1);
      @(negedge clk); load17 = 1; init17 = s17; @(negedge clk); load17 = 0;
      steps = 0;
      while (!orbit17.exists(state_t'(x17)) && steps < 1000) begin
        @(posedge clk iff step17); @(negedge clk); steps++;
      end
      checks++;
      if (steps >= 1000) fail($sformatf("N=17 state %b never reached the orbit", s17));
      else n_entry++;
      if (steps > maxst) maxst = steps;
    end
    $display("N=17: longest transient %0d steps", maxst);
    s17 = x17;
    p = 0;
    do begin @(posedge clk iff step17); @(negedge clk); p++; end while (x17 != s17 && p < 1000);
    checks++;
    if (p != PER17) fail($sformatf("N=17 period %0d", p));

    $display("events: load %0d, load+rst %0d, rst %0d, step %0d, hold %0d, orbit entry %0d, end point %0d",
             n_load, n_load_rst, n_rst, n_step, n_hold, n_entry, n_endpt);
    if (n_load == 0)     fail("load never happened");
    if (n_load_rst == 0) fail("load with rst never happened");
    if (n_rst == 0)      fail("rst never happened");
    if (n_step == 0)     fail("step never happened");
    if (n_hold == 0)     fail("hold never happened");
    if (n_entry == 0)    fail("orbit entry never happened");
    if (n_endpt == 0)    fail("end point never tested");
    checks += 7;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
