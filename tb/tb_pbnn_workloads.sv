// Workload testbench: the four example networks published with this design, run on pbnn_top
// with one update per clock (DIV = 1), each from every one of its 2^N
// initial states.
//   n7_identity - N = 7,  CN1, identity P(1 2 3 4 5 6 7): an orbit of period 14
//           exists (not globally stable).
//   n7_p42 - N = 7,  CN1, P(1 5 2 6 3 7 4): globally stable orbit, period 42.
//   n17_p50 - N = 17, CN1, P(1 2 4 10 11 3 7 12 8 14 16 5 15 9 17 6 13):
//           globally stable orbit, period 50.
//   n17_p100 - N = 17, CN1, P(1 3 11 14 4 13 8 15 12 7 16 10 5 17 6 2 9):
//           globally stable orbit, period 100.
// For each initial state the hardware runs until its state repeats a state
// seen on the orbit set built from the first run; the orbit length is measured
// on the hardware. Global stability means that all 2^N - 2 states other than
// the two end points (all 0, all 1) reach that one orbit, so the fraction
// F1 = (#periodic + #eventually periodic points) / 2^N equals
// (2^N - 2) / 2^N.
module tb_pbnn_workloads;

  int checks = 0;
  int failures = 0;

  logic clk;
  initial clk = 1'b0;
  always #5 clk = ~clk;

  localparam int SA [7]  = '{1, 2, 3, 4, 5, 6, 7};
  localparam int SB [7]  = '{1, 5, 2, 6, 3, 7, 4};
  localparam int SC [17] = '{1, 2, 4, 10, 11, 3, 7, 12, 8, 14, 16, 5, 15, 9, 17, 6, 13};
  localparam int SD [17] = '{1, 3, 11, 14, 4, 13, 8, 15, 12, 7, 16, 10, 5, 17, 6, 2, 9};

  logic rst = 1;
  logic [3:0] load = '0;
  logic [6:0]  init7 = '0;
  logic [16:0] init17 = '0;
  logic [6:0]  xa, xb;
  logic [16:0] xc, xd;
  logic [3:0]  stp;

  pbnn_top #(.N(7),  .CN(1), .SIGMA(SA), .DIV(1)) ua
    (.clk(clk), .rst(rst), .load(load[0]), .init(init7),  .x(xa), .step(stp[0]));
  pbnn_top #(.N(7),  .CN(1), .SIGMA(SB), .DIV(1)) ub
    (.clk(clk), .rst(rst), .load(load[1]), .init(init7),  .x(xb), .step(stp[1]));
  pbnn_top #(.N(17), .CN(1), .SIGMA(SC), .DIV(1)) uc
    (.clk(clk), .rst(rst), .load(load[2]), .init(init17), .x(xc), .step(stp[2]));
  pbnn_top #(.N(17), .CN(1), .SIGMA(SD), .DIV(1)) ud
    (.clk(clk), .rst(rst), .load(load[3]), .init(init17), .x(xd), .step(stp[3]));

  function automatic logic [16:0] xsel(input int w);
    case (w)
      0: return 17'(xa);
      1: return 17'(xb);
      2: return xc;
      default: return xd;
    endcase
  endfunction

  initial begin : watchdog
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Loads v into network w and runs it until it repeats a state; returns the
  // state at which the repetition was found and the cycle length there.
  task automatic settle(input int w, input logic [16:0] v, output logic [16:0] s, output int p);
    int t;
    int first [logic [16:0]];
    @(negedge clk);
    load[w] = 1'b1; init7 = v[6:0]; init17 = v;
    @(negedge clk);
    load[w] = 1'b0;
    t = 0;
    while (!first.exists(xsel(w))) begin
      first[xsel(w)] = t;
      @(negedge clk);
      t++;
    end
    s = xsel(w);
    p = t - first[s];
  endtask

  // Exhaustive run of one network: returns the number of states reaching
  // the orbit found from state 1 and that orbit's period.
  task automatic sweep(input int w, input int n, input int per_exp, input bit global_exp,
                       input string name);
    bit orbit [logic [16:0]];
    logic [16:0] s, full;
    int p, p0, reach, found;
    full = 17'((1 << n) - 1);
    settle(w, 17'd1, s, p0);
    // collect the orbit by stepping the hardware from s for p0 steps
    orbit.delete();
    @(negedge clk); load[w] = 1'b1; init7 = s[6:0]; init17 = s; @(negedge clk); load[w] = 1'b0;
    for (int t = 0; t < p0; t++) begin orbit[xsel(w)] = 1'b1; @(negedge clk); end
    reach = 0;
    found = 0;
    for (int v = 0; v < (1 << n); v++) begin
      settle(w, 17'(v), s, p);
      if (orbit.exists(s)) reach++;
      if (global_exp && v != 0 && 17'(v) != full) begin
        checks++;
        if (!orbit.exists(s)) begin
          failures++;
          if (failures < 10) $display("FAIL %s: state %0d misses the orbit", name, v);
        end
      end
      if (p == per_exp) found++;
    end
    $display("%s: orbit from state 1 has period %0d; %0d of %0d initial states reach it (F1 = %0d/%0d); %0d initial states end on a period-%0d orbit",
             name, p0, reach, 1 << n, reach, 1 << n, found, per_exp);
    checks++;
    if (global_exp) begin
      if (p0 != per_exp || reach != (1 << n) - 2) begin
        failures++;
        $display("FAIL %s: expected a globally stable orbit of period %0d", name, per_exp);
      end
      // the two end points alternate with each other
      settle(w, '0, s, p);
      checks++;
      if (p != 2 || (s != '0 && s != full)) begin
        failures++;
        $display("FAIL %s: end point cycle %0d", name, p);
      end
    end else if (found == 0) begin
      failures++;
      $display("FAIL %s: no orbit of period %0d", name, per_exp);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    @(negedge clk);
    checks++;
    if (stp != 4'hf) begin failures++; $display("FAIL step enable with DIV = 1"); end
    sweep(0, 7,  14,  1'b0, "n7_identity");
    sweep(1, 7,  42,  1'b1, "n7_p42");
    sweep(2, 17, 50,  1'b1, "n17_p50");
    sweep(3, 17, 100, 1'b1, "n17_p100");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
