// Self-checking testbench of pbnn_clock_divider.
//
// Runs three dividers side by side: the default DIV = 100000 (100 MHz to
// 1 kHz), DIV = 7 and DIV = 1. For each it checks that the first tick comes
// DIV cycles after reset is released, that every tick lasts one cycle and
// that ticks are exactly DIV cycles apart; a mid-run reset must restart the
// count.
module tb_pbnn_clock_divider;

  int checks = 0;
  int failures = 0;

  logic clk;
  initial clk = 1'b0;
  logic rst;
  logic [2:0] tick;
  localparam int DIVS [3] = '{100000, 7, 1};

  pbnn_clock_divider                 dut_full (.clk(clk), .rst(rst), .tick(tick[0]));
  pbnn_clock_divider #(.DIV(DIVS[1])) dut_7   (.clk(clk), .rst(rst), .tick(tick[1]));
  pbnn_clock_divider #(.DIV(DIVS[2])) dut_1   (.clk(clk), .rst(rst), .tick(tick[2]));

  always #5 clk = ~clk;

  // cycles since reset release, and cycle of the last tick, per divider
  longint cyc_n;
  longint last [3];
  int     nticks [3];

  initial begin : watchdog
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    if (rst) begin
      cyc_n = 0;
      for (int d = 0; d < 3; d++) begin last[d] = 0; nticks[d] = 0; end
    end else begin
      cyc_n++;
      for (int d = 0; d < 3; d++) begin
        if (tick[d]) begin
          checks++;
          if (cyc_n - last[d] != longint'(DIVS[d])) begin
            failures++;
            if (failures < 10)
              $display("FAIL DIV=%0d tick at %0d, previous %0d", DIVS[d], cyc_n, last[d]);
          end
          last[d] = cyc_n;
          nticks[d]++;
        end else if (cyc_n - last[d] >= longint'(DIVS[d])) begin
          checks++;
          failures++;
          if (failures < 10) $display("FAIL DIV=%0d missing tick at %0d", DIVS[d], cyc_n);
          last[d] = cyc_n;
        end
      end
    end
  end

  initial begin
    rst = 1;
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (150000) @(posedge clk);
    rst = 1;                      // restart in the middle of a count
    @(posedge clk);
    rst = 0;
    repeat (220000) @(posedge clk);
    #2;
    checks++;
    for (int d = 0; d < 3; d++) begin
      checks++;
      if (longint'(nticks[d]) != cyc_n / longint'(DIVS[d]) || nticks[d] == 0) begin
        failures++;
        $display("FAIL DIV=%0d: %0d ticks in %0d cycles", DIVS[d], nticks[d], cyc_n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
