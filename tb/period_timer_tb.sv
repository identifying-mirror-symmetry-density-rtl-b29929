// period_timer_tb: checks the symmetry-period timer at the default 18-cycle period.
// Checks that the first tick follows run by one cycle, that ticks are exactly PERIOD cycles
// apart, that phase counts 0..PERIOD-1 after each tick, and that nothing ticks while run is low.
module period_timer_tb;
  localparam int unsigned PERIOD = sym_pkg::PERIOD;
  logic clk = 1'b0, rst_n = 1'b0, run = 1'b0;
  logic active, tick;
  logic [$clog2(PERIOD)-1:0] phase;
  int checks = 0, failures = 0;

  period_timer dut (.clk, .rst_n, .run, .active, .tick, .phase);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int last_tick, ticks, cyc;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) begin @(posedge clk); #1 check(!tick && !active, "idle while run low"); end
    run = 1'b1;
    @(posedge clk); #1;
    check(tick && active, "first tick one cycle after run");
    last_tick = 0; ticks = 1;
    for (cyc = 1; cyc <= 5 * PERIOD; cyc++) begin
      @(posedge clk); #1;
      check(phase == (cyc - 1) % PERIOD, $sformatf("phase at cycle %0d is %0d", cyc, phase));
      if (tick) begin
        check(cyc - last_tick == PERIOD, $sformatf("tick spacing %0d", cyc - last_tick));
        last_tick = cyc; ticks++;
      end
    end
    check(ticks == 6, $sformatf("tick count %0d", ticks));
    run = 1'b0;
    repeat (2 * PERIOD) begin @(posedge clk); #1 check(!tick, "no tick after run drops"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
