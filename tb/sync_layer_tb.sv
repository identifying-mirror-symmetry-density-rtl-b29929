// sync_layer_tb: checks the synchronization layer.
// Spikes arriving at different times within a period must all be released together in the cycle
// after the timing pulse; neurons that received nothing must stay silent; a spike stored longer
// than the slow leak allows (over 32 cycles with the defaults) must be lost; the timing pulse
// must empty the layer so a second timing pulse releases nothing.
module sync_layer_tb;
  localparam int unsigned N = sym_pkg::NUM_NEURONS;
  logic clk = 1'b0, rst_n = 1'b0, timing = 1'b0;
  logic [N-1:0] in_spikes = '0, out_spikes, sent;
  int checks = 0, failures = 0;

  sync_layer dut (.clk, .rst_n, .in_spikes, .timing, .out_spikes);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1;
    for (int trial = 0; trial < 30; trial++) begin
      sent = '0;
      // 17 cycles of scattered spikes, then the timing pulse in the 18th.
      for (int cyc = 0; cyc < 18; cyc++) begin
        in_spikes = '0;
        for (int k = 0; k < N; k++) in_spikes[k] = ($urandom % 40) == 0;
        sent |= in_spikes;
        timing = (cyc == 17);
        @(posedge clk); #1;
        if (cyc < 17) check(out_spikes == '0, $sformatf("trial %0d held at cycle %0d", trial, cyc));
      end
      in_spikes = '0; timing = 1'b0;
      check(out_spikes == sent, $sformatf("trial %0d release %h vs %h", trial, out_spikes, sent));
      @(posedge clk); #1;
      check(out_spikes == '0, "release lasts one cycle");
      timing = 1'b1;
      @(posedge clk); #1 timing = 1'b0;
      check(out_spikes == '0, "layer emptied by timing pulse");
    end
    // Long storage: a spike is lost after the leak has drained it.
    in_spikes = '0; in_spikes[7] = 1'b1;
    @(posedge clk); #1 in_spikes = '0;
    repeat (45) @(posedge clk);
    #1 timing = 1'b1;
    @(posedge clk); #1 timing = 1'b0;
    check(out_spikes == '0, "stale spike leaked away");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
