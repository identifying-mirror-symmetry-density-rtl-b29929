// symmetry_map_tb: checks the result map collector.
// Random fire bits and start pulses every 18 cycles (and a stop): map must equal the OR of fire
// over the cycles start+2 .. start+19, map_valid must pulse once per start 20 cycles after it,
// and trace must show the OR of fire since the previous result.
module symmetry_map_tb;
  localparam int unsigned N = sym_pkg::NUM_NEURONS;
  localparam int unsigned P = sym_pkg::PERIOD;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [N-1:0] fire = '0, trace, map;
  logic map_valid;
  int checks = 0, failures = 0;
  logic [N-1:0] fire_hist [int];
  int start_cycles [$];
  int cyc = 0, n_valid = 0;
  bit started [int];
  logic [N-1:0] tr_model = '0;

  symmetry_map dut (.clk, .rst_n, .start, .fire, .trace, .map, .map_valid);

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

  // Observe at the falling edge: fire and start as driven in this cycle, outputs as registered.
  always @(negedge clk) if (rst_n) begin
    logic [N-1:0] want;
    cyc++;
    fire_hist[cyc] = fire;
    if (start) begin start_cycles.push_back(cyc); started[cyc] = 1; end
    check(trace == tr_model, $sformatf("trace at cycle %0d", cyc));
    if (started.exists(cyc - 1) || started.exists(cyc - P - 1)) tr_model = '0;
    else tr_model |= fire;
    if (map_valid) begin
      n_valid++;
      check(start_cycles.size() > 0 && cyc - start_cycles[0] == P + 2,
            $sformatf("map_valid at cycle %0d", cyc));
      want = '0;
      for (int t = start_cycles[0] + 2; t <= start_cycles[0] + P + 1; t++) want |= fire_hist[t];
      check(map == want, $sformatf("map at cycle %0d: %h expected %h", cyc, map, want));
      void'(start_cycles.pop_front());
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int op = 0; op < 40; op++) begin
      for (int t = 0; t < P; t++) begin
        start = (t == 0) && (op != 20);          // one operation skipped
        fire  = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom} &
                {$urandom, $urandom} & {$urandom, $urandom};
        @(posedge clk); #1;
      end
    end
    start = 1'b0;
    repeat (3 * P) begin fire = {$urandom, $urandom} & {$urandom, $urandom}; @(posedge clk); #1; end
    check(n_valid == 39, $sformatf("%0d results for 39 operations", n_valid));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
