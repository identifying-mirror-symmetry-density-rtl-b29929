// coincidence_layer_tb: checks one coincidence layer against the distance histogram, cycle by
// cycle. Leak 1 and threshold 0: for a set of inputs firing together in cycle t0, output neuron o
// must fire in cycle t0 + d + 4 exactly for those distances d at which two or more of the inputs
// lie, and at no other time.
module coincidence_layer_tb;
  localparam int G = sym_pkg::GRID;
  localparam int N = G * G;
  localparam int AW = sym_pkg::ACC_W;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] in_spikes = '0, fire;
  logic [AW-1:0] leak = AW'(1), threshold = AW'(0);
  logic [AW-1:0] acc [N];
  int checks = 0, failures = 0, n_fired = 0;

  coincidence_layer dut (.clk, .rst_n, .in_spikes, .leak, .threshold, .acc, .fire);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic int mdist(int o, int i);
    int dx, dy;
    dx = (o % G) - (i % G); if (dx < 0) dx = -dx;
    dy = (o / G) - (i / G); if (dy < 0) dy = -dy;
    return dx + dy;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N-1:0] img;
  int cnt_at [N][2 * G];
  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int trial = 0; trial < 40; trial++) begin
      img = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
      for (int o = 0; o < N; o++) begin
        for (int d = 0; d < 2 * G; d++) cnt_at[o][d] = 0;
        for (int i = 0; i < N; i++) if (img[i]) cnt_at[o][mdist(o, i)]++;
      end
      in_spikes = img;
      @(posedge clk); #1 in_spikes = '0;      // spikes were present in cycle t0 = 0
      for (int t = 1; t <= 2 * G + 6; t++) begin
        for (int o = 0; o < N; o++) begin
          bit want;
          want = (t - 4 >= 0 && t - 4 < 2 * G) ? (cnt_at[o][t - 4] >= 2) : 1'b0;
          check(fire[o] == want, $sformatf("trial %0d neuron %0d cycle %0d fire %0d", trial, o, t, fire[o]));
          if (fire[o]) n_fired++;
        end
        @(posedge clk); #1;
      end
    end
    check(n_fired > 100, "neurons fired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
