// algorithm1_workload_tb: runs the detector on the kinds of input the evaluation uses and compares
// each result with the histogram method it implements in hardware.
//
// The images are streamed at the full rate of one per 18-cycle period with the reset
// configuration (threshold 0, leak 1); run is dropped after the last one. Each result map
// (map / map_valid) is compared, in order, with the histogram method computed here: for each output point, count the active inputs at each Manhattan
// distance; the point is a symmetry point if some distance bin holds two or more inputs (the
// histogram threshold "maxsym * threshold" set to 1). With one spike per input and a leak of 1 a
// lone spike leaks away at once, so the two must agree exactly. Results must
// come one per 18 cycles.
//
// The higher layer receives each map through the synchronization layer one period later; the
// points it fires on during that period must be the histogram result of the previous map
// (symmetry points of symmetry points).
//
// Images: two points in one column and in one row (a single mirror line, as in the two-point
// demonstration), the four corners, a 3x3 square, a symmetric "T", and 30 random sparse images.
module algorithm1_workload_tb;
  import sym_pkg::*;
  localparam int G = GRID;
  localparam int N = NUM_NEURONS;

  logic clk = 1'b0, rst_n = 1'b0, run = 1'b0;
  logic [PIX_W-1:0] pixels [N];
  logic cfg_we = 1'b0;
  cfg_addr_e cfg_addr = CFG_THRESHOLD;
  logic [7:0] cfg_wdata = '0, cfg_rdata;
  logic active, tick;
  logic [$clog2(PERIOD)-1:0] phase;
  logic [N-1:0] in_spikes, fire, sync_spikes, trace, map;
  logic map_valid;
  logic [ACC_W-1:0] acc [N];
  logic [N-1:0] hi_fire;
  logic [ACC_W-1:0] hi_acc [N];

  symmetry_snn_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N-1:0] img;
  int n_nonempty = 0;

  function automatic logic [N-1:0] histogram_symmetry(logic [N-1:0] im);
    logic [N-1:0] s;
    int cnt_at [2 * G];
    s = '0;
    for (int o = 0; o < N; o++) begin
      for (int d = 0; d < 2 * G; d++) cnt_at[d] = 0;
      for (int i = 0; i < N; i++) begin
        int dx, dy;
        if (!im[i]) continue;
        dx = (o % G) - (i % G); if (dx < 0) dx = -dx;
        dy = (o / G) - (i / G); if (dy < 0) dy = -dy;
        cnt_at[dx + dy]++;
      end
      for (int d = 0; d < 2 * G; d++) if (cnt_at[d] >= 2) s[o] = 1'b1;
    end
    return s;
  endfunction

  // Images are streamed back to back, one per 18-cycle period; results come back in order.
  logic [N-1:0] sent [$];
  string        names [$];
  int           n_results = 0, last_valid = -1, cyc = 0, n_hier = 0;
  logic [N-1:0] hi_hist [int];
  logic [N-1:0] prev_map = '0;

  always @(negedge clk) if (rst_n) begin
    cyc++;
    hi_hist[cyc] = hi_fire;
    if (map_valid) begin
      logic [N-1:0] want, hi_or;
      // The higher layer sees, in the same period, the previous operation's map as its input.
      hi_or = '0;
      for (int t = cyc - PERIOD; t < cyc; t++) if (hi_hist.exists(t)) hi_or |= hi_hist[t];
      check(hi_or == histogram_symmetry(prev_map),
            $sformatf("higher layer: %h, histogram of previous map %h", hi_or, histogram_symmetry(prev_map)));
      if (hi_or != '0) n_hier++;
      prev_map = map;
      check(sent.size() > 0, "result without an image");
      if (sent.size() > 0) begin
        want = histogram_symmetry(sent[0]);
        check(map == want, $sformatf("%s: map %h, histogram %h", names[0], map, want));
        if (map != '0) n_nonempty++;
        void'(sent.pop_front());
        void'(names.pop_front());
      end
      if (last_valid >= 0) check(cyc - last_valid == PERIOD, "one result per 18 cycles");
      last_valid = cyc;
      n_results++;
    end
  end

  // Present im for the next tick.
  task automatic present(input logic [N-1:0] im, input string name);
    for (int k = 0; k < N; k++) pixels[k] = im[k] ? 8'd255 : 8'd0;
    run = 1'b1;
    do @(negedge clk); while (!tick);
    sent.push_back(im);
    names.push_back(name);
    @(posedge clk); #1;
  endtask

  function automatic int idx(int x, int y); return y * G + x; endfunction

  initial begin
    for (int k = 0; k < N; k++) pixels[k] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (2) @(posedge clk);
    #1;
    img = '0; img[idx(7, 0)] = 1; img[idx(7, 6)] = 1; present(img, "two points, column");
    img = '0; img[idx(1, 2)] = 1; img[idx(5, 2)] = 1; present(img, "two points, row");
    img = '0; img[idx(0, 0)] = 1; img[idx(7, 0)] = 1; img[idx(0, 7)] = 1; img[idx(7, 7)] = 1;
    present(img, "four corners");
    img = '0; for (int x = 2; x < 5; x++) for (int y = 2; y < 5; y++) img[idx(x, y)] = 1;
    present(img, "3x3 square");
    img = '0; for (int x = 1; x < 7; x++) img[idx(x, 1)] = 1; for (int y = 2; y < 7; y++) img[idx(3, y)] = 1;
    present(img, "T shape");
    for (int t = 0; t < 30; t++) begin
      // Each pixel active with probability 1/8.
      img = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
      present(img, $sformatf("random %0d", t));
    end
    $display("images with symmetry points: %0d of 35", n_nonempty);
    run = 1'b0;
    repeat (3 * PERIOD) @(negedge clk);
    check(n_results == 35, $sformatf("%0d results for 35 images", n_results));
    check(n_nonempty > 20, "symmetry points were found");
    check(n_hier > 10, "symmetry points of symmetry points were found");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
