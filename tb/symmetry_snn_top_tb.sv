// symmetry_snn_top_tb: end-to-end test of the 8x8 symmetry detector at its default size.
//
// A cycle model in this testbench follows every spike the input layer emits through a connection
// of Manhattan length + 2 and through the two-stage leaky accumulator of each output neuron; acc
// and fire of all 64 neurons are compared with it every cycle. The same model, fed with the
// synchronized spikes, checks the higher layer (hi_acc, hi_fire). The input layer is checked against
// the pixels, the threshold and the feedback path, and the synchronization layer against the set
// of output spikes of each period. Directed parts check:
//   - the latency of 4 + Manhattan distance cycles, 18 for the corner-to-corner connection,
//     with the neuron set to fire on single spikes;
//   - one symmetry result per 18-cycle period;
//   - that two points in one column light exactly the row halfway between them (the mirror line);
//   - one result map per operation, equal to the OR of its fires, 20 cycles after its tick;
//   - feedback of the symmetry line into the input layer, accumulator saturation, leak to zero,
//     stopping and restarting.
// Each mechanism is counted, and one that never happened counts as a failure.
module symmetry_snn_top_tb;
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
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t %s", $time, what);
    end
  endtask

  // Shadow of the configuration registers, as written.
  int sh_thr = 0, sh_leak = 1, sh_pix = 0, sh_fb = 0;
  task automatic cfg_write(input cfg_addr_e a, input int d);
    cfg_addr = a; cfg_wdata = 8'(d); cfg_we = 1'b1;
    @(posedge clk); #1 cfg_we = 1'b0;
    case (a)
      CFG_THRESHOLD: sh_thr  = d;
      CFG_LEAK:      sh_leak = d;
      CFG_PIX_THR:   sh_pix  = d;
      CFG_CONTROL:   sh_fb   = d & 1;
      default: ;
    endcase
    cfg_addr = a; #1 check(int'(cfg_rdata) == (a == CFG_CONTROL ? (d & 1) : d), "config read-back");
  endtask

  // ---------------- reference model, evaluated at each falling edge ----------------
  function automatic int mdist(int o, int i);
    int dx, dy;
    dx = (o % G) - (i % G); if (dx < 0) dx = -dx;
    dy = (o / G) - (i / G); if (dy < 0) dy = -dy;
    return dx + dy;
  endfunction

  localparam int H = 32;              // history depth, more than the longest connection
  // Layer 0 is the output layer (input: in_spikes), layer 1 the higher layer (input: sync_spikes).
  logic [N-1:0] hist [2][H];          // hist[l][t % H]: input spikes of layer l in cycle t
  int cyc = 0;
  int m_acc [2][N], m_stage [2][N], m_prev_stage [2][N];
  int p_thr, p_leak;                  // configuration visible in the previous cycle
  bit model_on = 0;
  logic [N-1:0] m_fire [2];
  // Synchronization-layer model.
  logic [N-1:0] stored;
  int age [N];
  bit prev_tick = 0, prev_fb = 0;
  logic [N-1:0] expect_pix;
  // Mechanism counters.
  logic [N-1:0] fire_hist [int];
  int tick_q [$];
  int n_maps = 0;
  int n_hi_fire = 0;
  int n_fire = 0, n_rejected = 0, n_sync = 0, n_feedback = 0, n_sat = 0, n_floor = 0, n_periods = 0;

  always @(negedge clk) begin
    if (!rst_n) begin
      for (int l = 0; l < 2; l++) begin
        for (int k = 0; k < H; k++) hist[l][k] = '0;
        for (int o = 0; o < N; o++) begin m_acc[l][o] = 0; m_stage[l][o] = 0; m_prev_stage[l][o] = 0; end
      end
      for (int o = 0; o < N; o++) age[o] = 0;
      stored = '0; cyc = 0; p_thr = sh_thr; p_leak = sh_leak;
    end else begin
      cyc++;
      hist[0][cyc % H] = in_spikes;
      hist[1][cyc % H] = sync_spikes;
      for (int l = 0; l < 2; l++) begin
        for (int o = 0; o < N; o++) begin
          int arrivals, sum;
          arrivals = 0;
          for (int i = 0; i < N; i++)
            if (cyc - (mdist(o, i) + 2) >= 0 && hist[l][(cyc - mdist(o, i) - 2) % H][i]) arrivals++;
          // The accumulator integrates the arrivals of two cycles ago (registered partial sums).
          sum = m_acc[l][o] + m_prev_stage[l][o] - p_leak;
          if (sum < 0) begin sum = 0; if (l == 0 && m_acc[l][o] + m_prev_stage[l][o] > 0) n_floor++; end
          if (sum > 255) begin sum = 255; if (l == 0) n_sat++; end
          if (sum > p_thr) begin m_acc[l][o] = 0; m_fire[l][o] = 1'b1; end
          else begin
            m_acc[l][o] = sum; m_fire[l][o] = 1'b0;
            if (l == 0 && m_prev_stage[l][o] > 0) n_rejected++;
          end
          // Arrivals of this cycle are added up in the next cycle and integrated in the one after.
          m_prev_stage[l][o] = m_stage[l][o];
          m_stage[l][o] = arrivals;
        end
      end
      for (int o = 0; o < N; o++) begin
        check(int'(acc[o]) == m_acc[0][o], $sformatf("acc[%0d]=%0d model %0d", o, acc[o], m_acc[0][o]));
        check(fire[o] == m_fire[0][o], $sformatf("fire[%0d]=%0d model %0d", o, fire[o], m_fire[0][o]));
        check(int'(hi_acc[o]) == m_acc[1][o], $sformatf("hi_acc[%0d]=%0d model %0d", o, hi_acc[o], m_acc[1][o]));
        check(hi_fire[o] == m_fire[1][o], $sformatf("hi_fire[%0d]=%0d model %0d", o, hi_fire[o], m_fire[1][o]));
      end
      n_hi_fire += $countones(hi_fire);
      n_fire += $countones(fire);
      // Input layer: the spike pattern after a tick is the thresholded image plus feedback.
      for (int k = 0; k < N; k++) expect_pix[k] = int'(pixels[k]) > sh_pix;
      if (prev_tick)
        check(in_spikes == (expect_pix | (prev_fb ? sync_spikes : '0)), "input spikes after tick");
      else
        check(in_spikes == (prev_fb ? sync_spikes : '0), "input spikes between ticks");
      if (prev_tick && prev_fb) n_feedback += $countones(sync_spikes & ~expect_pix);
      // Synchronization layer: releases, after the tick, every fire since the previous tick.
      if (prev_tick) begin
        logic [N-1:0] must, may;
        must = '0; may = '0;
        for (int k = 0; k < N; k++) begin
          if (stored[k] && age[k] <= 24) must[k] = 1'b1;
          if (stored[k] && age[k] <= 40) may[k] = 1'b1;
        end
        check((sync_spikes & ~may) == '0 && (must & ~sync_spikes) == '0, "sync release");
        if (sync_spikes != '0) n_sync++;
        stored = '0;
      end else begin
        check(sync_spikes == '0, "sync layer quiet between ticks");
      end
      for (int k = 0; k < N; k++) begin
        if (fire[k]) begin stored[k] = 1'b1; age[k] = 0; end
        else if (stored[k]) age[k]++;
      end
      // Result map: OR of the fires of cycles tick+2 .. tick+19, delivered at tick+20.
      fire_hist[cyc] = fire;
      if (map_valid) begin
        logic [N-1:0] want;
        want = '0;
        if (tick_q.size() > 0) begin
          check(cyc - tick_q[0] == PERIOD + 2, "map_valid 20 cycles after the tick");
          for (int t = tick_q[0] + 2; t <= tick_q[0] + PERIOD + 1; t++) want |= fire_hist[t];
          void'(tick_q.pop_front());
        end else check(0, "map_valid without an operation");
        check(map == want, "result map");
        n_maps++;
      end
      if (tick) begin n_periods++; tick_q.push_back(cyc); end
      prev_tick = tick;
      prev_fb = (sh_fb != 0);
      p_thr = sh_thr; p_leak = sh_leak;
    end
  end

  // ---------------- stimulus ----------------
  task automatic clear_image();
    for (int k = 0; k < N; k++) pixels[k] = '0;
  endtask
  task automatic set_point(input int x, input int y);
    pixels[y * G + x] = 8'd200;
  endtask
  task automatic idle(input int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int t0, first_fire [N];
  logic [N-1:0] lit;
  initial begin
    clear_image();
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    idle(2);

    // 1. Latency: one point at (0,0), neuron fires on any single spike (threshold 0, leak 0).
    cfg_write(CFG_LEAK, 0);
    set_point(0, 0);
    for (int o = 0; o < N; o++) first_fire[o] = -1;
    run = 1'b1;
    @(posedge clk); #1 run = 1'b0;          // exactly one period
    t0 = -1;
    for (int t = 0; t < 3 * PERIOD; t++) begin
      @(negedge clk);
      if (in_spikes[0] && t0 < 0) t0 = t;
      for (int o = 0; o < N; o++) if (fire[o] && first_fire[o] < 0) first_fire[o] = t;
    end
    for (int o = 0; o < N; o++)
      check(t0 >= 0 && first_fire[o] - t0 == mdist(o, 0) + 4,
            $sformatf("latency to neuron %0d: %0d, expected %0d", o, first_fire[o] - t0, mdist(o, 0) + 4));
    check(first_fire[N - 1] - t0 == 18, "corner-to-corner latency is 18 cycles");
    clear_image();
    idle(60);

    // 2. Coincidence detection of a mirror line: points (7,0) and (7,6); the equidistant
    //    points are row 3. Run 4 periods and check the period and the lit set.
    cfg_write(CFG_LEAK, 1);
    cfg_write(CFG_THRESHOLD, 0);
    set_point(7, 0); set_point(7, 6);
    lit = '0;
    run = 1'b1;
    begin
      int ticks_seen, last_tick_t;
      ticks_seen = 0; last_tick_t = -1;
      for (int t = 0; t < 4 * PERIOD; t++) begin
        @(negedge clk);
        lit |= fire;
        if (tick) begin
          if (last_tick_t >= 0) check(t - last_tick_t == PERIOD, "one symmetry operation per 18 cycles");
          last_tick_t = t; ticks_seen++;
        end
      end
      check(ticks_seen == 4, $sformatf("%0d ticks in 4 periods", ticks_seen));
    end
    for (int o = 0; o < N; o++)
      check(lit[o] == (o / G == 3), $sformatf("mirror line: neuron (%0d,%0d) lit=%0d", o % G, o / G, lit[o]));

    // 3. Feedback: the symmetry line is fed back and becomes input in the next periods.
    cfg_write(CFG_CONTROL, 1);
    idle(6 * PERIOD);
    cfg_write(CFG_CONTROL, 0);
    run = 1'b0;
    idle(80);

    // 4. Saturation and leak: whole image, no leak, threshold at the top.
    cfg_write(CFG_THRESHOLD, 255);
    cfg_write(CFG_LEAK, 0);
    for (int k = 0; k < N; k++) pixels[k] = 8'd255;
    run = 1'b1;
    idle(8 * PERIOD);
    run = 1'b0;
    clear_image();
    cfg_write(CFG_LEAK, 9);                 // drain the accumulators through the floor at 0
    idle(60);

    // 5. Random images, thresholds and leaks, feedback on and off.
    for (int trial = 0; trial < 12; trial++) begin
      cfg_write(CFG_PIX_THR, $urandom % 256);
      cfg_write(CFG_THRESHOLD, $urandom % 4);
      cfg_write(CFG_LEAK, 1 + $urandom % 3);
      cfg_write(CFG_CONTROL, trial % 2);
      for (int k = 0; k < N; k++) pixels[k] = (($urandom % 6) == 0) ? 8'($urandom) : 8'd0;
      run = 1'b1;
      idle((2 + $urandom % 4) * PERIOD + $urandom % PERIOD);
      if (trial % 3 == 2) begin run = 1'b0; idle(50); end
    end
    run = 1'b0;
    idle(60);

    check(n_maps == n_periods, $sformatf("%0d result maps for %0d periods", n_maps, n_periods));
    $display("higher-layer fires=%0d", n_hi_fire);
    $display("mechanisms: periods=%0d fires=%0d rejected=%0d sync_releases=%0d feedback_spikes=%0d saturations=%0d leak_floors=%0d",
             n_periods, n_fire, n_rejected, n_sync, n_feedback, n_sat, n_floor);
    check(n_periods > 0,  "periods happened");
    check(n_fire > 0,     "output neurons fired");
    check(n_hi_fire > 0,  "higher-layer neurons fired");
    check(n_rejected > 0, "non-coincident spikes were rejected");
    check(n_sync > 0,     "synchronization layer released spikes");
    check(n_feedback > 0, "feedback spikes entered the input layer");
    check(n_sat > 0,      "an accumulator saturated");
    check(n_floor > 0,    "the leak floored an accumulator at zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
