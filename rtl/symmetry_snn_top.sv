// symmetry_snn_top: 8x8 leaky integrate-and-fire mirror-symmetry detector (Manhattan metric).
//
// A binary (thresholded) 8x8 image is presented to the input layer. Once per symmetry period of
// 18 cycles all active input neurons fire together. Each spike travels to every one of the 64
// output neurons through its own shift register, whose length grows with the Manhattan distance
// between the two points (4096 shift registers, 2 to 16 stages). An output neuron fires when
// enough spikes arrive in the same cycle to lift its leaky accumulator over the threshold: it is
// a coincidence detector, and coincident spikes come from inputs equidistant from it, i.e. the
// output neuron lies on a line or point of mirror symmetry of the input. The fire array shows the
// coincidences as they happen, the accumulator array the raw integration; symmetry_map ORs the
// fires of each operation into trace and delivers the finished symmetry map on map / map_valid.
//
// Above the output layer a synchronization layer stores the fire pulses of a period and releases
// them together on the period's timing pulse: to a higher coincidence layer, which finds the
// symmetry points of the symmetry points (hi_fire, hi_acc), and, when the feedback bit is set,
// back into the input layer, so that the next period sees the data plus the symmetry points found
// so far. The higher layer works on the previous operation's result, one period behind the output
// layer, and shares its threshold and leak.
//
// Interface: pixels is sampled on each period's tick; that image's map arrives with map_valid
// 20 cycles later, and a new image can be taken every 18 cycles. Configuration is written through cfg_we,
// cfg_addr, cfg_wdata (see lif_config). fire, acc and sync_spikes are register outputs.
// Timing: input spikes enter the connection delays in phase 0; an output neuron at Manhattan
// distance d from two coincident inputs fires in phase d + 4, at most 18 (phase 0 of the next
// period) for d = 14. The 8x8 size, Manhattan metric, 16-stage maximum, two-stage accumulation and
// 18-cycle period follow the paper's FPGA implementation; the synchronization layer, the higher
// layer and feedback follow its description of layering; widths, reset values and the register map are this
// design's own.
module symmetry_snn_top
  import sym_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     run,
  input  logic [PIX_W-1:0]         pixels [NUM_NEURONS],
  input  logic                     cfg_we,
  input  cfg_addr_e                cfg_addr,
  input  logic [7:0]               cfg_wdata,
  output logic [7:0]               cfg_rdata,
  output logic                     active,
  output logic                     tick,
  output logic [$clog2(PERIOD)-1:0] phase,
  output logic [NUM_NEURONS-1:0]   in_spikes,
  output logic [NUM_NEURONS-1:0]   fire,
  output logic [ACC_W-1:0]         acc [NUM_NEURONS],
  output logic [NUM_NEURONS-1:0]   sync_spikes,
  output logic [NUM_NEURONS-1:0]   trace,
  output logic [NUM_NEURONS-1:0]   map,
  output logic                     map_valid,
  output logic [NUM_NEURONS-1:0]   hi_fire,
  output logic [ACC_W-1:0]         hi_acc [NUM_NEURONS]
);
  cfg_t                   cfg;

  lif_config u_cfg (
    .clk  (clk),
    .rst_n(rst_n),
    .we   (cfg_we),
    .addr (cfg_addr),
    .wdata(cfg_wdata),
    .rdata(cfg_rdata),
    .cfg  (cfg)
  );

  period_timer #(.PERIOD(PERIOD)) u_timer (
    .clk   (clk),
    .rst_n (rst_n),
    .run   (run),
    .active(active),
    .tick  (tick),
    .phase (phase)
  );

  input_layer #(.N(NUM_NEURONS), .PIX_W(PIX_W)) u_input (
    .clk        (clk),
    .rst_n      (rst_n),
    .load       (tick),
    .pixels     (pixels),
    .pix_thr    (cfg.pix_thr),
    .feedback_en(cfg.feedback_en),
    .feedback   (sync_spikes),
    .spikes     (in_spikes)
  );

  // Output layer: coincidence detection on the input spikes.
  coincidence_layer #(.GRID(GRID), .SCALE(DELAY_SCALE), .OFFSET(DELAY_OFFSET), .ACC_W(ACC_W)) u_output (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_spikes(in_spikes),
    .leak     (cfg.leak),
    .threshold(cfg.threshold),
    .acc      (acc),
    .fire     (fire)
  );

  // Higher layer: coincidence detection on the synchronized output spikes.
  coincidence_layer #(.GRID(GRID), .SCALE(DELAY_SCALE), .OFFSET(DELAY_OFFSET), .ACC_W(ACC_W)) u_higher (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_spikes(sync_spikes),
    .leak     (cfg.leak),
    .threshold(cfg.threshold),
    .acc      (hi_acc),
    .fire     (hi_fire)
  );

  symmetry_map #(.N(NUM_NEURONS), .DONE_DELAY(PERIOD + 1)) u_map (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (tick),
    .fire     (fire),
    .trace    (trace),
    .map      (map),
    .map_valid(map_valid)
  );

  sync_layer #(.N(NUM_NEURONS)) u_sync (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_spikes (fire),
    .timing    (tick),
    .out_spikes(sync_spikes)
  );
endmodule
