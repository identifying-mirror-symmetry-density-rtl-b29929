// sync_layer: synchronization layer of slow-leaking LIF neurons above the output layer.
//
// Output spikes of a symmetry period leave the output layer at different times, depending on the
// distances involved, so they cannot drive another coincidence-detecting layer directly. Each
// synchronization neuron stores the spike of the output neuron below it as charge PULSE_W and
// leaks one unit every LEAK_INTERVAL cycles, much slower than the output layer. A timing pulse
// adds TIMING_W to every neuron; a neuron fires when its charge then exceeds THRESHOLD. With the
// defaults (4, 4, 4, 8) a stored spike survives 4*8 = 32 cycles, so every spike stored during a
// period is released together on the period's timing pulse, and a neuron holding nothing does not
// fire. The released spikes go to a higher layer and, through the input layer, back into the
// network as feedback.
//
// Timing: a spike on in_spikes or the timing pulse in cycle t gives out_spikes in cycle t+1, high
// for one cycle. A spike arriving in the same cycle as the timing pulse is released with it.
//
// Follows the paper: slower leak than the output layer, storage until a timing signal releases all
// stored spikes at once, output to a higher layer and back to the input layer. This design's
// choices: the weights and leak interval; a second spike does not add charge beyond PULSE_W (the
// neuron holds one bit); every neuron is emptied by the timing pulse, whether it fires or not.
module sync_layer #(
  parameter int unsigned N             = sym_pkg::NUM_NEURONS,
  parameter int unsigned PULSE_W       = 4,
  parameter int unsigned TIMING_W      = 4,
  parameter int unsigned THRESHOLD     = 4,
  parameter int unsigned LEAK_INTERVAL = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_spikes,
  input  logic         timing,
  output logic [N-1:0] out_spikes
);
  localparam int unsigned CW = $clog2(PULSE_W + TIMING_W + 1);
  localparam int unsigned LW = (LEAK_INTERVAL > 1) ? $clog2(LEAK_INTERVAL) : 1;

  logic [CW-1:0] charge [N];
  logic [CW-1:0] next   [N];
  logic [LW-1:0] leak_cnt;
  logic          leak_tick;

  assign leak_tick = (leak_cnt == LW'(LEAK_INTERVAL - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         leak_cnt <= '0;
    else if (leak_tick) leak_cnt <= '0;
    else                leak_cnt <= leak_cnt + 1'b1;
  end

  always_comb begin
    for (int k = 0; k < N; k++) begin
      next[k] = (leak_tick && charge[k] != '0) ? charge[k] - 1'b1 : charge[k];
      if (in_spikes[k] && next[k] < CW'(PULSE_W)) next[k] = CW'(PULSE_W);
      if (timing) next[k] = next[k] + CW'(TIMING_W);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N; k++) charge[k] <= '0;
      out_spikes <= '0;
    end else begin
      for (int k = 0; k < N; k++) begin
        out_spikes[k] <= (next[k] > CW'(THRESHOLD));
        charge[k]     <= (timing || next[k] > CW'(THRESHOLD)) ? '0 : next[k];
      end
    end
  end

  initial assert (PULSE_W <= THRESHOLD && TIMING_W <= THRESHOLD && PULSE_W + TIMING_W > THRESHOLD)
    else $error("sync_layer: weights must need both a stored spike and the timing pulse to fire");
endmodule
