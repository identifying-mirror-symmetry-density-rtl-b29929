// coincidence_layer: one symmetry-detecting layer, the delay matrix and its 64 output neurons.
//
// Spikes on in_spikes (all of one operation in the same cycle) travel through the all-to-all
// delay_matrix, Manhattan distance + 2 cycles from input i to output o, and each output neuron is
// a lif_neuron that integrates the arrivals with the shared leak and threshold. An output neuron
// fires when enough spikes, i.e. enough inputs at the same distance, arrive in one cycle.
//
// Timing: spikes in cycle t from inputs at distance d from output o reach its accumulator and fire
// register in cycle t + d + 4; the worst case (d = 14 on 8x8) is 18 cycles.
//
// The output layer of the detector is one of these; the higher layer above the synchronization
// layer is another, taking the synchronized spikes as its input. The structure (delay per
// distance, LIF output neurons) follows the paper; grouping it as a reusable layer is this
// design's own.
module coincidence_layer #(
  parameter int unsigned GRID   = sym_pkg::GRID,
  parameter int unsigned SCALE  = sym_pkg::DELAY_SCALE,
  parameter int unsigned OFFSET = sym_pkg::DELAY_OFFSET,
  parameter int unsigned ACC_W  = sym_pkg::ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [GRID*GRID-1:0] in_spikes,
  input  logic [ACC_W-1:0]     leak,
  input  logic [ACC_W-1:0]     threshold,
  output logic [ACC_W-1:0]     acc [GRID*GRID],
  output logic [GRID*GRID-1:0] fire
);
  localparam int unsigned N = GRID * GRID;

  logic [N-1:0] delayed [N];

  delay_matrix #(.GRID(GRID), .SCALE(SCALE), .OFFSET(OFFSET)) u_delays (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_spikes(in_spikes),
    .delayed  (delayed)
  );

  for (genvar o = 0; o < N; o++) begin : g_neuron
    lif_neuron #(.NUM_IN(N), .GROUP(GRID), .ACC_W(ACC_W)) u_neuron (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_spikes(delayed[o]),
      .leak     (leak),
      .threshold(threshold),
      .acc      (acc[o]),
      .fire     (fire[o])
    );
  end
endmodule
