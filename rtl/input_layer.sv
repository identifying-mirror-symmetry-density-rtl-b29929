// input_layer: the 8x8 array of input neurons.
//
// An input neuron is activated when its pixel value exceeds the activation threshold pix_thr
// (the thresholding way of rejecting noise). On each load pulse every activated neuron fires one
// spike, all in the same cycle, so that arrival times at the output layer depend only on the
// connection lengths. Each neuron also fires when a feedback spike from the synchronization
// layer arrives while feedback_en is high; the feedback spikes are already aligned to the same
// cycle, so they are ORed into the registered spikes.
//
// Timing: spikes is high for exactly the one cycle after load (phase 0 of the period), plus any
// cycle in which feedback_en & feedback is high. Synchronous firing, one pulse per period and
// feedback into the input layer follow the paper; the pixel width and the compare
// "pixel > pix_thr" are this design's choices.
module input_layer #(
  parameter int unsigned N     = sym_pkg::NUM_NEURONS,
  parameter int unsigned PIX_W = sym_pkg::PIX_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [PIX_W-1:0] pixels [N],
  input  logic [PIX_W-1:0] pix_thr,
  input  logic             feedback_en,
  input  logic [N-1:0]     feedback,
  output logic [N-1:0]     spikes
);
  logic [N-1:0] active;
  logic [N-1:0] spk_q;

  always_comb begin
    for (int k = 0; k < N; k++) active[k] = (pixels[k] > pix_thr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) spk_q <= '0;
    else        spk_q <= load ? active : '0;
  end

  assign spikes = spk_q | (feedback_en ? feedback : '0);
endmodule
