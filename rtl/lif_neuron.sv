// lif_neuron: one leaky integrate-and-fire output neuron, a digital leaky accumulator.
//
// Stage 1 (the first adder stage) counts the spikes arriving on the NUM_IN inputs in groups of
// GROUP and registers the NUM_IN/GROUP partial counts. Stage 2 adds the partial counts to the
// accumulation register and subtracts the leak:
//     sum = acc + sum(partials) - leak        (floored at 0, saturated at 2**ACC_W - 1)
// If sum exceeds threshold the neuron fires: the accumulator is cleared and the single-bit fire
// register is set for one cycle. Otherwise sum is stored and fire is 0.
//
// Timing: spikes on in_spikes in cycle t reach acc and fire in cycle t+2 (the paper's
// accumulation time of 2). With unit spikes, leak = 1 and threshold = 0 the neuron fires only when
// at least two spikes arrive in the same cycle: it is then a coincidence detector.
//
// Follows the paper: two-stage adder, accumulation register, configurable constant leak, threshold
// compare, clearing on firing, single-bit fire register. This design's choices: spikes weigh 1,
// the grouping of the adder, the floor at 0, saturation and "exceeds" as strictly greater.
module lif_neuron #(
  parameter int unsigned NUM_IN = sym_pkg::NUM_NEURONS,
  parameter int unsigned GROUP  = 8,
  parameter int unsigned ACC_W  = sym_pkg::ACC_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NUM_IN-1:0] in_spikes,
  input  logic [ACC_W-1:0]  leak,
  input  logic [ACC_W-1:0]  threshold,
  output logic [ACC_W-1:0]  acc,
  output logic              fire
);
  localparam int unsigned NG   = (NUM_IN + GROUP - 1) / GROUP;  // number of partial counts
  localparam int unsigned PC_W = $clog2(GROUP + 1);             // width of one partial count
  localparam int unsigned SW   = ACC_W + $clog2(NUM_IN + 1) + 1; // width of the stage-2 sum
  localparam logic [SW-1:0] ACC_MAX = SW'({ACC_W{1'b1}});

  logic [PC_W-1:0] partial_q [NG];
  logic [PC_W-1:0] partial_d [NG];
  logic [SW-1:0]   total, raw, sum;

  // Stage 1: population count of each input group.
  always_comb begin
    for (int g = 0; g < NG; g++) begin
      partial_d[g] = '0;
      for (int k = 0; k < GROUP; k++) begin
        if (g * GROUP + k < NUM_IN) partial_d[g] = partial_d[g] + PC_W'(in_spikes[g * GROUP + k]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < NG; g++) partial_q[g] <= '0;
    end else begin
      partial_q <= partial_d;
    end
  end

  // Stage 2: accumulate, leak, threshold.
  always_comb begin
    total = '0;
    for (int g = 0; g < NG; g++) total = total + SW'(partial_q[g]);
    raw = SW'(acc) + total;
    sum = (raw > SW'(leak)) ? raw - SW'(leak) : '0;
    if (sum > ACC_MAX) sum = ACC_MAX;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      fire <= 1'b0;
    end else if (sum > SW'(threshold)) begin
      acc  <= '0;
      fire <= 1'b1;
    end else begin
      acc  <= sum[ACC_W-1:0];
      fire <= 1'b0;
    end
  end
endmodule
