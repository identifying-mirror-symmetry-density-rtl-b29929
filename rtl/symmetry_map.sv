// symmetry_map: collects the output spikes of one symmetry operation into a result map.
//
// The output neurons of one operation fire at different times, from 4 to 18 cycles after the
// input spikes, according to their distance from the coincident inputs. The trace register array
// ORs every fire bit as it appears, so during an operation it shows the symmetry line being traced
// out point by point. It is cleared in the cycle in which the operation's input spikes enter the
// delays (no output can fire yet) and when an operation ends. At that point the completed trace
// is copied to map, and map_valid pulses for one cycle. map then holds the operation's symmetry
// map until the next one completes.
//
// Timing: start is the period tick on which the input layer samples an image. The image's last
// possible fire (corner to corner, 18 cycles after the input spikes) is visible DONE_DELAY = 19
// cycles after start. map and map_valid change on the clock edge that ends that cycle, and map
// includes that last fire. Operations can follow each other every PERIOD cycles. A shift register
// of start pulses tracks the operations in flight, so a result is still delivered after run is
// dropped.
//
// Follows the paper: a single-bit register per output neuron set by firing (the "threshold
// register array" whose evolution over the 18-cycle period traces the line between two points).
// This design's choices: the separate trace and map registers, the clear at the end of each
// operation and the DONE_DELAY alignment.
module symmetry_map #(
  parameter int unsigned N          = sym_pkg::NUM_NEURONS,
  parameter int unsigned DONE_DELAY = sym_pkg::PERIOD + 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] fire,
  output logic [N-1:0] trace,
  output logic [N-1:0] map,
  output logic         map_valid
);
  logic [DONE_DELAY-1:0] inflight;
  logic                  done;

  assign done = inflight[DONE_DELAY-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inflight  <= '0;
      trace     <= '0;
      map       <= '0;
      map_valid <= 1'b0;
    end else begin
      inflight  <= {inflight[DONE_DELAY-2:0], start};
      map_valid <= done;
      if (done) map <= trace | fire;
      // An operation's fires start after its input spikes (the cycle after inflight[0]).
      if (done || inflight[0]) trace <= '0;
      else                     trace <= trace | fire;
    end
  end

  initial assert (DONE_DELAY >= 2) else $error("symmetry_map: DONE_DELAY must be at least 2");
endmodule
