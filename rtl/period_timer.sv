// period_timer: divides the clock into symmetry periods of PERIOD cycles.
//
// One symmetry operation takes PERIOD = 18 cycles: the longest connection (16 stages) plus the
// two accumulation stages of an output neuron. At 50 MHz this is about 2.8 million 8x8 symmetry
// operations per second. Both numbers are the paper's.
//
// While run is high the counter steps through phase PERIOD-1, 0, 1, ..., PERIOD-1, 0, ...
// tick is high in phase PERIOD-1. On that clock edge the input layer loads its spikes and the
// synchronization layer releases what it holds, so every input spike of a period is presented to
// the connection delays in phase 0. The first tick comes in the first cycle after run rises.
// When run is low the counter waits at PERIOD-1 and tick stays low. phase is meaningful only
// while active is high. Starting on run and the position of the tick are this design's choices.
module period_timer #(
  parameter int unsigned PERIOD = sym_pkg::PERIOD
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        run,
  output logic                        active,
  output logic                        tick,
  output logic [$clog2(PERIOD)-1:0]   phase
);
  localparam int unsigned PW = $clog2(PERIOD);
  localparam logic [PW-1:0] LAST = PW'(PERIOD - 1);

  logic [PW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= LAST;
      active <= 1'b0;
    end else if (!run) begin
      cnt    <= LAST;
      active <= 1'b0;
    end else begin
      active <= 1'b1;
      if (!active)          cnt <= LAST;  // first cycle of run: tick now
      else if (cnt == LAST) cnt <= '0;
      else                  cnt <= cnt + 1'b1;
    end
  end

  assign tick  = active && (cnt == LAST);
  assign phase = cnt;

  initial assert (PERIOD >= 2) else $error("period_timer: PERIOD must be at least 2");
endmodule
