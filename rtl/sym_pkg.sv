// sym_pkg: constants, types and the delay rule shared by the spiking mirror-symmetry detector.
//
// The detector maps an 8x8 grid of input neurons onto an 8x8 grid of output neurons. Neuron
// index k (0..63) sits at column x = k % GRID and row y = k / GRID. The connection from input i
// to output o is a shift register whose length is the Manhattan distance between the two points
// plus a fixed offset, conn_delay(). With the offset of 2 the longest line (corner to opposite
// corner, distance 14) is 16 stages, and 16 stages plus the neuron's 2-stage accumulation give
// the 18-cycle symmetry period. The Manhattan metric, the 8x8 size, the 16-stage maximum and the
// 18-cycle period follow the paper; the offset of 2 is this design's reading of "length
// proportional to the Manhattan distance" with "maximum length of 16".
package sym_pkg;

  parameter int unsigned GRID         = 8;            // edge of the input and output arrays
  parameter int unsigned NUM_NEURONS  = GRID * GRID;  // 64 neurons per layer
  parameter int unsigned DELAY_OFFSET = 2;            // stages added to every connection
  parameter int unsigned DELAY_SCALE  = 1;            // stages per unit of Manhattan distance
  parameter int unsigned MAX_DELAY    = DELAY_SCALE * 2 * (GRID - 1) + DELAY_OFFSET;  // 16
  parameter int unsigned ACC_LATENCY  = 2;            // two-stage adder / accumulator
  parameter int unsigned PERIOD       = MAX_DELAY + ACC_LATENCY;                      // 18
  parameter int unsigned ACC_W        = 8;            // accumulation register width
  parameter int unsigned PIX_W        = 8;            // input pixel width

  // Configuration register addresses.
  typedef enum logic [1:0] {
    CFG_THRESHOLD = 2'd0,  // output neuron firing threshold
    CFG_LEAK      = 2'd1,  // leak subtracted from every accumulator each cycle
    CFG_PIX_THR   = 2'd2,  // input neuron activation threshold
    CFG_CONTROL   = 2'd3   // bit 0: feed the synchronization layer back to the input layer
  } cfg_addr_e;

  typedef struct packed {
    logic [ACC_W-1:0] threshold;
    logic [ACC_W-1:0] leak;
    logic [PIX_W-1:0] pix_thr;
    logic             feedback_en;
  } cfg_t;

  // Manhattan distance between grid points a and b (indices 0..grid*grid-1).
  function automatic int unsigned manhattan(int unsigned a, int unsigned b, int unsigned grid);
    int unsigned ax, ay, bx, by;
    ax = a % grid;  ay = a / grid;
    bx = b % grid;  by = b / grid;
    return ((ax > bx) ? ax - bx : bx - ax) + ((ay > by) ? ay - by : by - ay);
  endfunction

  // Shift-register length of the connection from input i to output o.
  function automatic int unsigned conn_delay(int unsigned o, int unsigned i, int unsigned grid,
                                             int unsigned scale, int unsigned offset);
    return scale * manhattan(o, i, grid) + offset;
  endfunction

endpackage
