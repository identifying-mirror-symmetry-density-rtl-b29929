// delay_matrix: the all-to-all connection between the input and output layers.
//
// Every input neuron i (GRID x GRID of them) drives every output neuron o through its own
// delay_line. The line's length is DELAY_SCALE * manhattan(o, i) + DELAY_OFFSET stages, so with
// the defaults (8x8, scale 1, offset 2) there are 4096 shift registers of 2 to 16 stages, as in
// the paper's FPGA build. If all active inputs fire in the same cycle, the spikes from inputs at
// equal distance from an output reach it in the same cycle: that coincidence is what the output
// neurons detect.
//
// Interface: in_spikes[i] is input neuron i; delayed[o][i] is the spike from input i as it
// arrives at output o. There is no other logic; each bit of delayed is a register output.
module delay_matrix #(
  parameter int unsigned GRID   = sym_pkg::GRID,
  parameter int unsigned SCALE  = sym_pkg::DELAY_SCALE,
  parameter int unsigned OFFSET = sym_pkg::DELAY_OFFSET
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [GRID*GRID-1:0] in_spikes,
  output logic [GRID*GRID-1:0] delayed [GRID*GRID]
);
  localparam int unsigned N = GRID * GRID;

  for (genvar o = 0; o < N; o++) begin : g_out
    for (genvar i = 0; i < N; i++) begin : g_in
      delay_line #(
        .LEN(sym_pkg::conn_delay(o, i, GRID, SCALE, OFFSET))
      ) u_line (
        .clk  (clk),
        .rst_n(rst_n),
        .in   (in_spikes[i]),
        .out  (delayed[o][i])
      );
    end
  end

  initial assert (SCALE + OFFSET >= 1) else $error("delay_matrix: zero-length connection");
endmodule
