// delay_line: one neuron-to-neuron connection, a single-bit shift register of LEN stages.
//
// A spike presented on in appears on out exactly LEN clock cycles later; spikes closer together
// than LEN cycles are all carried, one per stage. The paper represents connection delay this way
// in its FPGA build, with LEN proportional to the distance between the connected points. The
// register is cleared by reset.
module delay_line #(
  parameter int unsigned LEN = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in,
  output logic out
);
  logic [LEN-1:0] sr;

  generate
    if (LEN == 1) begin : g_one
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) sr <= '0;
        else        sr <= in;
      end
    end else begin : g_many
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) sr <= '0;
        else        sr <= {sr[LEN-2:0], in};
      end
    end
  endgenerate

  assign out = sr[LEN-1];

  initial assert (LEN >= 1) else $error("delay_line: LEN must be at least 1");
endmodule
