// input_layer_tb: checks the input neuron array.
// Random pixel values and thresholds: a neuron must fire for exactly the one cycle after load,
// only if its pixel exceeds the threshold, and feedback spikes must pass only when enabled.
module input_layer_tb;
  localparam int unsigned N = sym_pkg::NUM_NEURONS;
  localparam int unsigned PW = sym_pkg::PIX_W;
  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, feedback_en = 1'b0;
  logic [PW-1:0] pixels [N];
  logic [PW-1:0] pix_thr = '0;
  logic [N-1:0] feedback = '0, spikes, expect_v;
  int checks = 0, failures = 0;

  input_layer dut (.clk, .rst_n, .load, .pixels, .pix_thr, .feedback_en, .feedback, .spikes);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < N; k++) pixels[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1;
    for (int trial = 0; trial < 40; trial++) begin
      for (int k = 0; k < N; k++) pixels[k] = PW'($urandom);
      pix_thr     = PW'($urandom);
      feedback    = {$urandom, $urandom};
      feedback_en = trial[0];
      for (int k = 0; k < N; k++) expect_v[k] = (int'(pixels[k]) > int'(pix_thr));
      // Idle cycle: only feedback may appear.
      load = 1'b0;
      @(posedge clk); #1;
      check(spikes == (feedback_en ? feedback : '0), $sformatf("trial %0d idle", trial));
      load = 1'b1;
      @(posedge clk); #1;
      load = 1'b0;
      check(spikes == (expect_v | (feedback_en ? feedback : '0)), $sformatf("trial %0d load", trial));
      feedback = '0;
      @(posedge clk); #1;
      check(spikes == '0, $sformatf("trial %0d one-cycle pulse", trial));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
