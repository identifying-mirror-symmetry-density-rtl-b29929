// lif_neuron_tb: checks the output LIF neuron against a cycle model written in the testbench.
// Directed part: with leak 1 and threshold 0 two coincident spikes fire the neuron exactly two
// cycles later, two spikes one cycle apart do not. Random part: sparse random spike vectors,
// random leak and threshold, acc and fire compared every cycle.
module lif_neuron_tb;
  localparam int unsigned NI = sym_pkg::NUM_NEURONS;
  localparam int unsigned AW = sym_pkg::ACC_W;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NI-1:0] in_spikes = '0;
  logic [AW-1:0] leak = AW'(1), threshold = AW'(0);
  logic [AW-1:0] acc;
  logic fire;
  int checks = 0, failures = 0;
  int m_acc, m_fire, m_stage, m_sum;

  lif_neuron dut (.clk, .rst_n, .in_spikes, .leak, .threshold, .acc, .fire);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Reference model: a spike count seen in one cycle is integrated one cycle later.
  task automatic model_step(input int count);
    m_sum = m_acc + m_stage - int'(leak);
    if (m_sum < 0) m_sum = 0;
    if (m_sum > (1 << AW) - 1) m_sum = (1 << AW) - 1;
    if (m_sum > int'(threshold)) begin m_acc = 0; m_fire = 1; end
    else begin m_acc = m_sum; m_fire = 0; end
    m_stage = count;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1;
    // Coincident pair.
    in_spikes = '0; in_spikes[3] = 1'b1; in_spikes[60] = 1'b1;
    @(posedge clk); #1 in_spikes = '0;
    check(!fire, "no fire after one cycle");
    @(posedge clk); #1;
    check(fire && acc == 0, "coincident pair fires at latency 2");
    @(posedge clk); #1;
    check(!fire, "fire lasts one cycle");
    repeat (3) @(posedge clk);
    // Pair one cycle apart.
    in_spikes = '0; in_spikes[5] = 1'b1;
    @(posedge clk); #1 in_spikes = '0; in_spikes[40] = 1'b1;
    @(posedge clk); #1 in_spikes = '0;
    repeat (4) begin @(posedge clk); #1 check(!fire, "staggered pair does not fire"); end
    // Single spike never fires.
    in_spikes = '0; in_spikes[10] = 1'b1;
    @(posedge clk); #1 in_spikes = '0;
    repeat (4) begin @(posedge clk); #1 check(!fire, "single spike does not fire"); end
    // Random comparison against the model.
    repeat (4) @(posedge clk);
    #1;
    m_acc = int'(acc); m_fire = 0; m_stage = 0;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      if (cyc % 200 == 0) begin
        leak      = AW'($urandom % 4);
        threshold = AW'($urandom % 40);
      end
      for (int k = 0; k < NI; k++) in_spikes[k] = ($urandom % 16) == 0;
      model_step($countones(in_spikes));
      @(posedge clk); #1;
      check(int'(acc) == m_acc && int'(fire) == m_fire,
            $sformatf("cycle %0d acc %0d/%0d fire %0d/%0d", cyc, acc, m_acc, fire, m_fire));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
