// delay_matrix_tb: checks every one of the 4096 connection lengths of the default 8x8 matrix.
// For each input in turn a single spike is sent; the cycle in which it reaches each output must
// be |dx| + |dy| + 2 cycles later (Manhattan distance plus the offset), and no other bit may be
// set. A final check sends all inputs at once and counts the arrivals at each output.
module delay_matrix_tb;
  localparam int unsigned G = sym_pkg::GRID;
  localparam int unsigned N = G * G;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] in_spikes = '0;
  logic [N-1:0] delayed [N];
  int checks = 0, failures = 0;
  int arrived [N];
  int maxlen;

  delay_matrix dut (.clk, .rst_n, .in_spikes, .delayed);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int expected_delay(int o, int i);
    int dx, dy;
    dx = (o % G) - (i % G);
    dy = (o / G) - (i / G);
    if (dx < 0) dx = -dx;
    if (dy < 0) dy = -dy;
    return dx + dy + 2;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    maxlen = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1;
    for (int i = 0; i < N; i++) begin
      in_spikes = '0;
      in_spikes[i] = 1'b1;
      @(posedge clk); #1;
      in_spikes = '0;
      for (int o = 0; o < N; o++) arrived[o] = -1;
      for (int t = 1; t <= 20; t++) begin
        for (int o = 0; o < N; o++) begin
          for (int k = 0; k < N; k++) begin
            if (delayed[o][k] && k != i) begin
              failures++; $display("FAIL stray bit o=%0d k=%0d", o, k);
            end
          end
          if (delayed[o][i]) begin
            if (arrived[o] != -1) begin failures++; $display("FAIL double arrival o=%0d i=%0d", o, i); end
            arrived[o] = t;
          end
        end
        @(posedge clk); #1;
      end
      for (int o = 0; o < N; o++) begin
        check(arrived[o] == expected_delay(o, i),
              $sformatf("o=%0d i=%0d arrived %0d expected %0d", o, i, arrived[o], expected_delay(o, i)));
        if (arrived[o] > maxlen) maxlen = arrived[o];
      end
    end
    check(maxlen == 16, $sformatf("longest shift register %0d", maxlen));
    // All inputs together: output o must receive, t cycles later, one spike per input at
    // Manhattan distance t-2.
    in_spikes = '1;
    @(posedge clk); #1;
    in_spikes = '0;
    for (int t = 1; t <= 17; t++) begin
      for (int o = 0; o < N; o++) begin
        int n_exp;
        n_exp = 0;
        for (int i = 0; i < N; i++) if (expected_delay(o, i) == t) n_exp++;
        check($countones(delayed[o]) == n_exp, $sformatf("all-fire t=%0d o=%0d", t, o));
      end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
