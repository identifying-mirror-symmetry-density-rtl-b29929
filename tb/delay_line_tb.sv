// delay_line_tb: checks that a random spike train reappears exactly LEN cycles later, for the
// longest line of the default detector (16 stages) and for the one-stage special case.
module delay_line_tb;
  localparam int unsigned LEN = sym_pkg::MAX_DELAY;
  logic clk = 1'b0, rst_n = 1'b0, in_a = 1'b0, in_b = 1'b0, out_a, out_b;
  logic hist_a [$];
  logic hist_b [$];
  int checks = 0, failures = 0;

  delay_line #(.LEN(LEN)) dut_a (.clk, .rst_n, .in(in_a), .out(out_a));
  delay_line #(.LEN(1))   dut_b (.clk, .rst_n, .in(in_b), .out(out_b));

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
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1;
    #1 check(out_a == 1'b0 && out_b == 1'b0, "cleared by reset");
    for (int cyc = 0; cyc < 300; cyc++) begin
      in_a = ($urandom % 3) == 0;
      in_b = ($urandom % 2) == 0;
      hist_a.push_back(in_a);
      hist_b.push_back(in_b);
      @(posedge clk); #1;
      if (hist_a.size() >= LEN) begin
        check(out_a == hist_a[hist_a.size() - LEN], $sformatf("LEN=%0d cycle %0d", LEN, cyc));
      end else begin
        check(out_a == 1'b0, $sformatf("LEN=%0d empty cycle %0d", LEN, cyc));
      end
      check(out_b == hist_b[hist_b.size() - 1], $sformatf("LEN=1 cycle %0d", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
