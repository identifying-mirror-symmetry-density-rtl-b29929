// lif_config_tb: checks reset values, writes and read-back of the configuration registers.
module lif_config_tb;
  import sym_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  cfg_addr_e addr = CFG_THRESHOLD;
  logic [7:0] wdata = '0, rdata;
  cfg_t cfg;
  int checks = 0, failures = 0;
  logic [7:0] v [4];

  lif_config dut (.clk, .rst_n, .we, .addr, .wdata, .rdata, .cfg);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic write(input cfg_addr_e a, input logic [7:0] d);
    addr = a; wdata = d; we = 1'b1;
    @(posedge clk); #1 we = 1'b0;
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1;
    #1;
    check(cfg.threshold == 0 && cfg.leak == 1 && cfg.pix_thr == 0 && !cfg.feedback_en, "reset values");
    for (int trial = 0; trial < 20; trial++) begin
      for (int a = 0; a < 4; a++) v[a] = 8'($urandom);
      write(CFG_THRESHOLD, v[0]);
      write(CFG_LEAK, v[1]);
      write(CFG_PIX_THR, v[2]);
      write(CFG_CONTROL, v[3]);
      check(cfg.threshold == v[0], "threshold field");
      check(cfg.leak == v[1], "leak field");
      check(cfg.pix_thr == v[2], "pixel threshold field");
      check(cfg.feedback_en == v[3][0], "feedback bit");
      addr = CFG_THRESHOLD; #1 check(rdata == v[0], "read threshold");
      addr = CFG_LEAK;      #1 check(rdata == v[1], "read leak");
      addr = CFG_PIX_THR;   #1 check(rdata == v[2], "read pixel threshold");
      addr = CFG_CONTROL;   #1 check(rdata == {7'd0, v[3][0]}, "read control");
      // A cycle without we changes nothing.
      wdata = ~v[0]; addr = CFG_THRESHOLD;
      @(posedge clk); #1 check(cfg.threshold == v[0], "no write without we");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
