// tb_payload_reset_gen: checks the FPGA reset timing.
// After power-on reset is released, fpga_reset must stay high for
// RESET_CYCLES+1 clock edges; a request must raise it three clocks later
// and hold it exactly RESET_CYCLES clocks; a second request during a
// running reset restarts the count.
module tb_payload_reset_gen;
  localparam int unsigned RC = 50;
  logic clk = 0, por_n = 0, reset_req = 0, fpga_reset;
  int checks = 0, failures = 0;

  payload_reset_gen #(.RESET_CYCLES(RC)) dut (.*);

  always #20 clk = ~clk;

  task automatic chk(string name, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0d expected %0d", name, got, exp);
    end
  endtask

  // count clock edges until fpga_reset equals v
  task automatic edges_until(logic v, output int n);
    n = 0;
    while (fpga_reset !== v && n < 10000) begin
      @(posedge clk); #1; n++;
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    #5;
    chk("reset during por", fpga_reset, 1);
    repeat (3) @(posedge clk);
    #1 por_n = 1;
    edges_until(1'b0, n);
    chk("por release length", n, RC + 1);
    repeat (10) @(posedge clk);
    #1;
    chk("idle", fpga_reset, 0);
    // single request
    reset_req = 1;
    edges_until(1'b1, n);
    chk("request latency", n, 3);
    reset_req = 0;
    edges_until(1'b0, n);
    chk("request length", n, RC);
    // restart during a running reset
    repeat (5) @(posedge clk);
    #1 reset_req = 1;
    edges_until(1'b1, n);
    reset_req = 0;
    repeat (20) @(posedge clk);
    #1 reset_req = 1;
    repeat (3) @(posedge clk);
    #1 reset_req = 0;
    edges_until(1'b0, n);
    chk("restart length", n, RC);
    chk("after restart", fpga_reset, 0);
    // held request gives a single pulse
    reset_req = 1;
    edges_until(1'b1, n);
    edges_until(1'b0, n);
    chk("held request length", n, RC);
    repeat (2 * RC) @(posedge clk);
    #1 chk("held request no repeat", fpga_reset, 0);
    reset_req = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
