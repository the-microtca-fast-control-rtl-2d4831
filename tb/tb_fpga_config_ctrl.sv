// tb_fpga_config_ctrl: checks firmware reload and boot-status reporting.
// A model of the FPGA's PROG_B/INIT_B/DONE behaviour answers the
// controller. Checked: the power-up report (DONE already high), PROG_B
// falling three clocks after the request and staying low exactly
// PROG_CYCLES clocks, a successful reload, a reload ending in a CRC error
// (INIT_B falls), a reload where INIT_B never rises (timeout), recovery by
// a new request, and DONE falling later.
module tb_fpga_config_ctrl;
  import ufc_pkg::*;
  localparam int unsigned PC = 25, TO = 500;
  logic clk = 0, rst_n = 0, reload_req = 0, init_b, done, prog_b;
  logic crc_fail = 0, hang = 0, force_low = 0;
  logic done_m;
  cfg_state_t state;
  logic busy, cfg_done, cfg_error;
  int checks = 0, failures = 0;

  assign done = done_m & ~force_low;

  fpga_config_ctrl #(.PROG_CYCLES(PC), .TIMEOUT_CYCLES(TO)) dut (
    .clk, .rst_n, .reload_req, .init_b, .done, .prog_b,
    .state, .busy, .cfg_done, .cfg_error);

  tb_fpga_cfg_model #(.CLEAR_CYCLES(30), .LOAD_CYCLES(120)) u_fpga (
    .clk, .prog_b, .crc_fail, .hang, .init_b, .done(done_m));

  always #20 clk = ~clk;

  task automatic chk(string name, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0d expected %0d", name, got, exp);
    end
  endtask

  task automatic wait_state(cfg_state_t s, int limit, output int n);
    n = 0;
    while (state != s && n < limit) begin @(posedge clk); #1; n++; end
  endtask

  task automatic request(output int lat, output int width);
    int n;
    reload_req = 1;
    n = 0;
    while (prog_b && n < 100) begin @(posedge clk); #1; n++; end
    lat = n;
    reload_req = 0;
    n = 0;
    while (!prog_b && n < 1000) begin @(posedge clk); #1; n++; end
    width = n;
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat, width, n;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    chk("prog_b idle", prog_b, 1);
    wait_state(CFG_DONE, 20, n);
    chk("power-up done", state, CFG_DONE);
    chk("cfg_done flag", cfg_done, 1);
    // successful reload
    request(lat, width);
    chk("prog latency", lat, 3);
    chk("prog width", width, PC);
    #1 chk("busy after prog", busy, 1);
    wait_state(CFG_LOADING, 100, n);
    chk("reaches loading", state, CFG_LOADING);
    wait_state(CFG_DONE, 400, n);
    chk("reload done", state, CFG_DONE);
    chk("busy clear", busy, 0);
    // CRC error
    crc_fail = 1;
    request(lat, width);
    chk("prog width 2", width, PC);
    wait_state(CFG_ERROR, 400, n);
    chk("crc error", state, CFG_ERROR);
    chk("error flag", cfg_error, 1);
    repeat (50) @(posedge clk);
    #1 chk("error sticky", state, CFG_ERROR);
    crc_fail = 0;
    // INIT_B never rises: timeout
    hang = 1;
    request(lat, width);
    wait_state(CFG_CLEARING, 10, n);
    chk("clearing", state, CFG_CLEARING);
    wait_state(CFG_ERROR, 2 * TO, n);
    chk("timeout error", state, CFG_ERROR);
    chk("timeout length", n, TO);
    hang = 0;
    // recovery
    request(lat, width);
    wait_state(CFG_DONE, 400, n);
    chk("recovered", state, CFG_DONE);
    // DONE lost
    force_low = 1;
    wait_state(CFG_IDLE, 10, n);
    chk("done lost", state, CFG_IDLE);
    force_low = 0;
    wait_state(CFG_DONE, 10, n);
    chk("done again", state, CFG_DONE);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
