// tb_fpga_cfg_model: testbench model of the FPGA's configuration pins.
// PROG_B low clears the device: INIT_B and DONE go low. After PROG_B rises,
// INIT_B rises CLEAR_CYCLES clocks later (memory cleared) and DONE rises
// LOAD_CYCLES clocks after that (bitstream loaded), unless crc_fail is set,
// in which case INIT_B falls again instead, as a 7-series device signals a
// CRC error. With hang set, INIT_B never rises. The model starts configured.
module tb_fpga_cfg_model #(
  parameter int CLEAR_CYCLES = 40,
  parameter int LOAD_CYCLES  = 200
) (
  input  logic clk,
  input  logic prog_b,
  input  logic crc_fail,
  input  logic hang,
  output logic init_b,
  output logic done
);
  int cnt = 0;
  initial begin init_b = 1'b1; done = 1'b1; end
  always @(posedge clk) begin
    if (!prog_b) begin
      init_b <= 1'b0; done <= 1'b0; cnt <= 0;
    end else if (!done && cnt >= 0) begin
      cnt <= cnt + 1;
      if (cnt == CLEAR_CYCLES && !hang) init_b <= 1'b1;
      if (cnt == CLEAR_CYCLES + LOAD_CYCLES) begin
        if (crc_fail) init_b <= 1'b0; else if (!hang) done <= 1'b1;
        cnt <= -1;
      end
    end
  end
endmodule
