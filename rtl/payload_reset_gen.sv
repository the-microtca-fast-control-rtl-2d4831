// payload_reset_gen: the CPLD's reset output to the FPGA.
//
// fpga_reset (active high) is asserted while por_n is low, falls on the
// (RESET_CYCLES+1)-th rising clock edge after por_n rises, and is asserted
// again for RESET_CYCLES clocks after every rising edge of reset_req, the
// payload reset request of the module management controller (a request
// during a running reset restarts the count). The board provides a "reset" line from
// the CPLD to the FPGA and lists payload reset among the controller's
// tasks; polarity, length and trigger are this design's choices.
// Timing: reset_req is synchronised with two flip-flops, so fpga_reset
// rises three clocks after reset_req rises and falls exactly RESET_CYCLES
// clocks after it rose. The default, 2500 cycles, is 100 us at 25 MHz.
module payload_reset_gen #(
  parameter int unsigned RESET_CYCLES = 2500
) (
  input  logic clk,
  input  logic por_n,
  input  logic reset_req,
  output logic fpga_reset
);

  localparam int unsigned CW = $clog2(RESET_CYCLES + 1);

  logic [2:0]    req_sync;   // two synchroniser stages + edge history
  logic [CW-1:0] count;

  always_ff @(posedge clk or negedge por_n) begin
    if (!por_n) begin
      req_sync   <= '0;
      count      <= CW'(RESET_CYCLES);
      fpga_reset <= 1'b1;
    end else begin
      req_sync <= {req_sync[1:0], reset_req};
      if (req_sync[1] && !req_sync[2]) begin
        count      <= CW'(RESET_CYCLES - 1);
        fpga_reset <= 1'b1;
      end else if (count != '0) begin
        count      <= count - 1'b1;
        fpga_reset <= 1'b1;
      end else begin
        fpga_reset <= 1'b0;
      end
    end
  end

endmodule
