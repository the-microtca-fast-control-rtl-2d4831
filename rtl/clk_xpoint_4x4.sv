// clk_xpoint_4x4: a 4-input, 4-output clock cross-point switch.
//
// Each output independently carries any one of the inputs, chosen by its
// own select word sel[o]; several outputs may carry the same input. This is
// the function of the "4:4 MUX" parts of the board clock tree, six of which
// (A to F) make up clock_distribution. The path is purely combinational:
// a clock edge on the selected input appears on the output with no cycle of
// delay. How the real part is programmed (pins or a serial register) is not
// modelled: sel is a static configuration input, set by the board's
// management controller. N_IN and N_OUT default to the 4:4 of the board's
// switches; the output width of sel follows N_IN.
module clk_xpoint_4x4 #(
  parameter int unsigned N_IN  = 4,
  parameter int unsigned N_OUT = 4,
  localparam int unsigned SEL_W = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic [N_IN-1:0]             clk_in,
  input  logic [N_OUT-1:0][SEL_W-1:0] sel,
  output logic [N_OUT-1:0]            clk_out
);

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      clk_out[o] = 1'b0;
      for (int i = 0; i < N_IN; i++)
        if (sel[o] == SEL_W'(i)) clk_out[o] = clk_in[i];
    end
  end

endmodule
