// tb_clk_xpoint_4x4: exhaustive check of the 4:4 cross-point switch.
// Every one of the 256 select settings is applied with random input
// patterns; each output must equal the input its select names.
module tb_clk_xpoint_4x4;
  logic [3:0]      clk_in;
  logic [3:0][1:0] sel;
  logic [3:0]      clk_out;
  int checks = 0, failures = 0;

  clk_xpoint_4x4 dut (.clk_in, .sel, .clk_out);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 256; s++) begin
      sel = s[7:0];
      for (int k = 0; k < 8; k++) begin
        clk_in = 4'($urandom);
        #1;
        for (int o = 0; o < 4; o++) begin
          automatic int src = (s >> (2*o)) & 3;
          checks++;
          if (clk_out[o] !== clk_in[src]) begin
            failures++;
            if (failures < 10)
              $display("FAIL sel=%h out%0d=%b expected in%0d=%b", s, o, clk_out[o], src, clk_in[src]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
