// fpga_config_ctrl: FPGA firmware reload and boot-status monitor in the CPLD.
//
// The module management controller reloads the FPGA firmware and checks
// that it booted through the CPLD, which drives the FPGA's PROG_B pin and
// watches its INIT_B and DONE pins. A rising edge on reload_req starts a
// reload: PROG_B is pulled low for PROG_CYCLES clocks, which makes the FPGA
// clear its configuration memory and then read its bitstream from the SPI
// flash again. The controller then waits for INIT_B to rise (memory
// cleared) and for DONE to rise (bitstream loaded) and reports the result
// in state and in the busy / cfg_done / cfg_error flags.
//   CFG_IDLE      after reset; moves to CFG_DONE when DONE is high (the FPGA
//                 configures itself from flash at power-up)
//   CFG_PROG      PROG_B low
//   CFG_CLEARING  waiting for INIT_B high
//   CFG_LOADING   waiting for DONE high
//   CFG_DONE      configured; back to CFG_IDLE if DONE falls
//   CFG_ERROR     INIT_B fell while loading (a 7-series CRC error) or a wait
//                 exceeded TIMEOUT_CYCLES; left only by a new reload_req
// That the CPLD carries out reload and status check, the state set, the
// pulse width, the error rules and the request/status interface to the
// controller are this design's choices; the board description names the
// task and the PROG_B/INIT_B/DONE wiring through the CPLD.
// Timing: reload_req, init_b and done pass two-flop synchronisers. prog_b
// falls three clocks after reload_req rises and stays low exactly
// PROG_CYCLES clocks. Defaults assume the 25 MHz CPLD clock: 1 us pulse,
// 1 s timeout.
module fpga_config_ctrl
  import ufc_pkg::*;
#(
  parameter int unsigned PROG_CYCLES    = 25,
  parameter int unsigned TIMEOUT_CYCLES = 25_000_000
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       reload_req,
  input  logic       init_b,
  input  logic       done,
  output logic       prog_b,
  output cfg_state_t state,
  output logic       busy,
  output logic       cfg_done,
  output logic       cfg_error
);

  localparam int unsigned TW = $clog2((TIMEOUT_CYCLES > PROG_CYCLES ?
                                       TIMEOUT_CYCLES : PROG_CYCLES) + 1);

  logic [2:0]    req_sync;
  logic [1:0]    init_sync, done_sync;
  logic          req_rise, init_s, done_s;
  logic [TW-1:0] timer;

  assign req_rise = req_sync[1] & ~req_sync[2];
  assign init_s   = init_sync[1];
  assign done_s   = done_sync[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_sync  <= '0;
      init_sync <= '0;
      done_sync <= '0;
    end else begin
      req_sync  <= {req_sync[1:0], reload_req};
      init_sync <= {init_sync[0], init_b};
      done_sync <= {done_sync[0], done};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= CFG_IDLE;
      timer <= '0;
    end else if (req_rise && state != CFG_PROG) begin
      state <= CFG_PROG;
      timer <= TW'(PROG_CYCLES - 1);
    end else begin
      unique case (state)
        CFG_IDLE:
          if (done_s) state <= CFG_DONE;
        CFG_PROG:
          if (timer == '0) begin
            state <= CFG_CLEARING;
            timer <= TW'(TIMEOUT_CYCLES - 1);
          end else begin
            timer <= timer - 1'b1;
          end
        CFG_CLEARING:
          if (init_s) begin
            state <= CFG_LOADING;
            timer <= TW'(TIMEOUT_CYCLES - 1);
          end else if (timer == '0) begin
            state <= CFG_ERROR;
          end else begin
            timer <= timer - 1'b1;
          end
        CFG_LOADING:
          if (done_s)                       state <= CFG_DONE;
          else if (!init_s || timer == '0)  state <= CFG_ERROR;
          else                              timer <= timer - 1'b1;
        CFG_DONE:
          if (!done_s) state <= CFG_IDLE;
        CFG_ERROR: ;
        default: state <= CFG_IDLE;
      endcase
    end
  end

  assign prog_b    = (state != CFG_PROG);
  assign busy      = (state == CFG_PROG) || (state == CFG_CLEARING) ||
                     (state == CFG_LOADING);
  assign cfg_done  = (state == CFG_DONE);
  assign cfg_error = (state == CFG_ERROR);

endmodule
