// ufc_pkg: types shared by the board-logic modules.
//
// xpt_sel_t is the 2-bit input select of one output of a 4:4 clock
// cross-point switch. cfg_state_t is the FPGA boot status that the CPLD
// reports to the module management controller: the states follow the
// Xilinx 7-series configuration sequence (PROG_B pulse, INIT_B rising when
// the configuration memory is cleared, DONE rising when the bitstream has
// loaded). The encoding is this design's own choice. beat_t is one
// 64-bit word of an Ethernet frame as a 10 Gb/s MAC hands it over at
// 156.25 MHz (data, byte-valid mask, last word of the frame); the format is
// this design's choice.
package ufc_pkg;

  localparam int unsigned BEAT_W = 64;

  typedef struct packed {
    logic [BEAT_W-1:0]   data;
    logic [BEAT_W/8-1:0] keep;
    logic                last;
  } beat_t;

  typedef logic [1:0] xpt_sel_t;

  typedef enum logic [2:0] {
    CFG_IDLE     = 3'd0,  // no reload since power-up, DONE not yet seen
    CFG_PROG     = 3'd1,  // PROG_B held low
    CFG_CLEARING = 3'd2,  // waiting for INIT_B to rise
    CFG_LOADING  = 3'd3,  // waiting for DONE
    CFG_DONE     = 3'd4,  // FPGA configured
    CFG_ERROR    = 3'd5   // INIT_B fell during load, or timeout
  } cfg_state_t;

endpackage
