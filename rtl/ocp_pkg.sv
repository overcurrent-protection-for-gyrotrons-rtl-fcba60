// ocp_pkg: shared constants and types of the gyrotron overcurrent protection.
//
// The fast protection board has one comparator channel per current
// transformer (four: two on the cathode current, two on the anode current),
// and each protection system drives one fibre per destination (cathode power
// supply, anode power supply, interlock PLC, central control). Those counts
// follow the system description. Everything else here -- the 12-bit
// threshold DAC code, the 40 MHz FPGA clock, the 1 us latch-time unit and the
// three-byte host command frame -- is this design's own choice.
//
// Analog quantities in the behavioural models are carried as signed 32-bit
// integers in fixed units: microvolts for voltages, nanoamperes for currents.
`timescale 1ns/1ps
package ocp_pkg;

  // Channel and output counts.
  localparam int unsigned N_FAST_CH = 4;   // current transformers on the fast board
  localparam int unsigned N_SLOW_CH = 2;   // shunts on the slow board (cathode, anode)
  localparam int unsigned N_DEST    = 4;   // protection fibres per system

  // Destination index of each protection fibre.
  typedef enum logic [1:0] {
    DEST_CATHODE_PS = 2'd0,
    DEST_ANODE_PS   = 2'd1,
    DEST_PLC        = 2'd2,
    DEST_CENTRAL    = 2'd3
  } dest_e;

  // FPGA clock and derived timing.
  localparam int unsigned CLK_HZ        = 40_000_000;
  localparam int unsigned BAUD          = 115_200;
  localparam int unsigned CLKS_PER_BIT  = CLK_HZ / BAUD;     // 347
  localparam int unsigned LT_UNIT       = CLK_HZ / 1_000_000; // cycles per latch-time unit (1 us)

  // Threshold DAC.
  localparam int unsigned THR_W         = 12;
  localparam int          DAC_VREF_UV   = 5_000_000;          // full scale 5 V
  localparam logic [THR_W-1:0] THR_DEFAULT = 12'd2048;        // 2.5 V after reset

  // Latch time register: 0 = output follows the comparator,
  // LATCH_FOREVER = hold until a reset, anything else = hold for N us.
  localparam int unsigned LT_W          = 16;
  localparam logic [LT_W-1:0] LATCH_FOREVER = '1;

  // Host command frame: {op[3:0], ch[3:0]}, data[15:8], data[7:0].
  typedef enum logic [3:0] {
    OP_NOP        = 4'h0,
    OP_SET_THR    = 4'h1,   // threshold code of channel ch = data[11:0]
    OP_SET_LATCH  = 4'h2,   // latch time = data (us)
    OP_RESET      = 4'h3,   // clear latches and trip memory
    OP_SELFTEST   = 4'h4,   // self-test of the channels in data[3:0]
    OP_READ_STAT  = 4'h5,   // reply with the 16-bit status word, MSB first
    OP_READ_THR   = 4'h6    // reply with the threshold code of channel ch
  } op_e;

  // Status word reported to the host and shown on the front panel.
  typedef struct packed {
    logic       protect;      // [15] protection output asserted now
    logic       wdt_expired;  // [14] host link silent for longer than the watchdog time
    logic       st_busy;      // [13] self-test running
    logic       st_done;      // [12] a self-test has completed since reset
    logic [3:0] st_pass;      // [11:8] self-test result per channel
    logic [3:0] trip_mem;     // [7:4] channel tripped since the last reset
    logic [3:0] cmp_now;      // [3:0] comparator outputs now
  } status_t;

endpackage
