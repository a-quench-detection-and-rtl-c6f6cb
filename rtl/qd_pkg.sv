// qd_pkg: types and constants shared by the digital quench detector (DQD).
//
// Each detector channel is configured with one of four actions. A channel of
// type QUENCH1, QUENCH2 or SRD (slow ramp down) drives the matching backplane
// quench line when it trips; a NO_ACTION channel only logs (characterisation).
// The four action names are the ones the DQD configuration uses; their 2-bit
// encoding, the register map and the SPI frame layout below are this design's
// own choices.
//
// SPI frame (32 bits, MSB first, one frame per chip-select):
//   [31]    rw    1 = read, 0 = write
//   [30:27] dev   0..7 = DQD module in that slot, 8 = DQD controller
//   [26:16] reg   register index inside the device
//   [15:0]  data  write data (write) / read data shifted out on MISO (read)
package qd_pkg;

  typedef enum logic [1:0] {
    NO_ACTION = 2'd0,
    QUENCH1   = 2'd1,
    QUENCH2   = 2'd2,
    SRD       = 2'd3
  } chan_type_e;

  localparam int unsigned SAMPLE_W   = 16;   // ADC resolution
  localparam int unsigned REG_W      = 16;   // register data width
  localparam int unsigned REG_ADDR_W = 11;   // register index width
  localparam int unsigned DEV_W      = 4;    // device select width
  localparam int unsigned FRAME_W    = 1 + DEV_W + REG_ADDR_W + REG_W;
  localparam logic [DEV_W-1:0] DEV_CTRL = 4'd8;

  typedef logic signed [SAMPLE_W-1:0] sample_t;

  // Per-channel register block: channel c uses indices c*8 + offset.
  localparam int unsigned R_TYPE     = 0;  // chan_type_e in [1:0]
  localparam int unsigned R_THRESH   = 1;  // CUR_DEP_THRESH: threshold at zero current (ADC counts)
  localparam int unsigned R_SLOPE    = 2;  // threshold increase per unit |I| (Q0.16 fraction)
  localparam int unsigned R_VALID    = 3;  // VALID_TIME in samples (0.1 ms each)
  localparam int unsigned R_DELAY    = 4;  // DELAY_TIME in samples
  localparam int unsigned R_BUCKSRC  = 5;  // bucked channels: [1:0] minuend, [3:2] subtrahend, [4] use Idot
  localparam int unsigned R_BUCKGAIN = 6;  // bucked channels: signed Q8.8 gain of the subtrahend
  localparam int unsigned R_LIVE     = 7;  // read only: last sample of the channel

  // Module-wide registers.
  localparam int unsigned R_CTRL     = 'h40; // [0] LOG_ARM  [1] reset latches (pulse)  [2] DAT_SVD (set)
  localparam int unsigned R_STATUS   = 'h41; // read only, see dqd_module
  localparam int unsigned R_RDADDR_L = 'h42; // SRAM readback address [15:0]
  localparam int unsigned R_RDADDR_H = 'h43; // SRAM readback address [31:16]
  localparam int unsigned R_RDDATA   = 'h44; // read only: SRAM word at readback address, address auto-increments
  localparam int unsigned R_TRIG_L   = 'h45; // read only: buffer slot of the trigger sample [15:0]
  localparam int unsigned R_TRIG_H   = 'h46; // read only: [31:16]
  localparam int unsigned R_FIRST    = 'h47; // read only: [3] valid, [2:0] first channel that tripped
  localparam int unsigned R_ID       = 'h48; // read only: identification word
  localparam int unsigned R_TRIPS    = 'h49; // read only: [7:0] channel trips, [15:8] channels over threshold
  localparam logic [15:0] MODULE_ID  = 16'hD0D1;

  // Front-panel indicators of a DQD module (names as printed on the panel).
  typedef struct packed {
    logic mod_hb;    // MOD_HB   heartbeat
    logic spi_link;  // SPI_LINK register traffic seen in the last second
    logic hw_flt;    // HW_FLT   hardware fault latched
    logic srd;       // SRD      slow-ramp-down line active
    logic q1_ff;     // Q1_FF    QUENCH1 fault latched
    logic q2_ff;     // Q2_FF    QUENCH2 fault latched
    logic log_arm;   // LOG_ARM  circular buffer armed
    logic dat_rdy;   // DAT_RDY  buffer frozen, data ready
    logic dat_svd;   // DAT_SVD  data saved by the Tier-3
  } mod_led_t;

  // Front-panel indicators of the DQD controller.
  typedef struct packed {
    logic quench;    // QUENCH   dump fire / PS inhibit issued
    logic srd;       // SRD      slow ramp down issued
    logic data;      // DATA     all enabled modules have data ready
    logic ctrl_hb;   // CTRL_HB  heartbeat
    logic spi_link;  // SPI_LINK Tier-3 traffic seen in the last second
    logic hw_flt;    // HW_FLT   a module reports a hardware fault
  } ctrl_led_t;

  // Controller registers (dev = DEV_CTRL).
  localparam int unsigned C_ENABLE   = 'h00; // [7:0] modules whose quench lines are obeyed
  localparam int unsigned C_CTRL     = 'h01; // [0] reset latches (pulse)
  localparam int unsigned C_STATUS   = 'h02; // read only, see dqd_controller
  localparam int unsigned C_FIRST    = 'h03; // read only: [15] valid [12] channel known [10:8] channel [5:4] type [2:0] module
  localparam int unsigned C_ID       = 'h04; // read only
  localparam logic [15:0] CTRL_ID    = 16'hDC01;

  function automatic logic [15:0] abs16(input sample_t v);
    // Magnitude with the most negative code saturated to 0x7FFF.
    if (v == sample_t'(16'h8000)) return 16'h7FFF;
    return v[15] ? 16'(-v) : 16'(v);
  endfunction

endpackage
