// station_pkg -- types and constants shared by the Backend trigger and
// acquisition logic of a cosmic-ray detector station.
//
// A station has up to four Frontend boards with two discriminated SiPM
// channels each, so eight channels reach the Backend. The trigger is built
// from up to five programmable combinatory operations over those channels.
// These counts follow the station description; the record layout, the
// register map and the enumerations below are this design's own choices.
package station_pkg;

  localparam int unsigned N_FRONTENDS = 4;   // Frontend boards per Backend
  localparam int unsigned CH_PER_FE   = 2;   // discriminator channels per Frontend
  localparam int unsigned N_CH        = N_FRONTENDS * CH_PER_FE;  // 8
  localparam int unsigned N_OPS       = 5;   // combinatory trigger operations
  localparam int unsigned N_TDC       = 2;   // external TDC chips
  localparam int unsigned N_LED       = 2 * N_FRONTENDS;  // two LEDs per Frontend

  localparam int unsigned CFG_W       = 32;  // CPU bus / truth-table word width
  localparam int unsigned LUT_WORDS   = (2 ** N_CH) / CFG_W;  // words per truth table

  // What a TDC measures.
  typedef enum logic {
    TDC_TIMING = 1'b0,   // START = trigger, STOP = GPS pulse-per-second
    TDC_TOT    = 1'b1    // START = channel rising, STOP = channel falling
  } tdc_mode_e;

  // Where the calibration pulser sends its pulses.
  typedef enum logic {
    CAL_LED   = 1'b0,    // pulse the Frontend LEDs (light into the scintillator)
    CAL_FORCE = 1'b1     // force a digital channel pattern into the trigger path
  } calib_target_e;

  // How data taking is cut into Cosmic blocks.
  typedef enum logic {
    BLK_BY_EVENTS = 1'b0,
    BLK_BY_TIME   = 1'b1
  } block_mode_e;

  // One event as handed to the CPU (109 bits, read as four 32-bit words).
  typedef struct packed {
    logic [15:0]      block_id;     // Cosmic block number
    logic [15:0]      event_no;     // event number inside the block
    logic [31:0]      seconds;      // GPS seconds since the last buffer clear
    logic [31:0]      ticks;        // clock cycles since the last GPS pulse
    logic [N_OPS-1:0] trig_bits;    // which trigger operations fired
    logic [N_CH-1:0]  hits;         // channel levels at the trigger
  } event_t;

  localparam int unsigned EVENT_W = $bits(event_t);

  // Register map of backend_regs (word addresses).
  localparam logic [7:0] A_CTRL       = 8'h00; // [0] run [1] block mode [2] fifo clear (self-clearing)
  localparam logic [7:0] A_OP_ENABLE  = 8'h01; // [N_OPS-1:0]
  localparam logic [7:0] A_BLK_EVENTS = 8'h02;
  localparam logic [7:0] A_BLK_SECS   = 8'h03;
  localparam logic [7:0] A_TDC_CFG    = 8'h04; // per TDC t: [8t] enable [8t+1] mode [8t+4:8t+2] ToT channel
  localparam logic [7:0] A_CAL_TIMING = 8'h05; // [15:0] pulses [31:16] period
  localparam logic [7:0] A_CAL_CFG    = 8'h06; // [7:0] width [8] target [23:16] LED mask
  localparam logic [7:0] A_CAL_PATTERN= 8'h07; // [N_CH-1:0]
  localparam logic [7:0] A_CAL_START  = 8'h08; // write: start pulse train
  localparam logic [7:0] A_STATUS     = 8'h10; // [0] fifo empty [1] calib busy [2] run [15:8] fifo level
  localparam logic [7:0] A_DROPPED    = 8'h11;
  localparam logic [7:0] A_BLOCK_ID   = 8'h12;
  localparam logic [7:0] A_BLK_EVCNT  = 8'h13;
  localparam logic [7:0] A_SECONDS    = 8'h14;
  localparam logic [7:0] A_BLK_SECCNT = 8'h15;
  localparam logic [7:0] A_EVT0       = 8'h20; // head record bits [31:0]
  localparam logic [7:0] A_EVT1       = 8'h21; // [63:32]
  localparam logic [7:0] A_EVT2       = 8'h22; // [95:64]
  localparam logic [7:0] A_EVT3       = 8'h23; // [EVENT_W-1:96]
  localparam logic [7:0] A_EVT_POP    = 8'h24; // write: drop head record
  localparam logic [7:0] A_LUT_BASE   = 8'h40; // 8'h40 + op*LUT_WORDS + word

endpackage
