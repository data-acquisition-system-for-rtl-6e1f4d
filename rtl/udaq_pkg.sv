// udaq_pkg -- types and constants shared by the UDAQ (UFFO Data Acquisition) FPGA logic.
//
// The 32-bit command layout (cmd_t) follows the command structure of the UFFO pathfinder:
// header 31:29, applicable system 28:24, run type 23:22, command content 21:16,
// sub content 15:10, value 9:0. Coordinates are 48 bits (8-bit indicator such as X, Y, Z,
// theta, phi, then a 40-bit value) and the satellite time is six 8-bit fields
// (year, month, day, hour, minute, second). All field widths above follow the mission
// documentation; every numeric code below (system bits, command codes, BI frame types,
// telescope frame indicators) is this design's own choice, because no encoding was published.
package udaq_pkg;

  // ---------------- command word (32 bits, as received from the Bus-Interface) -------------
  typedef struct packed {
    logic [2:0] header;     // 31:29 single / packet
    logic [4:0] system;     // 28:24 applicable system
    logic [1:0] run_type;   // 23:22 calibration / science
    logic [5:0] content;    // 21:16 state & transition, set, set parameter
    logic [5:0] sub;        // 15:10 run type, trigger mode, ...
    logic [9:0] value;      //  9:0  value
  } cmd_t;

  // applicable-system field: one bit per system (own choice)
  localparam int unsigned SYS_UDAQ = 0;
  localparam int unsigned SYS_SMT  = 1;
  localparam int unsigned SYS_UBAT = 2;

  localparam logic [2:0] HDR_SINGLE = 3'd1;
  localparam logic [2:0] HDR_PACKET = 3'd2;

  localparam logic [1:0] RUN_CALIB   = 2'd1;
  localparam logic [1:0] RUN_SCIENCE = 2'd2;

  // command content codes (own choice)
  localparam logic [5:0] CC_STATE  = 6'd1;  // state & transition
  localparam logic [5:0] CC_SET    = 6'd2;  // set
  localparam logic [5:0] CC_SETPAR = 6'd3;  // set parameter

  // sub contents understood by the UDAQ itself (own choice)
  localparam logic [5:0] SUB_RUN_START = 6'd1;  // CC_STATE: start a run (sent to telescopes)
  localparam logic [5:0] SUB_CLR_ALARM = 6'd2;  // CC_STATE: clear alarms, leave safe mode
  localparam logic [5:0] SUB_DAYNIGHT  = 6'd1;  // CC_SET: value[0]=1 night, 0 day
  localparam logic [5:0] SUB_RUNTYPE   = 6'd2;  // CC_SET: run type for the next configuration
  localparam logic [5:0] SUB_THR_PHOTO = 6'd1;  // CC_SETPAR: photo-sensor threshold
  localparam logic [5:0] SUB_THR_TEMP  = 6'd2;  // CC_SETPAR: temperature threshold
  localparam logic [5:0] SUB_THR_I5    = 6'd3;  // CC_SETPAR: 5.2 V current threshold
  localparam logic [5:0] SUB_THR_I12   = 6'd4;  // CC_SETPAR: 12 V current threshold

  // ---------------- coordinates and time ---------------------------------------------------
  typedef struct packed {
    logic [7:0]  ind;    // coordinate indicator (X, Y, Z, theta, phi, ...)
    logic [39:0] value;
  } coord_t;

  typedef struct packed {
    logic [7:0] year;    // years after 2000
    logic [7:0] month;   // 1..12
    logic [7:0] day;     // 1..31
    logic [7:0] hour;
    logic [7:0] minute;
    logic [7:0] second;
  } time_t;

  typedef enum logic [1:0] {
    CT_SAT      = 2'd0,  // satellite position
    CT_BDRG     = 2'd1,  // direction of an external (BDRG) trigger
    CT_UBAT_ABS = 2'd2,  // absolute celestial coordinates computed by the BI
    CT_UBAT_REL = 2'd3   // direction found by the UBAT, relative to the pathfinder
  } coord_type_e;

  // ---------------- Bus-Interface frames -----------------------------------------------------
  // The BI tells the UDAQ what a frame carries on three customized lines next to the SPI
  // signals; the frame length follows from the type.
  typedef enum logic [2:0] {
    BF_CMD      = 3'd0,  // 32-bit command in
    BF_TIME     = 3'd1,  // 48-bit time in
    BF_SAT      = 3'd2,  // 48-bit satellite coordinate in
    BF_BDRG     = 3'd3,  // 48-bit BDRG coordinate in
    BF_UBAT_ABS = 3'd4,  // 48-bit UBAT absolute coordinate in
    BF_EXT_TRIG = 3'd5,  // 48-bit BDRG coordinate in, starts an event
    BF_STATUS   = 3'd6,  // status words out
    BF_DATA     = 3'd7   // event data words out
  } bi_frame_e;

  localparam int unsigned CMD_BITS   = 32;
  localparam int unsigned COORD_BITS = 48;
  localparam int unsigned STATUS_WORDS = 8;

  // ---------------- telescope frames (64 bits, UDAQ is the SPI master) ---------------------
  // Byte 63:56 of every frame says what it is.
  localparam logic [7:0] TF_CMD      = 8'hC1;  // {TF_CMD, target, seq[15:0], cmd_t}
  localparam logic [7:0] TF_COORD    = 8'hC2;  // {TF_COORD, coord_t}: trigger direction
  localparam logic [7:0] TF_RD_COORD = 8'hC3;  // UBAT answers with its 48-bit relative coordinate
  localparam logic [7:0] TF_RD_DATA  = 8'hC4;  // 32-bit frame, telescope answers 16 data bits
  localparam logic [7:0] TF_TIME     = 8'hC5;  // {TF_TIME, target, time_t}: time from the satellite
  localparam logic [7:0] TF_RD_HK    = 8'hC6;  // 32-bit frame, telescope answers its 16-bit status word

  localparam int unsigned TEL_SMT  = 0;
  localparam int unsigned TEL_UBAT = 1;

  // ---------------- status block read by the BI (8 x 16 bits) ------------------------------
  typedef enum logic [3:0] {
    ST_HK       = 4'd0,  // collecting housekeeping after power-on
    ST_WAIT_DRK = 4'd1,  // waiting for night and low light
    ST_POWER    = 4'd2,  // telescopes powered, settling
    ST_CONFIG   = 4'd3,  // sending configuration to SMT and UBAT
    ST_READY    = 4'd4,  // observing, triggers enabled
    ST_SAFE     = 4'd5   // alarm: telescopes off until cleared
  } ccu_state_e;

  typedef struct packed {
    ccu_state_e  state;      // 127:124
    logic        smt_pwr;    // 123
    logic        ubat_pwr;   // 122
    logic        night;      // 121
    logic        abs_req;    // 120 UBAT relative coordinate waits for its absolute value
    logic        ev_ready;   // 119 an event is ready for transfer
    logic [1:0]  emerg;      // 118:117 emergency announced by SMT / UBAT
    logic        alarm;      // 116
    logic [3:0]  rejected;   // 115:112 held commands rejected (saturating)
    logic [15:0] alarm_vec;  // 111:96 which monitored value exceeded its threshold
    coord_t      ubat_rel;   // 95:48
    logic [7:0]  ev_count;   // 47:40 events stored since reset
    logic [7:0]  ev_lost;    // 39:32 triggers not turned into events
    logic [31:0] ev_len;     // 31:0 words of the event ready for transfer
  } status_t;

endpackage
