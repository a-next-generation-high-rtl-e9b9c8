// chisdas_pkg -- types and constants shared by the photometry acquisition logic.
//
// The host gives the logic one 32-bit instruction word that carries the UT start
// second, the bin width, the size of a bus-master transfer and the number of
// channels. The order of those four fields follows the order in which they are
// usually listed for this instrument; their widths and bit positions are this
// design's choice:
//   [31:15] start second of the UT day (0..86399)
//   [14:5]  bin width in microseconds (1..1023); 0 makes the word a stop command
//   [4:2]   transfer size code, transfer = 512 << code DWORDs
//   [1:0]   number of channels minus one (1..4 channels)
//
// Each record written to memory starts with five housekeeping DWORDs:
//   0 security word (marks the start of a header; its value is chosen here)
//   1 the instruction word
//   2 master counter bits [31:0]
//   3 {record counter[23:0], master counter[39:32]}
//   4 bin counter (bin number within the record)
// The 40-bit master counter and the 24-bit record counter share words 2 and 3,
// which is how five DWORDs can hold 32+32+40+24+32 bits.
package chisdas_pkg;

  localparam int unsigned HK_WORDS        = 5;
  localparam int unsigned MASTER_W        = 40;
  localparam int unsigned RECORD_W        = 24;
  localparam int unsigned BIN_W           = 32;
  localparam int unsigned SOD_W           = 17;   // seconds of day, 0..86399
  localparam int unsigned RES_W           = 10;   // bin width in us
  localparam int unsigned SECONDS_PER_DAY = 86400;
  localparam int unsigned XFER_BASE_WORDS = 512;
  localparam int unsigned XFER_W          = 18;   // up to 512<<7 = 65536 words

  localparam logic [31:0] SECURITY_WORD = 32'hC415_DA5A;

  typedef struct packed {
    logic [SOD_W-1:0] start_sod;
    logic [RES_W-1:0] res_us;
    logic [2:0]       xfer_code;
    logic [1:0]       nch_m1;
  } instr_t;

  // Counter values written into a record header.
  typedef struct packed {
    logic [MASTER_W-1:0] master;
    logic [RECORD_W-1:0] record;
    logic [BIN_W-1:0]    bin;
  } hk_t;

  // Decoded IRIG-B time of a frame's reference marker.
  typedef struct packed {
    logic [8:0] day;    // day of year, 1..366
    logic [4:0] hour;
    logic [5:0] minute;
    logic [5:0] second;
  } utc_t;

  typedef enum logic [1:0] {
    OBS_IDLE  = 2'd0,
    OBS_ARMED = 2'd1,
    OBS_RUN   = 2'd2
  } obs_state_e;

  typedef struct packed {
    obs_state_e state;
    logic       time_valid;   // a fresh IRIG-B time is held
    logic       irig_err;     // sticky: an IRIG-B frame broke since the last instruction
    logic       overrun;      // sticky: a bin closed before the last one was written
    logic       overflow;     // sticky: the memory ring was full and data was lost
  } status_t;

  function automatic logic [XFER_W-1:0] xfer_size_words(input logic [2:0] code);
    return XFER_W'(XFER_BASE_WORDS) << code;
  endfunction

  function automatic logic [SOD_W-1:0] sod_of(input utc_t t);
    return SOD_W'(t.hour) * SOD_W'(3600) + SOD_W'(t.minute) * SOD_W'(60) + SOD_W'(t.second);
  endfunction

endpackage
