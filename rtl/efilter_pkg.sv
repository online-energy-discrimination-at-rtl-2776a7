// efilter_pkg: types and constants shared by the online energy filter.
//
// The filter sits in the FPGA of a PET DAQ front-end module. It sees the
// readout-ASIC data packets after they have been reformatted into 64-bit words,
// one word per packet header or per gamma event, and removes the events whose
// coarse time-over-threshold (TOT) lies outside an energy acceptance window.
//
// Taken from the source description: 10-bit coarse time counter (6.25 ns
// bins), 64-bit data words, 1024 channels per front-end module, 10-bit channel
// ID and 10-bit thresholds in the configuration command, a 20-bit x 1024
// threshold table, the rollover limit of -950 and the upper bound of 80 clock
// cycles.
// Own choices (the source gives no bit positions): the placement of channel ID
// and coarse stamps inside the event word, the start/end-of-packet side-band
// flags, the packing of the configuration command and its header byte value.
package efilter_pkg;

  localparam int unsigned COARSE_BITS = 10;   // free-running coarse counter width
  localparam int unsigned CHAN_BITS   = 10;   // channel ID inside one front-end module
  localparam int unsigned THR_BITS    = 10;   // one threshold, in coarse clock cycles
  localparam int unsigned N_CHANNELS  = 1024; // channels per front-end module
  localparam int unsigned WORD_BITS   = 64;   // DAQ front-end data word

  // Hardwired filtering rules (clock cycles of 6.25 ns).
  localparam int RO_LIMIT_DEFAULT = -950;     // eq. (2): rollover if E-T <= -950
  localparam int UPPER_BOUND_DEFAULT = 80;    // eq. (4): noise if E-T >= 80

  // Header byte of the threshold-setting command (value chosen here).
  localparam logic [7:0] CMD_SET_THRESHOLDS = 8'hF1;

  typedef logic [COARSE_BITS-1:0] coarse_t;
  typedef logic [CHAN_BITS-1:0]   chan_t;
  typedef logic [THR_BITS-1:0]    thr_t;

  // One gamma event as a 64-bit word. Only channel and coarse stamps are used
  // by the filter; the remaining bits (fine time, ASIC/TAC info) pass untouched.
  typedef struct packed {
    chan_t         channel;   // [63:54]
    coarse_t       t_coarse;  // [53:44] coarse part of T_stamp (leading edge)
    coarse_t       e_coarse;  // [43:34] coarse part of E_stamp (trailing edge)
    logic [33:0]   other;     // [33:0]  fine times and remaining event fields
  } event_word_t;

  // A word of the front-end packet stream with its framing side-band.
  typedef struct packed {
    logic                 sop;   // first word of a packet: the packet header
    logic                 eop;   // last word of a packet
    logic [WORD_BITS-1:0] data;  // header word or event_word_t
  } pkt_word_t;

  // Lower and upper threshold of one channel: one 20-bit table entry.
  typedef struct packed {
    thr_t lo;
    thr_t hi;
  } thr_pair_t;

  // Threshold-setting command: header byte, channel ID, lower, upper threshold.
  typedef struct packed {
    logic [7:0] header;
    chan_t      channel;
    thr_t       lo;
    thr_t       hi;
  } filter_cmd_t;

  // Which coarse-TOT rule applied to an event.
  typedef enum logic [1:0] {
    TOT_GENERAL   = 2'd0,  // eq. (1): E - T
    TOT_ROLLOVER  = 2'd1,  // eq. (2): 1024 + E - T
    TOT_PATH_DIFF = 2'd2,  // eq. (3): small negative, forced to 0
    TOT_ABOVE_UB  = 2'd3   // eq. (4): above the upper bound, forced to 0
  } tot_rule_e;

endpackage
