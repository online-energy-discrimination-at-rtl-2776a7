// efilter_frontend: online energy filter of one PET DAQ front-end module.
//
// Top level of the filter as it sits in the front-end FPGA, between the logic
// that reformats readout-ASIC packets into 64-bit words and the link to the
// off-detector collector. It has the two parts the source describes: a
// configuration module that receives threshold-setting commands, and the data
// discrimination module that drops out-of-window events from each packet.
//
//   CALIBRATED = 1 (default, the main version): per-channel thresholds in a
//     1024 x 20-bit table written by cal_filter_config; each event costs
//     3 cycles (1 + 2 for the table read), so at most 447 events fit in the
//     896 cycles left in a 1024-cycle ASIC packet period.
//   CALIBRATED = 0: the uncalibrated version, one global threshold pair held by
//     uncal_filter_config; each word costs 1 cycle.
// Both add one cycle per packet at the end (see event_filter).
// The rollover limit (-950) and upper bound (80) are hardwired rules from the
// source, exposed as parameters with those defaults.
// Interface: cmd_valid/cmd carry configuration commands; in_valid/in_ready/
// in_word is the packet stream in; out_valid/out_word the filtered stream out
// (no back-pressure); ev_* are per-event monitoring strobes. n_configured
// counts accepted table writes (calibrated version only, 0 otherwise).
// rst_n also appears in the assertions' disable-iff clauses; lint reports that
// as a synchronous use of the asynchronous reset, but no logic depends on it.
module efilter_frontend
  import efilter_pkg::*;
#(
  parameter bit          CALIBRATED         = 1'b1,
  parameter int unsigned CHANNELS           = N_CHANNELS,
  parameter int          RO_LIMIT           = RO_LIMIT_DEFAULT,
  parameter int          UPPER_BOUND        = UPPER_BOUND_DEFAULT,
  parameter bit          ENABLE_UPPER_BOUND = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration commands forwarded by the DAQ collector
  input  logic        cmd_valid,
  input  filter_cmd_t cmd,
  output logic [CHAN_BITS:0] n_configured,
  // packet stream from the ASIC packet formatter
  input  logic        in_valid,
  output logic        in_ready,
  input  pkt_word_t   in_word,
  // filtered packet stream towards the collector link
  output logic        out_valid,
  output pkt_word_t   out_word,
  // monitoring
  output logic        ev_done,
  output logic        ev_kept,
  output tot_rule_e   ev_rule
);

  logic      thr_req;
  chan_t     thr_chan;
  thr_pair_t thr;

  if (CALIBRATED) begin : g_cal
    logic      lut_wr_en;
    chan_t     lut_wr_addr;
    thr_pair_t lut_wr_data;
    logic      lut_rd_valid;

    cal_filter_config u_config (
      .clk        (clk),
      .rst_n      (rst_n),
      .cmd_valid  (cmd_valid),
      .cmd        (cmd),
      .lut_wr_en  (lut_wr_en),
      .lut_wr_addr(lut_wr_addr),
      .lut_wr_data(lut_wr_data),
      .n_written  (n_configured)
    );

    threshold_lut #(.DEPTH(CHANNELS), .WIDTH(2 * THR_BITS)) u_lut (
      .clk     (clk),
      .rst_n   (rst_n),
      .wr_en   (lut_wr_en),
      .wr_addr (lut_wr_addr[$clog2(CHANNELS)-1:0]),
      .wr_data (lut_wr_data),
      .rd_en   (thr_req),
      .rd_addr (thr_chan[$clog2(CHANNELS)-1:0]),
      .rd_valid(lut_rd_valid),
      .rd_data (thr)
    );

    // The filter decides an event exactly when the table read returns.
    a_lut_timing: assert property (@(posedge clk) disable iff (!rst_n)
      ev_done |-> lut_rd_valid);
  end else begin : g_uncal
    uncal_filter_config u_config (
      .clk      (clk),
      .rst_n    (rst_n),
      .cmd_valid(cmd_valid),
      .cmd      (cmd),
      .thr      (thr)
    );
    assign n_configured = '0;
  end

  event_filter #(
    .THR_LATENCY       (CALIBRATED ? 2 : 0),
    .RO_LIMIT          (RO_LIMIT),
    .UPPER_BOUND       (UPPER_BOUND),
    .ENABLE_UPPER_BOUND(ENABLE_UPPER_BOUND)
  ) u_filter (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .in_ready (in_ready),
    .in_word  (in_word),
    .out_valid(out_valid),
    .out_word (out_word),
    .thr_req  (thr_req),
    .thr_chan (thr_chan),
    .thr_in   (thr),
    .ev_done  (ev_done),
    .ev_kept  (ev_kept),
    .ev_rule  (ev_rule)
  );

endmodule
