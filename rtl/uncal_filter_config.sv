// uncal_filter_config: configuration module of the uncalibrated filter.
//
// The uncalibrated filter uses one pair of coarse-TOT thresholds for every
// channel of the front-end module. A threshold-setting command (same 38-bit
// format as the calibrated version; the channel field is ignored here) with
// the matching header byte loads the pair into a register that the
// discrimination module reads continuously. Following the source, the
// thresholds arrive already converted to clock cycles.
// Own choices: the reset value lo = 0, hi = 1023 lets every event through
// (a zero lower threshold keeps zero-TOT events), so an unconfigured module
// behaves as if no filter were present; the register loads one cycle after
// the command.
module uncal_filter_config
  import efilter_pkg::*;
#(
  parameter logic [7:0] CMD_HEADER = CMD_SET_THRESHOLDS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  filter_cmd_t cmd,
  output thr_pair_t   thr
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      thr.lo <= '0;
      thr.hi <= '1;
    end else if (cmd_valid && cmd.header == CMD_HEADER) begin
      thr.lo <= cmd.lo;
      thr.hi <= cmd.hi;
    end
  end

endmodule
