// cal_filter_config: configuration module of the calibrated filter.
//
// Receives threshold-setting commands forwarded by the DAQ collector. Each
// command carries a header byte naming the command type, a 10-bit channel ID
// inside the front-end module and a 10-bit lower and upper threshold in coarse
// clock cycles (field order as in the source description). The module checks
// the header, unpacks the fields and writes {lo, hi} into the threshold table
// at the channel address; commands with another header are ignored, as they
// belong to other configuration functions. The packing of the fields into one
// 38-bit word, the header value and the one-cycle registered write are this
// design's own choices. n_written counts accepted commands so that software
// can check that all 1024 channels were configured.
// Timing: a command presented with cmd_valid in cycle n is written to the
// table at the clock edge ending cycle n+1; one command per cycle.
module cal_filter_config
  import efilter_pkg::*;
#(
  parameter logic [7:0] CMD_HEADER = CMD_SET_THRESHOLDS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  filter_cmd_t cmd,
  // threshold table write port
  output logic        lut_wr_en,
  output chan_t       lut_wr_addr,
  output thr_pair_t   lut_wr_data,
  output logic [CHAN_BITS:0] n_written
);

  logic hit;
  assign hit = cmd_valid && (cmd.header == CMD_HEADER);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lut_wr_en   <= 1'b0;
      lut_wr_addr <= '0;
      lut_wr_data <= '0;
      n_written   <= '0;
    end else begin
      lut_wr_en <= hit;
      if (hit) begin
        lut_wr_addr    <= cmd.channel;
        lut_wr_data.lo <= cmd.lo;
        lut_wr_data.hi <= cmd.hi;
        n_written      <= n_written + 1'b1;
      end
    end
  end

endmodule
