// threshold_lut: per-channel threshold table of the calibrated filter.
//
// One 20-bit entry per channel of the front-end module, holding the lower and
// upper coarse-TOT threshold ({lo, hi}, 10 bits each). Size and width follow
// the source description (1024 x 20 bits, one FPGA block RAM). It is a simple
// dual-port memory: the configuration side writes, the filter side reads.
// Reading takes two clock cycles, as the source states for the LUT access: the
// read address is registered, then the memory output is registered
// (an output-registered block RAM). rd_valid follows rd_en by two cycles.
// The contents are not reset; they are undefined until configured, as a
// block RAM would be. The configuration phase writes every entry.
module threshold_lut
  import efilter_pkg::*;
#(
  parameter int unsigned DEPTH = N_CHANNELS,
  parameter int unsigned WIDTH = 2 * THR_BITS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // write port (configuration)
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data,
  // read port (filtering), two-cycle latency
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic                     rd_valid,
  output logic [WIDTH-1:0]         rd_data
);

  logic [WIDTH-1:0]         mem [DEPTH];
  logic [$clog2(DEPTH)-1:0] rd_addr_q;
  logic                     rd_en_q;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  // cycle 1: registered address; cycle 2: registered memory output
  always_ff @(posedge clk) begin
    rd_addr_q <= rd_addr;
    if (rd_en_q) rd_data <= mem[rd_addr_q];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_en_q  <= 1'b0;
      rd_valid <= 1'b0;
    end else begin
      rd_en_q  <= rd_en;
      rd_valid <= rd_en_q;
    end
  end

endmodule
