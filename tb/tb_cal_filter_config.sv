// tb_cal_filter_config: sends threshold-setting commands (and commands with a
// foreign header byte, which must be ignored) and checks each table write one
// cycle later: enable, channel address, {lo, hi} data and the write counter.
module tb_cal_filter_config;
  import efilter_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        cmd_valid = 0;
  filter_cmd_t cmd = '0;
  logic        lut_wr_en;
  chan_t       lut_wr_addr;
  thr_pair_t   lut_wr_data;
  logic [CHAN_BITS:0] n_written;
  int checks = 0, failures = 0;
  int exp_count = 0;

  cal_filter_config dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit    good, exp_we;
    chan_t ch; thr_t lo, hi;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (lut_wr_en || n_written != 0) failures++;
    for (int i = 0; i < 2000; i++) begin
      good = ($urandom % 4) != 0;
      ch = chan_t'($urandom); lo = thr_t'($urandom); hi = thr_t'($urandom);
      cmd_valid = ($urandom % 5) != 0;
      cmd.header  = good ? 8'hF1 : 8'(($urandom % 240) + 1);   // never 8'hF1
      cmd.channel = ch; cmd.lo = lo; cmd.hi = hi;
      exp_we = cmd_valid && good;
      if (exp_we) exp_count++;
      @(negedge clk);
      checks++;
      if (lut_wr_en !== exp_we) begin
        failures++; $display("FAIL we=%0b exp %0b", lut_wr_en, exp_we);
      end
      if (exp_we) begin
        checks++;
        if (lut_wr_addr !== ch || lut_wr_data.lo !== lo || lut_wr_data.hi !== hi) begin
          failures++;
          $display("FAIL write ch=%0d lo=%0d hi=%0d exp %0d/%0d/%0d",
                   lut_wr_addr, lut_wr_data.lo, lut_wr_data.hi, ch, lo, hi);
        end
      end
      checks++;
      if (int'(n_written) != (exp_count % 2048)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
