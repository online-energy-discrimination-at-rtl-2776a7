// tb_uncal_filter_config: checks the pass-all reset value of the global
// threshold pair, that matching commands load it one cycle later and that
// commands with another header byte leave it unchanged.
module tb_uncal_filter_config;
  import efilter_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        cmd_valid = 0;
  filter_cmd_t cmd = '0;
  thr_pair_t   thr;
  int checks = 0, failures = 0;

  uncal_filter_config dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    thr_t exp_lo, exp_hi;
    bit   good;
    repeat (3) @(posedge clk);
    checks++;
    if (thr.lo != 0 || thr.hi != 10'd1023) begin
      failures++; $display("FAIL reset value lo=%0d hi=%0d", thr.lo, thr.hi);
    end
    rst_n = 1;
    exp_lo = 0; exp_hi = 1023;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      good = ($urandom % 3) == 0;
      cmd_valid = ($urandom % 4) != 0;
      cmd.header  = good ? 8'hF1 : 8'h10 + 8'($urandom % 16);
      cmd.channel = chan_t'($urandom);
      cmd.lo = thr_t'($urandom); cmd.hi = thr_t'($urandom);
      if (cmd_valid && good) begin exp_lo = cmd.lo; exp_hi = cmd.hi; end
      @(negedge clk);
      cmd_valid = 0;
      checks++;
      if (thr.lo !== exp_lo || thr.hi !== exp_hi) begin
        failures++; $display("FAIL thr %0d/%0d exp %0d/%0d", thr.lo, thr.hi, exp_lo, exp_hi);
      end
    end
    // the values from the source's uncalibrated sweep: 25 and 70 cycles
    @(negedge clk);
    cmd_valid = 1; cmd.header = 8'hF1; cmd.lo = 10'd25; cmd.hi = 10'd70;
    @(negedge clk); cmd_valid = 0;
    checks++; if (thr.lo != 25 || thr.hi != 70) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
