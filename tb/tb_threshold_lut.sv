// tb_threshold_lut: fills the full 1024 x 20-bit table with random values and
// reads it back in random order, checking the data and that it arrives exactly
// two cycles after the read request (rd_valid too).
module tb_threshold_lut;
  logic        clk = 0, rst_n = 0;
  logic        wr_en = 0, rd_en = 0;
  logic [9:0]  wr_addr = 0, rd_addr = 0;
  logic [19:0] wr_data = 0;
  logic        rd_valid;
  logic [19:0] rd_data;
  logic [19:0] model [1024];
  int checks = 0, failures = 0;

  threshold_lut dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected read data pipeline
  logic [19:0] exp_q [2];
  logic        exp_v [2];
  always @(posedge clk) begin
    if (rst_n) begin
      if (exp_v[1]) begin
        checks++;
        if (!rd_valid || rd_data !== exp_q[1]) begin
          failures++;
          $display("FAIL read: valid=%0b data=%h exp %h", rd_valid, rd_data, exp_q[1]);
        end
      end else begin
        checks++;
        if (rd_valid) failures++;
      end
    end
    exp_v[1] <= exp_v[0]; exp_q[1] <= exp_q[0];
    exp_v[0] <= rd_en;    exp_q[0] <= model[rd_addr];
  end

  initial begin
    exp_v[0] = 0; exp_v[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 10'(a); wr_data = 20'($urandom);
      model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      rd_en   = ($urandom % 3) != 0;
      rd_addr = 10'($urandom);
    end
    @(negedge clk); rd_en = 0;
    repeat (4) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
