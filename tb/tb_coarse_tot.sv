// tb_coarse_tot: exhaustive check of the coarse-TOT rules.
//
// Sweeps every pair of 10-bit T_coarse and E_coarse values (about one million
// combinations) through two instances, one with and one without the upper
// bound rule, and compares TOT and rule against the integer reference model.
// Also counts that every rule occurred.
module tb_coarse_tot;
  import efilter_pkg::*;
  import efilter_ref_pkg::*;

  coarse_t   t, e;
  coarse_t   tot_a, tot_b;
  tot_rule_e rule_a, rule_b;
  int checks = 0, failures = 0;
  int seen [4];

  coarse_tot dut_a (.t_coarse(t), .e_coarse(e), .tot(tot_a), .rule(rule_a));
  coarse_tot #(.ENABLE_UPPER_BOUND(1'b0)) dut_b
    (.t_coarse(t), .e_coarse(e), .tot(tot_b), .rule(rule_b));

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_tot, exp_rule;
    for (int ti = 0; ti < 1024; ti++) begin
      for (int ei = 0; ei < 1024; ei++) begin
        t = coarse_t'(ti);
        e = coarse_t'(ei);
        #1;
        exp_tot = ref_tot(ei, ti, -950, 80, 1'b1, exp_rule);
        checks++;
        if (int'(tot_a) != exp_tot || int'(rule_a) != exp_rule) begin
          failures++;
          if (failures < 10)
            $display("FAIL t=%0d e=%0d tot=%0d rule=%0d exp %0d/%0d",
                     ti, ei, tot_a, rule_a, exp_tot, exp_rule);
        end
        seen[exp_rule]++;
        exp_tot = ref_tot(ei, ti, -950, 80, 1'b0, exp_rule);
        checks++;
        if (int'(tot_b) != exp_tot || int'(rule_b) != exp_rule) failures++;
      end
    end
    // spot checks at the printed limits
    t = 10'd1000; e = 10'd50;  #1; checks++; if (tot_a != 10'd74) failures++;   // d = -950
    t = 10'd1000; e = 10'd51;  #1; checks++; if (tot_a != 10'd0)  failures++;   // d = -949
    t = 10'd100;  e = 10'd179; #1; checks++; if (tot_a != 10'd79) failures++;   // d = 79
    t = 10'd100;  e = 10'd180; #1; checks++; if (tot_a != 10'd0)  failures++;   // d = 80
    for (int r = 0; r < 4; r++) begin
      checks++;
      if (seen[r] == 0) begin failures++; $display("FAIL rule %0d never seen", r); end
    end
    $display("rules: general=%0d rollover=%0d pathdiff=%0d above_ub=%0d",
             seen[0], seen[1], seen[2], seen[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
