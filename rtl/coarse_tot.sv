// coarse_tot: coarse time-over-threshold of one gamma event (combinational).
//
// The readout ASIC tags each event with two coarse timestamps taken from a
// 10-bit free-running counter: T_coarse when the pulse crosses the low
// threshold on its rising edge, E_coarse when it falls below the high
// threshold. The energy measure is d = E_coarse - T_coarse (eq. 1), corrected
// by three hardwired rules that follow the source description:
//   d <= RO_LIMIT (-950)        -> counter rolled over: tot = 1024 + d  (eq. 2)
//   RO_LIMIT < d < 0            -> path-length artefact: tot = 0         (eq. 3)
//   d >= UPPER_BOUND (80)       -> abnormal high value:  tot = 0         (eq. 4)
//   otherwise                   -> tot = d                               (eq. 1)
// A zero TOT is rejected by any lower threshold above zero.
// ENABLE_UPPER_BOUND = 0 drops rule (4); it reproduces the intermediate
// "rollover limit only" filter version and is this design's own switch.
// Interface: t_coarse, e_coarse in; tot (10 bits) and the rule used out.
// Timing: purely combinational; the caller registers the result.
module coarse_tot
  import efilter_pkg::*;
#(
  parameter int RO_LIMIT           = RO_LIMIT_DEFAULT,
  parameter int UPPER_BOUND        = UPPER_BOUND_DEFAULT,
  parameter bit ENABLE_UPPER_BOUND = 1'b1
) (
  input  coarse_t   t_coarse,
  input  coarse_t   e_coarse,
  output coarse_t   tot,
  output tot_rule_e rule
);

  localparam logic signed [COARSE_BITS:0] RO_L = RO_LIMIT[COARSE_BITS:0];
  localparam logic signed [COARSE_BITS:0] UB_L = UPPER_BOUND[COARSE_BITS:0];

  logic signed [COARSE_BITS:0] diff;   // E - T, range -1023 .. +1023

  always_comb begin
    diff = $signed({1'b0, e_coarse}) - $signed({1'b0, t_coarse});
    if (diff <= RO_L) begin
      // 1024 + d: the low 10 bits of d are exactly that value
      tot  = diff[COARSE_BITS-1:0];
      rule = TOT_ROLLOVER;
    end else if (diff < 0) begin
      tot  = '0;
      rule = TOT_PATH_DIFF;
    end else if (ENABLE_UPPER_BOUND && diff >= UB_L) begin
      tot  = '0;
      rule = TOT_ABOVE_UB;
    end else begin
      tot  = diff[COARSE_BITS-1:0];
      rule = TOT_GENERAL;
    end
  end

endmodule
