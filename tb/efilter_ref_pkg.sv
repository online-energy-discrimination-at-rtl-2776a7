// efilter_ref_pkg: reference model used by the filter testbenches.
//
// Recomputes the coarse TOT in plain integer arithmetic, straight from the
// four equations of the filtering rules, without the bit tricks of the RTL
// (the rollover case is computed as an explicit 1024 + d), and builds event
// words field by field.
package efilter_ref_pkg;

  // Reference coarse TOT. rule: 0 general, 1 rollover, 2 path diff, 3 upper bound.
  function automatic int ref_tot(int e, int t, int ro, int ub, bit ub_en, output int rule);
    int d;
    d = e - t;
    if (d <= ro)              begin rule = 1; return 1024 + d; end
    if (d > ro && d < 0)      begin rule = 2; return 0; end
    if (ub_en && d >= ub)     begin rule = 3; return 0; end
    rule = 0;
    return d;
  endfunction

  function automatic bit ref_keep(int tot, int lo, int hi);
    return (tot >= lo) && (tot <= hi);
  endfunction

  // Event word: channel [63:54], T_coarse [53:44], E_coarse [43:34], rest [33:0].
  function automatic logic [63:0] mk_event(int ch, int t, int e, logic [33:0] rest);
    logic [63:0] w;
    w = 64'(ch & 1023) << 54;
    w |= 64'(t & 1023) << 44;
    w |= 64'(e & 1023) << 34;
    w |= 64'(rest);
    return w;
  endfunction

  // Header word: tagged pattern with the packet number (content is opaque).
  function automatic logic [63:0] mk_header(int n);
    return {32'hA5A5_0000 | 32'(n & 16'hFFFF), 32'hC0DE_0000 | 32'(n & 16'hFFFF)};
  endfunction

endpackage
