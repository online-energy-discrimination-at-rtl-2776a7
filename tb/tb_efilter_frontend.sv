// tb_efilter_frontend: end-to-end run of the calibrated filter at full size.
//
// The top keeps all its defaults (calibrated version, 1024 channels).
// 1. Configuration phase: 1024 threshold-setting commands, one per channel, in
//    shuffled order and mixed with commands of another type that must be
//    ignored; n_configured must reach 1024. Thresholds are channel specific,
//    lower 15..30 and upper 60..75 cycles, around the 25/70 window the source
//    found for its detector.
// 2. Acquisition phase: one ASIC packet every 1024 cycles (6.4 us at 160 MHz).
//    Packet loads include 64 events (10 Mevents/s per module), a packet of 340
//    events (the most this design processes inside one period), one packet of
//    447 events (the source's quoted maximum, which needs 1343 cycles), packets whose
//    events are all rejected, header-only packets and packets whose last
//    events are rejected. Event energies are drawn to hit every rule.
// 3. Mid-run reconfiguration of one channel, after which its new window applies.
// The output is compared word by word with a reference filter; each packet
// must be finished within 3N + 2 cycles of its header and inside its period.
// Every mechanism (input stall, each TOT rule, lower/upper threshold reject,
// eop moved to an earlier word, fully emptied packet, ignored command,
// reconfiguration) is counted and must occur at least once.
module tb_efilter_frontend;
  import efilter_pkg::*;
  import efilter_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        cmd_valid = 0;
  filter_cmd_t cmd = '0;
  logic [CHAN_BITS:0] n_configured;
  logic        in_valid = 0, in_ready;
  pkt_word_t   in_word = '0;
  logic        out_valid;
  pkt_word_t   out_word;
  logic        ev_done, ev_kept;
  tot_rule_e   ev_rule;

  efilter_frontend dut (.*);

  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int checks = 0, failures = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  thr_pair_t tab [1024];
  pkt_word_t exp_q [$];

  // mechanism counters
  int n_stall = 0, n_rule [4], n_lo_rej = 0, n_hi_rej = 0, n_eop_moved = 0;
  int n_empty_pkt = 0, n_ignored_cmd = 0, n_reconf = 0, n_kept = 0, n_drop = 0;

  always @(posedge clk) if (rst_n && in_valid && !in_ready) n_stall++;

  // DUT's own per-event strobes must agree with the reference counts
  int dut_done = 0, dut_kept = 0;
  always @(posedge clk) if (rst_n && ev_done) begin
    dut_done++; if (ev_kept) dut_kept++;
  end

  // output monitor
  int last_eop_cycle = -1;
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      pkt_word_t e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected output %h", out_word);
      end else begin
        e = exp_q.pop_front();
        if (out_word !== e) begin
          failures++;
          if (failures < 10) $display("FAIL out %h exp %h", out_word, e);
        end
      end
      if (out_word.eop) last_eop_cycle = cycle;
    end
  end

  task automatic send_cmd(logic [7:0] hdr, int ch, int lo, int hi);
    @(negedge clk);
    cmd_valid = 1; cmd.header = hdr; cmd.channel = chan_t'(ch);
    cmd.lo = thr_t'(lo); cmd.hi = thr_t'(hi);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  function automatic int pick_diff(int kind);
    case (kind)
      0: return -1023 + int'($urandom % 74);        // rollover
      1: return -949 + int'($urandom % 949);        // negative, rejected
      2: return 80 + int'($urandom % 900);          // above upper bound
      3: return int'($urandom % 15);                // low energy
      default: return int'($urandom % 80);          // anywhere valid
    endcase
  endfunction

  // Build, predict and send one packet; mode 0 random, 1 all rejected.
  task automatic run_packet(int n, int nev, int mode);
    pkt_word_t pkt [$];
    pkt_word_t w, hold;
    int d, t, e, ch, tot, rule, r, t0, kept_any;
    bit last_kept;
    w.sop = 1; w.eop = (nev == 0); w.data = mk_header(n);
    pkt.push_back(w);
    for (int i = 0; i < nev; i++) begin
      ch = int'($urandom % 1024);
      r = int'($urandom % 100);
      if (mode == 1) d = pick_diff(r % 4);
      else d = pick_diff(r < 8 ? 0 : r < 14 ? 1 : r < 20 ? 2 : r < 45 ? 3 : 4);
      if (mode == 1 && (r % 4) == 3) d = 0;   // zero TOT, below any lower threshold
      t = d < 0 ? 1023 - int'($urandom % (1024 + d)) : int'($urandom % (1024 - d));
      e = t + d;
      w.sop = 0; w.eop = (i == nev - 1);
      w.data = mk_event(ch, t, e, 34'($urandom));
      pkt.push_back(w);
    end
    // reference prediction
    hold = pkt[0]; kept_any = 0; last_kept = 1;
    for (int i = 1; i < pkt.size(); i++) begin
      w = pkt[i];
      tot = ref_tot(int'(w.data[43:34]), int'(w.data[53:44]), -950, 80, 1'b1, rule);
      n_rule[rule]++;
      last_kept = ref_keep(tot, tab[w.data[63:54]].lo, tab[w.data[63:54]].hi);
      if (last_kept) begin
        exp_q.push_back(hold); hold = w; kept_any++; n_kept++;
      end else begin
        n_drop++;
        if (tot < tab[w.data[63:54]].lo) n_lo_rej++; else n_hi_rej++;
      end
    end
    hold.eop = 1;
    exp_q.push_back(hold);
    if (nev > 0 && !last_kept) n_eop_moved++;
    if (nev > 0 && kept_any == 0) n_empty_pkt++;
    // send with continuous valid
    t0 = -1;
    foreach (pkt[k]) begin
      @(negedge clk);
      in_valid = 1; in_word = pkt[k];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      if (k == 0) t0 = cycle;
    end
    @(negedge clk);
    in_valid = 0;
    // wait for the packet to leave, then check its processing time
    while (last_eop_cycle < t0) @(posedge clk);
    checks++;
    if (last_eop_cycle - t0 > 3 * nev + 2) begin
      failures++; $display("FAIL packet %0d (%0d events) took %0d cycles", n, nev, last_eop_cycle - t0);
    end
    checks++;
    if (mode != 2 && last_eop_cycle - t0 >= 1024) begin
      failures++; $display("FAIL packet %0d exceeds the 1024-cycle period", n);
    end
    if (mode == 2) $display("packet %0d: %0d events processed in %0d cycles", n, nev, last_eop_cycle - t0);
    // idle until the next ASIC packet period
    while (cycle < t0 + 1024) @(posedge clk);
  endtask

  initial begin
    int order [1024];
    int lo, hi, nev;
    for (int r = 0; r < 4; r++) n_rule[r] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // ---------------- configuration phase
    foreach (order[i]) order[i] = i;
    order.shuffle();
    foreach (order[i]) begin
      lo = 15 + int'($urandom % 16);
      hi = 60 + int'($urandom % 16);
      tab[order[i]].lo = thr_t'(lo); tab[order[i]].hi = thr_t'(hi);
      send_cmd(CMD_SET_THRESHOLDS, order[i], lo, hi);
      if (i % 100 == 0) begin
        send_cmd(8'h3C, order[i], 0, 0);   // another command type
        n_ignored_cmd++;
      end
    end
    repeat (2) @(posedge clk);
    checks++;
    if (n_configured != 11'd1024) begin
      failures++; $display("FAIL configured %0d channels", n_configured);
    end

    // ---------------- acquisition phase
    for (int p = 0; p < 40; p++) begin
      case (p % 8)
        0: nev = 64;                       // 10 Mevents/s per module
        1: nev = 0;                        // header only
        2: nev = 340;                      // heaviest packet that fits a period
        3: nev = 5;
        default: nev = 1 + int'($urandom % 120);
      endcase
      run_packet(p, nev, (p % 8) == 3 ? 1 : 0);
      if (p == 20) begin
        // reconfigure one channel between packets
        tab[5].lo = 10'd40; tab[5].hi = 10'd45;
        send_cmd(CMD_SET_THRESHOLDS, 5, 40, 45);
        n_reconf++;
      end
    end
    // the 447-event packet quoted as the maximum: correct output, 3N + 2 cycles
    run_packet(40, 447, 2);
    // a packet only of channel-5 events, checked against the new window
    begin
      pkt_word_t w;
      @(negedge clk);
      in_valid = 1; in_word.sop = 1; in_word.eop = 0; in_word.data = mk_header(99);
      @(posedge clk); while (!in_ready) @(posedge clk);
      exp_q.push_back(in_word);
      for (int i = 0; i < 3; i++) begin
        @(negedge clk);
        in_word.sop = 0; in_word.eop = (i == 2);
        in_word.data = mk_event(5, 200, 200 + (i == 1 ? 42 : 30), 34'(i));
        @(posedge clk); while (!in_ready) @(posedge clk);
      end
      @(negedge clk); in_valid = 0;
      // only the middle event (tot 42) is inside 40..45; the last is dropped
      w.sop = 0; w.eop = 1; w.data = mk_event(5, 200, 242, 34'(1));
      exp_q.push_back(w);
      n_eop_moved++;
      repeat (20) @(posedge clk);
    end

    // ---------------- end checks
    checks++;
    if (exp_q.size() != 0) begin
      failures++; $display("FAIL %0d expected words never came out", exp_q.size());
    end
    checks++;
    if (dut_kept != n_kept + 1 || dut_done != n_kept + n_drop + 3) begin
      failures++; $display("FAIL event strobes done=%0d kept=%0d", dut_done, dut_kept);
    end
    $display("mechanisms: stall=%0d general=%0d rollover=%0d pathdiff=%0d above_ub=%0d",
             n_stall, n_rule[0], n_rule[1], n_rule[2], n_rule[3]);
    $display("            lo_reject=%0d hi_reject=%0d eop_moved=%0d empty_pkt=%0d",
             n_lo_rej, n_hi_rej, n_eop_moved, n_empty_pkt);
    $display("            ignored_cmd=%0d reconfig=%0d kept=%0d dropped=%0d",
             n_ignored_cmd, n_reconf, n_kept, n_drop);
    $display("            reduction=%0d%%", (100 * n_drop) / (n_kept + n_drop));
    if (n_stall == 0)       begin failures++; $display("FAIL no stall"); end
    for (int r = 0; r < 4; r++)
      if (n_rule[r] == 0)   begin failures++; $display("FAIL rule %0d never used", r); end
    if (n_lo_rej == 0)      begin failures++; $display("FAIL no lower-threshold reject"); end
    if (n_hi_rej == 0)      begin failures++; $display("FAIL no upper-threshold reject"); end
    if (n_eop_moved == 0)   begin failures++; $display("FAIL eop never moved"); end
    if (n_empty_pkt == 0)   begin failures++; $display("FAIL no emptied packet"); end
    if (n_ignored_cmd == 0) begin failures++; $display("FAIL no ignored command"); end
    if (n_reconf == 0)      begin failures++; $display("FAIL no reconfiguration"); end
    checks += 10;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
