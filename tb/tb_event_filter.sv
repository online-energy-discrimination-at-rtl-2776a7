// tb_event_filter: checks the discrimination module in both threshold modes.
//
// Two instances run side by side: THR_LATENCY = 0 (uncalibrated, one global
// threshold pair 20..70) and THR_LATENCY = 2 (calibrated, thresholds from a
// per-channel table modelled here with the same two-cycle read latency).
// Phase 1 (timing): one packet of 5 in-window events with continuous input.
// The header-to-eop time must be (1 + L) * N + 2 cycles and the input must
// accept one word per 1 + L cycles for events.
// Phase 2 (random): 300 packets of 0..24 events whose E - T differences are
// drawn to hit every rule (rollover, path-length, upper bound, in/out of
// window), sent with random input gaps. The output stream of each instance is
// compared word by word, including the relocated eop flag, with a reference
// filter built from the integer model.
module tb_event_filter;
  import efilter_pkg::*;
  import efilter_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ------------------------------------------------------------ stimulus
  localparam int NPKT = 300;
  thr_pair_t  tab [1024];
  thr_pair_t  glob;
  pkt_word_t  stim [$];
  int         n_words_dir;   // words of the directed packet at the head of stim

  function automatic int pick_diff();
    int r = int'($urandom % 100);
    if (r < 10) return -1023 + int'($urandom % 74);     // rollover region
    if (r < 15) return -949 + int'($urandom % 900);     // deep negative
    if (r < 30) return -1 - int'($urandom % 40);        // path-length region
    if (r < 40) return 80 + int'($urandom % 900);       // above upper bound
    if (r < 45) return 79 + int'($urandom % 2);         // at the bound
    return int'($urandom % 80);                         // valid range
  endfunction

  function automatic void add_packet(int n, int nev, bit directed);
    pkt_word_t w;
    int d, t, e, ch;
    w.sop = 1; w.eop = (nev == 0); w.data = mk_header(n);
    stim.push_back(w);
    for (int i = 0; i < nev; i++) begin
      if (directed) begin ch = 7; t = 100; d = 40; end
      else begin
        ch = int'($urandom % 1024);
        d  = pick_diff();
        t  = d < 0 ? 1023 - int'($urandom % (1024 + d)) : int'($urandom % (1024 - d));
      end
      e = t + d;
      w.sop = 0; w.eop = (i == nev - 1);
      w.data = mk_event(ch, t, e, 34'($urandom));
      stim.push_back(w);
    end
  endfunction

  // reference filter: expected output stream for a threshold mode
  function automatic void expect_stream(bit per_channel, ref pkt_word_t q[$], ref int cnt[6]);
    pkt_word_t w, hold;
    bit hv = 0;
    int tot, rule, lo, hi;
    foreach (stim[k]) begin
      w = stim[k];
      if (w.sop) begin
        hold = w; hv = 1;
      end else begin
        tot = ref_tot(int'(w.data[43:34]), int'(w.data[53:44]), -950, 80, 1'b1, rule);
        lo = per_channel ? int'(tab[w.data[63:54]].lo) : int'(glob.lo);
        hi = per_channel ? int'(tab[w.data[63:54]].hi) : int'(glob.hi);
        cnt[rule]++;
        if (ref_keep(tot, lo, hi)) begin
          cnt[4]++;
          q.push_back(hold);
          hold = w;
        end else cnt[5]++;
      end
      if (w.eop && hv) begin
        hold.eop = 1; q.push_back(hold); hv = 0;
      end
    end
  endfunction

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // --------------------------------------------------------- two instances
  int done_cnt = 0;
  bit go = 0;

  for (genvar g = 0; g < 2; g++) begin : g_inst
    localparam int unsigned L = 2 * g;
    logic      in_valid, in_ready, out_valid, thr_req, ev_done, ev_kept;
    pkt_word_t in_word, out_word;
    chan_t     thr_chan;
    thr_pair_t thr_in;
    tot_rule_e ev_rule;

    event_filter #(.THR_LATENCY(L)) dut (
      .clk, .rst_n, .in_valid, .in_ready, .in_word, .out_valid, .out_word,
      .thr_req, .thr_chan, .thr_in, .ev_done, .ev_kept, .ev_rule);

    // threshold source
    if (L == 0) begin : g_glob
      assign thr_in = glob;
    end else begin : g_tab
      chan_t c1, c2;
      always @(posedge clk) begin c1 <= thr_chan; c2 <= c1; end
      assign thr_in = tab[c2];
    end

    pkt_word_t exp_q [$];
    int        cnt [6];
    int        t_hdr, t_eop, t_hdr2;
    int        got = 0;

    // output monitor
    always @(posedge clk) begin
      if (rst_n && out_valid && go) begin
        pkt_word_t e;
        checks++;
        if (exp_q.size() == 0) begin
          failures++; $display("FAIL L=%0d unexpected output %h", L, out_word);
        end else begin
          e = exp_q.pop_front();
          if (out_word !== e) begin
            failures++;
            if (failures < 10) $display("FAIL L=%0d out %h exp %h", L, out_word, e);
          end
        end
        got++;
        if (out_word.eop && t_eop < 0) t_eop = cycle;
      end
    end

    // driver
    initial begin
      int idx = 0;
      in_valid = 0; in_word = '0; t_hdr = -1; t_eop = -1; t_hdr2 = -1;
      wait (go);
      while (idx < stim.size()) begin
        @(negedge clk);
        if (idx <= n_words_dir || ($urandom % 4) != 0) begin
          in_valid = 1; in_word = stim[idx];
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          if (idx == 0) t_hdr = cycle;
          if (idx == n_words_dir) t_hdr2 = cycle;
          idx++;
        end else begin
          in_valid = 0;
        end
      end
      @(negedge clk);
      in_valid = 0;
      repeat (10) @(posedge clk);
      done_cnt++;
    end
  end

  // ------------------------------------------------------------- sequence
  initial begin
    int nev_dir = 5;
    glob.lo = 10'd20; glob.hi = 10'd70;
    foreach (tab[c]) begin
      tab[c].lo = thr_t'($urandom % 40);
      tab[c].hi = thr_t'(30 + $urandom % 994);
    end
    tab[7].lo = 10; tab[7].hi = 100;
    add_packet(0, nev_dir, 1'b1);
    n_words_dir = stim.size();
    for (int p = 1; p <= NPKT; p++) add_packet(p, int'($urandom % 25), 1'b0);
    expect_stream(1'b0, g_inst[0].exp_q, g_inst[0].cnt);
    expect_stream(1'b1, g_inst[1].exp_q, g_inst[1].cnt);

    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    go = 1;
    wait (done_cnt == 2);

    // timing of the directed packet
    checks++;
    if (g_inst[0].t_eop - g_inst[0].t_hdr != nev_dir + 2) begin
      failures++; $display("FAIL L=0 packet time %0d", g_inst[0].t_eop - g_inst[0].t_hdr);
    end
    checks++;
    if (g_inst[1].t_eop - g_inst[1].t_hdr != 3 * nev_dir + 2) begin
      failures++; $display("FAIL L=2 packet time %0d", g_inst[1].t_eop - g_inst[1].t_hdr);
    end
    checks++;
    if (g_inst[0].t_hdr2 - g_inst[0].t_hdr != 1 + nev_dir) begin
      failures++; $display("FAIL L=0 input rate %0d", g_inst[0].t_hdr2 - g_inst[0].t_hdr);
    end
    checks++;
    if (g_inst[1].t_hdr2 - g_inst[1].t_hdr != 1 + 3 * nev_dir) begin
      failures++; $display("FAIL L=2 input rate %0d", g_inst[1].t_hdr2 - g_inst[1].t_hdr);
    end
    for (int g = 0; g < 2; g++) begin
      checks++;
      if ((g == 0 ? g_inst[0].exp_q.size() : g_inst[1].exp_q.size()) != 0) begin
        failures++; $display("FAIL L=%0d missing output words", 2 * g);
      end
    end
    $display("L=0: general=%0d rollover=%0d pathdiff=%0d above_ub=%0d kept=%0d dropped=%0d",
      g_inst[0].cnt[0], g_inst[0].cnt[1], g_inst[0].cnt[2], g_inst[0].cnt[3],
      g_inst[0].cnt[4], g_inst[0].cnt[5]);
    for (int r = 0; r < 6; r++) begin
      checks++;
      if (g_inst[1].cnt[r] == 0 || g_inst[0].cnt[r] == 0) begin
        failures++; $display("FAIL case %0d never exercised", r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
