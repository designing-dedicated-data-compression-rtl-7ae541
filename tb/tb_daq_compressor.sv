// tb_daq_compressor: end-to-end test of the compressor at its default size
// (48 channels, up to 8 pulses per channel, L = 2048 tANS states, 256-symbol
// alphabets, 256 bins per value type).
//
// Tables: pulse counts get one zero-width bin each, with L_s from the pulse
// count frequencies of the reference data sample; start, width and distance
// get adaptive bins (a zero-width bin for start = 0, bins growing with the
// value, a 32-bit catch-all bin at the end) with equal L_s.
//
// Events: each channel fires with the sample's pulse-count frequencies; widths,
// distances and start times are drawn from broad ranges in 10 ps units.
// Anomalies are injected: a second rising edge, a falling edge without a rising
// edge, a width above the filter limit, a channel number out of range, and
// channels with more than 8 pulses. Absolute times are split into epoch,
// coarse and fine counters as the TDC reports them.
//
// Checks: every compressed frame is decoded backwards by the reference decoder
// and must give back exactly the pulse counts and start/width/distance values
// expected from the generated pulses after filtering; it must end in the
// initial state with every bit consumed. Some events run in diagnostic mode and
// must give the raw words. Mechanisms counted (each must occur): filter drops
// of each kind, channel overflow, the input stall during a table rebuild, the
// input stall while an event is read out, output back-pressure, and mode
// switches in both directions.
module tb_daq_compressor;
  import daq_pkg::*;
  import tans_model_pkg::*;

  localparam int NCH = 48, MP = 8, R = 11, L = 1 << R;
  localparam longint MAXW = (1 << 27) - 1;
  localparam int NEV = 160;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              mode, in_valid, in_ready;
  in_item_t          in_item;
  logic              cfg_we;
  cfg_sel_e          cfg_sel;
  val_type_e         cfg_vtype;
  logic [SYM_W-1:0]  cfg_addr;
  logic [TIME_W-1:0] cfg_data;
  logic              build_start, build_busy, build_done, build_err;
  logic              out_valid, out_ready, out_last, out_diag;
  logic [31:0]       out_data;
  logic [5:0]        out_nbits;
  logic [3:0]        drop;
  logic              overflow, bin_miss;

  daq_compressor dut (.*);

  // ------------------------------------------------------------ tables
  tans_tab tt[4];
  bin_tab  bt[4];

  task automatic cfg(cfg_sel_e s, int t, int a, longint unsigned d);
    @(negedge clk);
    cfg_we = 1; cfg_sel = s; cfg_vtype = val_type_e'(t); cfg_addr = 8'(a); cfg_data = 32'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic make_tables();
    int w[$];
    int pl[9] = '{1806, 135, 40, 19, 31, 13, 2, 1, 1};
    foreach (bt[t]) begin bt[t] = new(); tt[t] = new(R, 256); end
    w = {}; for (int i = 0; i < 9; i++) w.push_back(0);
    bt[0].set_widths(w);
    foreach (pl[i]) tt[0].ls[i] = pl[i];
    w = '{0, 16, 18, 20, 21, 22, 23, 24, 24, 24, 25, 25, 26, 27, 28, 29, 30, 32};
    bt[1].set_widths(w);
    w = {}; for (int i = 0; i < 64; i++) w.push_back(10);
    w.push_back(16); w.push_back(20); w.push_back(24); w.push_back(32);
    bt[2].set_widths(w);
    w = '{10, 10, 11, 12, 13, 14, 15, 16, 17, 18, 19, 20, 21, 22, 23, 24, 24, 25, 25, 26, 32};
    bt[3].set_widths(w);
    for (int t = 1; t < 4; t++) begin
      int n = bt[t].n;
      for (int i = 0; i < n; i++) tt[t].ls[i] = L / n + ((i < L % n) ? 1 : 0);
    end
    foreach (tt[t]) tt[t].build();
  endtask

  task automatic load_tables();
    for (int t = 0; t < 4; t++) begin
      cfg(CFG_NBINS, t, 0, bt[t].n);
      for (int i = 0; i < bt[t].n; i++) begin
        cfg(CFG_BIN_START, t, i, bt[t].bstart[i]);
        cfg(CFG_BIN_WIDTH, t, i, bt[t].bwidth[i]);
      end
      for (int s = 0; s < 256; s++) cfg(CFG_LS, t, s, tt[t].ls[s]);
    end
  endtask

  // ------------------------------------------------------------ events
  typedef struct { longint t; int ch; bit rising; } edge_t;
  typedef struct { in_item_t it; bit mode; } src_t;
  typedef struct {
    bit              diag;
    int              cnt[NCH];
    longint unsigned vals[NCH][$];
    logic [31:0]     raw[$];
  } frame_t;

  src_t   srcq[$];
  frame_t expf[$];
  int     inj[4] = '{0, 0, 0, 0};
  int     n_ovf_exp = 0;
  real    pulse_p[9] = '{0.8825, 0.06591, 0.01948, 0.009375, 0.01503, 0.00653, 0.00101, 0.00013, 0.000002};

  function automatic int draw_pulses();
    real u = real'($urandom) / 4294967296.0, acc = 0;
    for (int i = 0; i < 9; i++) begin acc += pulse_p[i]; if (u < acc) return i; end
    return 0;
  endfunction

  function automatic in_item_t to_item(edge_t e);
    in_item_t it;
    longint ct = e.t / 500;
    it.eoe = 0;
    it.hit.channel = 7'(e.ch);
    it.hit.rising = e.rising;
    it.hit.fine = 10'(e.t % 500);
    it.hit.coarse = 11'(ct % 2048);
    it.hit.epoch = 28'(ct / 2048);
    return it;
  endfunction

  task automatic make_event(int ev, bit diag);
    edge_t  e[$];
    frame_t f;
    longint base, tmin;
    bit     firstp[NCH];
    longint lastfall[NCH];
    int     kept[NCH];
    int     li[4] = '{0, 0, 0, 0};
    base = 64'd20_000_000_000 * (ev + 1) + longint'($urandom);
    f.diag = diag;
    for (int c = 0; c < NCH; c++) begin
      int np;
      longint t;
      np = draw_pulses();
      if (ev % 40 == 7 && c == 5) np = 11;               // overflow
      f.cnt[c] = 0;
      f.vals[c] = {};
      kept[c] = 0;
      lastfall[c] = -1;
      t = base + longint'($urandom_range(0, 100_000_000));
      for (int p = 0; p < np; p++) begin
        longint rise, fall, w;
        bit longw;
        longw = ($urandom_range(0, 60) == 0);
        if ($urandom_range(0, 30) == 0) begin e.push_back('{t + 10, c, 0}); li[1]++; t += 100; end
        if ($urandom_range(0, 30) == 0) begin e.push_back('{t + 10, c, 1}); li[0]++; t += 100; end
        rise = t + 1 + longint'($urandom_range(0, 1 << $urandom_range(8, 25)));
        w = longw ? MAXW + 1 + $urandom_range(0, 1000)
                  : ($urandom_range(0, 9) == 0 ? $urandom_range(0, 1 << 22) : 5000 + $urandom_range(0, 20000));
        fall = rise + w;
        e.push_back('{rise, c, 1});
        e.push_back('{fall, c, 0});
        if (longw) li[2]++;
        else begin
          if (kept[c] < MP) begin
            f.vals[c].push_back((lastfall[c] < 0) ? rise : rise - lastfall[c]);
            f.vals[c].push_back(w);
            f.cnt[c]++;
          end else n_ovf_exp++;
          kept[c]++;
          lastfall[c] = fall;
        end
        t = fall + 1;
      end
    end
    if ($urandom_range(0, 9) == 0) begin
      e.push_back('{base + 5000, NCH + 3, 1}); li[3]++;
    end
    if (!diag) foreach (li[r]) inj[r] += li[r];
    e.sort(x) with (x.t);
    tmin = e.size() ? e[0].t : 0;
    for (int c = 0; c < NCH; c++) if (f.cnt[c] > 0) f.vals[c][0] -= tmin;
    // diagnostic words
    begin
      logic [27:0] le;
      foreach (e[i]) begin
        in_item_t it = to_item(e[i]);
        if (i == 0 || it.hit.epoch != le) f.raw.push_back({3'b011, 1'b0, it.hit.epoch});
        le = it.hit.epoch;
        f.raw.push_back({3'b100, it.hit.channel, it.hit.rising, it.hit.coarse, it.hit.fine});
      end
    end
    foreach (e[i]) srcq.push_back('{to_item(e[i]), diag});
    begin
      src_t s;
      s.it = '0; s.it.eoe = 1; s.mode = diag;
      srcq.push_back(s);
    end
    if (!diag || f.raw.size() != 0) expf.push_back(f);
  endtask

  // ------------------------------------------------------------ source
  bit feed_en = 0;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_valid <= 1'b0;
      in_item  <= '0;
      mode     <= 1'b0;
    end else if (!in_valid || in_ready) begin
      if (feed_en && srcq.size() != 0 && $urandom_range(0, 7) != 0) begin
        src_t s;
        s = srcq.pop_front();
        in_valid <= 1'b1;
        in_item  <= s.it;
        mode     <= s.mode;
      end else begin
        in_valid <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------ sink
  logic [31:0] words[$];
  int  nframes = 0, seen_drop[4] = '{0, 0, 0, 0}, seen_ovf = 0;
  int  stall_build = 0, stall_drain = 0, backpressure = 0, sw_to_diag = 0, sw_to_comp = 0;
  int  comp_bits = 0, comp_events = 0, raw_bits = 0;
  bit  last_diag = 0;
  int  bin_miss_seen = 0;
  always @(posedge clk) if (rst_n && bin_miss) bin_miss_seen++;
  tans_model_pkg::bit_reader rd = new();

  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 9) != 0);
    if (rst_n) begin
      for (int r = 0; r < 4; r++) if (drop[r]) seen_drop[r]++;
      if (overflow) seen_ovf++;
      if (in_valid && !in_ready && build_busy) stall_build++;
      if (in_valid && !in_ready && dut.u_chbuf.draining) stall_drain++;
      if (out_valid && !out_ready) backpressure++;
      if (out_valid && out_ready) begin
        words.push_back(out_data);
        if (out_last) check_frame(int'(out_nbits), out_diag);
      end
    end
  end

  task automatic check_frame(int nb, bit diag);
    frame_t f;
    f = expf.pop_front();
    nframes++;
    checks++;
    if (diag != last_diag) begin
      if (diag) sw_to_diag++; else sw_to_comp++;
      last_diag = diag;
    end
    if (diag != f.diag) begin
      failures++; $display("frame %0d: mode %0d expected %0d", nframes, diag, f.diag);
    end else if (diag) begin
      raw_bits += 32 * words.size();
      if (words.size() != f.raw.size()) begin
        failures++; $display("frame %0d: %0d raw words, expected %0d", nframes, words.size(), f.raw.size());
      end else foreach (words[i]) if (words[i] != f.raw[i]) begin
        failures++; $display("frame %0d: raw word %0d differs", nframes, i); break;
      end
    end else begin
      int cnt[];
      longint unsigned vals[][$];
      bit ok;
      comp_bits += 32 * (words.size() - 1) + nb;
      comp_events++;
      rd.load(words, nb);
      ok = decode_event(tt, bt, rd, NCH, cnt, vals);
      if (!ok) begin failures++; $display("frame %0d: decoder did not end cleanly", nframes); end
      for (int c = 0; c < NCH; c++) begin
        checks++;
        if (cnt[c] != f.cnt[c] || vals[c] != f.vals[c]) begin
          failures++;
          $display("frame %0d ch %0d: decoded %0d pulses, expected %0d", nframes, c, cnt[c], f.cnt[c]);
          foreach (vals[c][i]) $display("   got %0d exp %0d", vals[c][i], i < f.vals[c].size() ? f.vals[c][i] : -1);
        end
      end
    end
    words.delete();
  endtask

  task automatic wait_idle();
    while (srcq.size() != 0 || expf.size() != 0 || in_valid) @(posedge clk);
    repeat (5) @(posedge clk);
  endtask

  // ------------------------------------------------------------ main
  initial begin
    int half = NEV / 2;
    cfg_we = 0; cfg_sel = CFG_LS; cfg_vtype = VT_PULSES; cfg_addr = 0; cfg_data = 0;
    build_start = 0; out_ready = 1;
    make_tables();
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_tables();
    @(negedge clk); build_start = 1; @(negedge clk); build_start = 0;
    wait (build_done);
    checks++;
    if (build_err) begin failures++; $display("build error"); end
    for (int ev = 0; ev < half; ev++) make_event(ev, (ev % 20) >= 16);
    feed_en = 1;
    wait_idle();
    // rebuild while events are waiting: the input must stall
    for (int ev = half; ev < NEV; ev++) make_event(ev, (ev % 20) >= 16);
    @(negedge clk); build_start = 1; @(negedge clk); build_start = 0;
    wait (build_done);
    wait_idle();
    checks++;
    if (nframes == 0) begin failures++; $display("no frames"); end
    for (int r = 0; r < 4; r++) begin
      checks++;
      if (seen_drop[r] != inj[r] || inj[r] == 0) begin
        failures++; $display("drop[%0d]: seen %0d injected %0d", r, seen_drop[r], inj[r]);
      end
    end
    checks++;
    if (seen_ovf != n_ovf_exp || n_ovf_exp == 0) begin failures++; $display("overflow %0d vs %0d", seen_ovf, n_ovf_exp); end
    checks++; if (stall_build == 0) begin failures++; $display("no stall during table build"); end
    checks++; if (stall_drain == 0) begin failures++; $display("no stall during read-out"); end
    checks++; if (backpressure == 0) begin failures++; $display("no output back-pressure"); end
    checks++; if (sw_to_diag == 0 || sw_to_comp == 0) begin failures++; $display("mode switch missing"); end
    checks++; if (bin_miss_seen != 0) begin failures++; $display("bin miss"); end
    $display("frames=%0d compressed=%0d bits/event=%0.1f raw bits/event=%0.1f",
             nframes, comp_events, real'(comp_bits) / comp_events,
             real'(raw_bits) / (nframes - comp_events));
    $display("drops %0d/%0d/%0d/%0d overflow=%0d stall(build)=%0d stall(read-out)=%0d backpressure=%0d switches=%0d/%0d",
             seen_drop[0], seen_drop[1], seen_drop[2], seen_drop[3], seen_ovf,
             stall_build, stall_drain, backpressure, sw_to_diag, sw_to_comp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
