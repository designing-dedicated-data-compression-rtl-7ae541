// tb_workload_binning: the compressor at its default size running the two
// binnings compared for the start values of a 48-channel detector: simple
// binning with 20 low bits written directly (237 bins of 2^20 values), and
// adaptive binning with about 168 bins.
//
// A training set of events is generated first (pulse counts with the
// reference sample's frequencies, start times spread over about 2^27 units of
// 10 ps). From its start values the testbench derives both bin tables:
//   simple   : bin i = [i * 2^20, (i+1) * 2^20), i = 0..236;
//   adaptive : the minimal-count heuristic. Walking up from 0, each bin starts
//              where the previous one ended and its binWidth grows until the
//              bin holds more than minVal of the sorted training values (or the
//              values run out); minVal is searched for the bin count closest
//              to 168, and the last bin is widened to cover every start value.
// The tANS counts L_s of each bin follow the bin's share of training values,
// every bin keeping at least one state (L_s >= 1, sum L_s = L).
//
// Both configurations are loaded in turn through the cfg port, the coder
// tables are built by the hardware, and the same test events are compressed.
// Checks per frame: the backward reference decoder returns exactly the
// generated values and ends in the initial state; the frame length equals the
// length given by a software tANS encoder running the same tables (tANS bits
// + low bits + R bits of final state). The average cost of a start value
// (state bits plus low bits) is printed for both binnings; adaptive binning
// must come out cheaper.
module tb_workload_binning;
  import daq_pkg::*;
  import tans_model_pkg::*;

  localparam int NCH = 48, R = 11, L = 1 << R;
  localparam int NTRAIN = 400, NTEST = 40;
  localparam int SIMPLE_W = 20, SIMPLE_N = 237, ADAPT_N = 168;

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

  // ------------------------------------------------------------ events
  typedef struct { longint t; int ch; bit rising; } edge_t;
  typedef struct {
    int              cnt[NCH];
    longint unsigned vals[NCH][$];
  } frame_t;

  real pulse_p[9] = '{0.8825, 0.06591, 0.01948, 0.009375, 0.01503, 0.00653, 0.00101, 0.00013, 0.000002};

  function automatic int draw_pulses();
    real u = real'($urandom) / 4294967296.0, acc = 0;
    for (int i = 0; i < 8; i++) begin acc += pulse_p[i]; if (u < acc) return i; end
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

  // One clean event (no anomalies, at most 7 pulses per channel): its edges in
  // time order and the values a decoder must return.
  task automatic make_event(int ev, output frame_t f, output edge_t e[$]);
    longint base, tmin;
    longint lastfall[NCH];
    e = {};
    base = 64'd20_000_000_000 * (ev + 1) + longint'($urandom);
    for (int c = 0; c < NCH; c++) begin
      int np;
      longint t;
      np = draw_pulses();
      f.cnt[c] = np;
      f.vals[c] = {};
      lastfall[c] = -1;
      // channel activity starts early and densely, with a tail of late starts
      if ($urandom_range(0, 3) != 0) t = base + longint'($urandom_range(0, 3_000_000));
      else t = base + longint'($urandom_range(0, 120_000_000));
      for (int p = 0; p < np; p++) begin
        longint rise, fall, w;
        rise = t + 1 + longint'($urandom_range(0, 1 << $urandom_range(8, 22)));
        w = 5000 + $urandom_range(0, 20000);
        fall = rise + w;
        e.push_back('{rise, c, 1});
        e.push_back('{fall, c, 0});
        f.vals[c].push_back((lastfall[c] < 0) ? rise : rise - lastfall[c]);
        f.vals[c].push_back(w);
        lastfall[c] = fall;
        t = fall + 1;
      end
    end
    e.sort(x) with (x.t);
    tmin = e.size() ? e[0].t : 0;
    for (int c = 0; c < NCH; c++) if (f.cnt[c] > 0) f.vals[c][0] -= tmin;
  endtask

  // ------------------------------------------------------------ tables
  tans_tab tt[4];
  bin_tab  bt[4];
  longint unsigned train_start[$];

  // L_s proportional to the bin's share of the sample, at least 1 each.
  function automatic void counts_from_sample(tans_tab t, bin_tab b, longint unsigned v[$]);
    int hist[MAXM];
    int n = b.n, sum = 0, big = 0;
    foreach (hist[i]) hist[i] = 0;
    foreach (v[i]) hist[b.find(v[i])]++;
    for (int i = 0; i < MAXM; i++) t.ls[i] = 0;
    for (int i = 0; i < n; i++) begin
      t.ls[i] = 1 + int'((longint'(L - n) * hist[i]) / v.size());
      sum += t.ls[i];
      if (t.ls[i] > t.ls[big]) big = i;
    end
    t.ls[big] += L - sum;
  endfunction

  // Minimal-count heuristic; returns the number of bins for a given minVal.
  function automatic int adaptive_bins(longint unsigned v[$], int minval, ref int w[$]);
    longint unsigned p = 0, maxv = v[v.size() - 1];
    int i = 0;
    w = {};
    while (p <= maxv) begin
      int bw = 0, n_in = 0;
      forever begin
        int j = i;
        while (j < v.size() && v[j] < p + (64'd1 << bw)) j++;
        n_in = j - i;
        if (n_in > minval || j == v.size()) begin i = j; break; end
        bw++;
      end
      w.push_back(bw);
      p += 64'd1 << bw;
      if (i == v.size()) break;
    end
    // the last bin reaches to the top of the start range
    while (p < (64'd1 << 28)) begin
      p += 64'd1 << w[w.size() - 1];
      w[w.size() - 1]++;
    end
    return w.size();
  endfunction

  task automatic make_common_tables();
    int w[$];
    int pl[9] = '{1806, 135, 40, 19, 31, 13, 2, 1, 1};
    foreach (bt[t]) begin bt[t] = new(); tt[t] = new(R, 256); end
    w = {}; for (int i = 0; i < 9; i++) w.push_back(0);
    bt[0].set_widths(w);
    foreach (pl[i]) tt[0].ls[i] = pl[i];
    w = {}; for (int i = 0; i < 32; i++) w.push_back(10);
    w.push_back(32);
    bt[2].set_widths(w);
    w = '{10, 10, 11, 12, 13, 14, 15, 16, 17, 18, 19, 20, 21, 22, 23, 24, 24, 25, 25, 26, 32};
    bt[3].set_widths(w);
    for (int t = 2; t < 4; t++) begin
      int n;
      n = bt[t].n;
      for (int i = 0; i < n; i++) tt[t].ls[i] = L / n + ((i < L % n) ? 1 : 0);
    end
  endtask

  task automatic cfg(cfg_sel_e s, int t, int a, longint unsigned d);
    @(negedge clk);
    cfg_we = 1; cfg_sel = s; cfg_vtype = val_type_e'(t); cfg_addr = 8'(a); cfg_data = 32'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load_and_build();
    for (int t = 0; t < 4; t++) begin
      tt[t].build();
      cfg(CFG_NBINS, t, 0, bt[t].n);
      for (int i = 0; i < bt[t].n; i++) begin
        cfg(CFG_BIN_START, t, i, bt[t].bstart[i]);
        cfg(CFG_BIN_WIDTH, t, i, bt[t].bwidth[i]);
      end
      for (int s = 0; s < 256; s++) cfg(CFG_LS, t, s, tt[t].ls[s]);
    end
    @(negedge clk); build_start = 1; @(negedge clk); build_start = 0;
    wait (build_done);
    checks++;
    if (build_err) begin failures++; $display("build error"); end
  endtask

  // Software encoding of one frame with the same tables, in the hardware's
  // coding order (the exact reverse of the decoding order). Returns the frame
  // length and adds the cost of the start values to *_bits.
  function automatic int model_length(frame_t f, ref longint start_bits, ref int n_start);
    int x = L, len = R;
    for (int c = NCH - 1; c >= 0; c--) begin
      for (int j = f.vals[c].size() - 1; j >= -1; j--) begin
        int ty, s, nbits, bits;
        longint unsigned v;
        if (j < 0) begin ty = 0; v = longint'(f.cnt[c]); end
        else begin
          v = f.vals[c][j];
          ty = (j == 0) ? 1 : ((j % 2) ? 2 : 3);
        end
        s = bt[ty].find(v);
        tt[ty].enc_step(s, x, nbits, bits);
        len += nbits + bt[ty].bwidth[s];
        if (ty == 1) begin start_bits += nbits + bt[ty].bwidth[s]; n_start++; end
      end
    end
    return len;
  endfunction

  // ------------------------------------------------------------ source
  in_item_t srcq[$];
  frame_t   expf[$];
  bit       feed_en = 0;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_valid <= 1'b0;
      in_item  <= '0;
    end else if (!in_valid || in_ready) begin
      if (feed_en && srcq.size() != 0) begin
        in_valid <= 1'b1;
        in_item  <= srcq.pop_front();
      end else begin
        in_valid <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------ sink
  logic [31:0] words[$];
  int     nframes = 0, frames_now = 0, bin_miss_seen = 0;
  longint start_bits = 0;
  int     n_start = 0;
  tans_model_pkg::bit_reader rd = new();

  always @(posedge clk) if (rst_n && bin_miss) bin_miss_seen++;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      words.push_back(out_data);
      if (out_last) check_frame(int'(out_nbits));
    end
  end

  task automatic check_frame(int nb);
    frame_t f;
    int cnt[];
    longint unsigned vals[][$];
    bit ok;
    int len, mlen;
    f = expf.pop_front();
    nframes++;
    frames_now++;
    len = 32 * (words.size() - 1) + nb;
    mlen = model_length(f, start_bits, n_start);
    checks++;
    if (len != mlen) begin
      failures++; $display("frame %0d: %0d bits, software encoder gives %0d", nframes, len, mlen);
    end
    rd.load(words, nb);
    ok = decode_event(tt, bt, rd, NCH, cnt, vals);
    checks++;
    if (!ok) begin failures++; $display("frame %0d: decoder did not end cleanly", nframes); end
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (cnt[c] != f.cnt[c] || vals[c] != f.vals[c]) begin
        failures++; $display("frame %0d ch %0d: values differ", nframes, c);
      end
    end
    words.delete();
  endtask

  // ------------------------------------------------------------ main
  frame_t test_f[$];
  edge_t  test_e[NTEST][$];

  task automatic run_test_events(output real start_cost);
    in_item_t eoe_it;
    eoe_it = '0;
    eoe_it.eoe = 1;
    start_bits = 0; n_start = 0; frames_now = 0;
    for (int i = 0; i < NTEST; i++) begin
      expf.push_back(test_f[i]);
      foreach (test_e[i][k]) srcq.push_back(to_item(test_e[i][k]));
      srcq.push_back(eoe_it);
    end
    feed_en = 1;
    while (srcq.size() != 0 || expf.size() != 0 || in_valid) @(posedge clk);
    feed_en = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (frames_now != NTEST) begin failures++; $display("%0d frames of %0d", frames_now, NTEST); end
    start_cost = n_start ? real'(start_bits) / n_start : 0.0;
  endtask

  initial begin
    int w[$], best_n, best_mv, n;
    real cost_simple, cost_adapt;
    frame_t f;
    edge_t  e[$];
    cfg_we = 0; cfg_sel = CFG_LS; cfg_vtype = VT_PULSES; cfg_addr = 0; cfg_data = 0;
    build_start = 0; out_ready = 1; mode = 0;

    // training sample and test events
    for (int ev = 0; ev < NTRAIN; ev++) begin
      make_event(ev, f, e);
      for (int c = 0; c < NCH; c++) if (f.cnt[c] > 0) train_start.push_back(f.vals[c][0]);
    end
    for (int ev = 0; ev < NTEST; ev++) begin
      make_event(NTRAIN + ev, f, e);
      test_f.push_back(f);
      test_e[ev] = e;
    end
    train_start.sort();
    make_common_tables();

    repeat (3) @(posedge clk);
    rst_n = 1;

    // simple binning: 20 low bits written, the top bits entropy coded
    w = {};
    for (int i = 0; i < SIMPLE_N; i++) w.push_back(SIMPLE_W);
    bt[1].set_widths(w);
    counts_from_sample(tt[1], bt[1], train_start);
    load_and_build();
    run_test_events(cost_simple);

    // adaptive binning: minVal chosen for the bin count nearest 168
    best_n = 0; best_mv = 1;
    for (int mv = 1; mv < 200; mv++) begin
      n = adaptive_bins(train_start, mv, w);
      if (n <= 256 && (best_n == 0 || (n - ADAPT_N) * (n - ADAPT_N) < (best_n - ADAPT_N) * (best_n - ADAPT_N))) begin
        best_n = n; best_mv = mv;
      end
    end
    n = adaptive_bins(train_start, best_mv, w);
    bt[1] = new();
    bt[1].set_widths(w);
    counts_from_sample(tt[1], bt[1], train_start);
    load_and_build();
    run_test_events(cost_adapt);

    $display("training start values: %0d; simple binning %0d bins, adaptive %0d bins (minVal %0d)",
             train_start.size(), SIMPLE_N, best_n, best_mv);
    $display("start cost: simple %0.2f bits/value, adaptive %0.2f bits/value", cost_simple, cost_adapt);
    checks++;
    if (best_n < ADAPT_N - 20 || best_n > ADAPT_N + 20) begin
      failures++; $display("adaptive bin count %0d far from %0d", best_n, ADAPT_N);
    end
    checks++;
    if (!(cost_adapt < cost_simple)) begin failures++; $display("adaptive binning not cheaper"); end
    checks++;
    if (bin_miss_seen != 0) begin failures++; $display("bin miss"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
