// tb_adaptive_binner: loads four bin tables (pulse counts one per bin; start
// with a zero-width bin for 0, then widths growing to a 32-bit catch-all bin;
// width with simple equal bins starting above 0; distance with random widths)
// and checks bin, offset and offset width of random values against a linear
// search, plus the miss strobe for values below the first bin. Values enter
// every cycle when the output is ready: checks throughput 1 and latency 1.
module tb_adaptive_binner;
  import daq_pkg::*;
  import tans_model_pkg::*;

  localparam int MB = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              in_valid, in_ready, out_valid, out_ready, miss;
  value_t            in_val;
  binned_t           out_bin;
  logic              cfg_we;
  cfg_sel_e          cfg_sel;
  val_type_e         cfg_vtype;
  logic [SYM_W-1:0]  cfg_addr;
  logic [TIME_W-1:0] cfg_data;
  int checks = 0, failures = 0;

  adaptive_binner #(.MAX_BINS(MB)) dut (.*);

  bin_tab bt[4];
  longint unsigned offs[4] = '{0, 0, 100, 0};   // width table starts at 100
  value_t srcq[$];
  binned_t expq[$];
  bit      expmiss[$];
  int      nmiss = 0, seen_miss = 0, nin = 0, nout = 0;

  task automatic cfg(cfg_sel_e s, int t, int a, longint unsigned d);
    @(negedge clk);
    cfg_we = 1; cfg_sel = s; cfg_vtype = val_type_e'(t); cfg_addr = 8'(a); cfg_data = 32'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    int w[$];
    cfg_we = 0; cfg_sel = CFG_BIN_START; cfg_vtype = VT_PULSES; cfg_addr = 0; cfg_data = 0;
    in_valid = 0; in_val = '0; out_ready = 1;
    foreach (bt[t]) bt[t] = new();
    w = {}; for (int i = 0; i < 9; i++) w.push_back(0); w.push_back(32);
    bt[0].set_widths(w);
    w = '{0, 16, 20, 22, 23, 24, 24, 25, 26, 27, 28, 29, 30, 32};
    bt[1].set_widths(w);
    w = {}; for (int i = 0; i < 63; i++) w.push_back(26);
    bt[2].set_widths(w);
    w = {}; for (int i = 0; i < 40; i++) w.push_back($urandom_range(0, 26)); w.push_back(32);
    bt[3].set_widths(w);
    for (int i = 0; i < bt[2].n; i++) bt[2].bstart[i] += offs[2];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      cfg(CFG_NBINS, t, 0, bt[t].n);
      for (int i = 0; i < bt[t].n; i++) begin
        cfg(CFG_BIN_START, t, i, bt[t].bstart[i]);
        cfg(CFG_BIN_WIDTH, t, i, bt[t].bwidth[i]);
      end
    end
    // stimulus with expected results
    for (int n = 0; n < 4000; n++) begin
      value_t v;
      binned_t b;
      int t, bi;
      bit m;
      t = $urandom_range(0, 3);
      v.vtype = val_type_e'(t);
      v.last  = 1'($urandom);
      case ($urandom_range(0, 3))
        0: v.value = $urandom_range(0, 20);
        1: v.value = 32'(64'd1 << $urandom_range(0, 31)) + $urandom_range(0, 3) - 1;
        default: v.value = $urandom >> $urandom_range(0, 31);
      endcase
      bi = bt[t].find(v.value);
      m  = (longint'(v.value) < bt[t].bstart[0]);
      if (m) nmiss++;
      b.vtype = v.vtype; b.bin = 8'(bi); b.nlow = 6'(bt[t].bwidth[bi]);
      b.low = 32'(longint'(v.value) - bt[t].bstart[bi]); b.last = v.last;
      srcq.push_back(v); expq.push_back(b); expmiss.push_back(m);
    end
    @(negedge clk);
    while (srcq.size()) begin
      in_valid = 1; in_val = srcq.pop_front(); nin++;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (seen_miss != nmiss) begin failures++; $display("miss %0d vs %0d", seen_miss, nmiss); end
    checks++;
    if (nout != nin) begin failures++; $display("out %0d in %0d", nout, nin); end
    $display("values=%0d below-range=%0d", nin, nmiss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // latency 1 at full rate: every cycle after the first value has an output
  logic in_q = 0;
  always @(posedge clk) begin
    in_q <= in_valid;
    if (rst_n) begin
      if (in_q) begin
        checks++;
        if (!out_valid) begin failures++; $display("no output one cycle after input"); end
      end
      if (miss) seen_miss++;
      if (out_valid && out_ready) begin
        binned_t x;
        bit m;
        x = expq.pop_front();
        m = expmiss.pop_front();
        nout++;
        checks++;
        if (!m && out_bin !== x) begin
          failures++;
          $display("bin mismatch type %0d: got bin=%0d low=%0d n=%0d exp bin=%0d low=%0d n=%0d",
                   x.vtype, out_bin.bin, out_bin.low, out_bin.nlow, x.bin, x.low, x.nlow);
        end
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
