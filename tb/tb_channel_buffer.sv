// tb_channel_buffer: random events of pulses on 6 channels (up to 6 pulses on
// a channel, 4 kept) fed in random channel interleaving. The expected read-out
// (reverse channel order; per channel last pulse first: width, then distance
// or start; then the kept pulse count; last flag on channel 0's count) is
// built from the generated pulses. Also checks the overflow strobe count, that
// the input is stalled while draining, and that a drain takes exactly one cycle
// per value when the output is always ready.
module tb_channel_buffer;
  import daq_pkg::*;

  localparam int NCH = 6;
  localparam int MP  = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   in_valid, in_ready, out_valid, out_ready, overflow, draining;
  pulse_t in_pulse;
  value_t out_val;
  int checks = 0, failures = 0;

  channel_buffer #(.N_CHANNELS(NCH), .MAX_PULSES(MP)) dut (.*);

  pulse_t srcq[$];
  value_t expq[$];
  int     exp_len[$];
  int     n_ovf = 0, seen_ovf = 0, nev = 0, done_ev = 0;
  int     drain_cycles = 0;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_valid <= 1'b0;
      in_pulse <= '0;
    end else if (!in_valid || in_ready) begin
      if (srcq.size() != 0 && $urandom_range(0, 3) != 0) begin
        in_valid <= 1'b1;
        in_pulse <= srcq.pop_front();
      end else begin
        in_valid <= 1'b0;
      end
    end
  end

  task automatic make_event();
    int np[NCH];
    int a[NCH][8], w[NCH][8];
    int idx[NCH];
    int left = 0, nvals = 0;
    foreach (np[c]) begin
      np[c] = ($urandom_range(0, 2) == 0) ? $urandom_range(0, 6) : 0;
      left += np[c];
      idx[c] = 0;
      for (int p = 0; p < np[c]; p++) begin a[c][p] = $urandom; w[c][p] = $urandom; end
      if (np[c] > MP) n_ovf += np[c] - MP;
    end
    // random interleaving, order within a channel kept
    while (left > 0) begin
      int c = $urandom_range(0, NCH - 1);
      if (idx[c] < np[c]) begin
        pulse_t p;
        p.eoe = 0; p.channel = 7'(c); p.val_a = a[c][idx[c]]; p.width = w[c][idx[c]];
        srcq.push_back(p);
        idx[c]++; left--;
      end
    end
    begin pulse_t p = '0; p.eoe = 1; srcq.push_back(p); end
    for (int c = NCH - 1; c >= 0; c--) begin
      int k = (np[c] > MP) ? MP : np[c];
      for (int p = k - 1; p >= 0; p--) begin
        expq.push_back('{VT_WIDTH, 32'(w[c][p]), 1'b0});
        expq.push_back('{(p == 0) ? VT_START : VT_DISTANCE, 32'(a[c][p]), 1'b0});
        nvals += 2;
      end
      expq.push_back('{VT_PULSES, 32'(k), c == 0});
      nvals++;
    end
    exp_len.push_back(nvals);
    nev++;
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      if (overflow) seen_ovf++;
      if (draining) begin
        drain_cycles++;
        checks++;
        if (in_ready) begin failures++; $display("input not stalled while draining"); end
      end
      if (out_valid && out_ready) begin
        value_t x;
        x = expq.pop_front();
        checks++;
        if (out_val !== x) begin
          failures++;
          $display("value mismatch: got t=%0d v=%0d l=%0d exp t=%0d v=%0d l=%0d",
                   out_val.vtype, out_val.value, out_val.last, x.vtype, x.value, x.last);
        end
        if (out_val.last) begin
          int n;
          n = exp_len.pop_front();
          checks++;
          if (drain_cycles != n) begin
            failures++;
            $display("drain took %0d cycles for %0d values", drain_cycles, n);
          end
          drain_cycles = 0;
          done_ev++;
        end
      end
    end
  end

  initial begin
    out_ready = 1;
    for (int e = 0; e < 300; e++) make_event();
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done_ev == nev);
    repeat (3) @(posedge clk);
    checks++;
    if (seen_ovf != n_ovf) begin failures++; $display("overflow %0d vs %0d", seen_ovf, n_ovf); end
    $display("events=%0d overflowed pulses=%0d", nev, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
