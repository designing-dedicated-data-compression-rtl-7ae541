// tb_pulse_builder: random events with known pulses, plus injected anomalies
// (second rising edge, falling edge without rising edge, over-long width,
// channel out of range). The expected pulse records (start or distance, and
// width, relative to the event's earliest edge) are computed from the
// generated pulses, not from the edges, and compared in falling-edge order.
// Drop strobes are counted per reason and compared with the injected counts.
module tb_pulse_builder;
  import daq_pkg::*;

  localparam int NCH = 8;
  localparam int MAXW = 50000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, out_valid, out_ready;
  timed_item_t in_item;
  pulse_t      out_pulse;
  logic [3:0]  drop;
  int checks = 0, failures = 0;

  pulse_builder #(.N_CHANNELS(NCH), .MAX_WIDTH(32'(MAXW))) dut (.*);

  typedef struct { longint t; int ch; bit rising; } edge_t;
  typedef struct { longint tf; int ch; longint a; longint w; } exp_t;

  exp_t   expq[$];
  int     inj[4] = '{0, 0, 0, 0};
  int     seen[4] = '{0, 0, 0, 0};
  int     npulses = 0;

  timed_item_t srcq[$];

  task automatic send(timed_item_t it);
    srcq.push_back(it);
  endtask

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_valid <= 1'b0;
      in_item  <= '0;
    end else if (!in_valid || in_ready) begin
      if (srcq.size() != 0 && $urandom_range(0, 3) != 0) begin
        in_valid <= 1'b1;
        in_item  <= srcq.pop_front();
      end else begin
        in_valid <= 1'b0;
      end
    end
  end

  task automatic run_event(longint base);
    edge_t  e[$];
    exp_t   ex[$];
    longint tmin;
    for (int c = 0; c < NCH; c++) begin
      int     np = $urandom_range(0, 3);
      longint t = base + $urandom_range(0, 20000);
      longint lastfall = -1;
      for (int p = 0; p < np; p++) begin
        longint rise, fall;
        bit longw = ($urandom_range(0, 7) == 0);
        if ($urandom_range(0, 5) == 0) begin   // orphan falling edge
          e.push_back('{t + 10, c, 0}); inj[1]++; t += 100;
        end
        if ($urandom_range(0, 5) == 0) begin   // extra rising edge
          e.push_back('{t + 10, c, 1}); inj[0]++; t += 100;
        end
        rise = t + 1 + $urandom_range(0, 30000);
        fall = rise + (longw ? MAXW + 1 + $urandom_range(0, 1000) : $urandom_range(0, MAXW));
        e.push_back('{rise, c, 1});
        e.push_back('{fall, c, 0});
        if (longw) inj[2]++;
        else begin
          ex.push_back('{fall, c, (lastfall < 0) ? rise : rise - lastfall, fall - rise});
          lastfall = fall;
        end
        t = fall + 1;
      end
    end
    if ($urandom_range(0, 3) == 0) begin
      e.push_back('{base + 5000, NCH + 1, 1}); inj[3]++;
    end
    // sort edges by time (stable on equal times: none are equal for one channel)
    e.sort(x) with (x.t);
    tmin = e.size() ? e[0].t : 0;
    // expected records in falling-edge order; 'a' of a first pulse is relative to tmin
    foreach (ex[i]) begin
      bit first = 1;
      foreach (ex[j]) if (j < i && ex[j].ch == ex[i].ch) first = 0;
      if (first) ex[i].a = ex[i].a - tmin;
    end
    ex.sort(x) with (x.tf);
    foreach (ex[i]) expq.push_back(ex[i]);
    npulses += ex.size();
    foreach (e[i]) begin
      timed_item_t it;
      it.eoe = 0; it.channel = 7'(e[i].ch); it.rising = e[i].rising; it.t = 48'(e[i].t);
      send(it);
    end
    begin
      timed_item_t it = '0;
      it.eoe = 1;
      send(it);
      expq.push_back('{-1, -1, 0, 0});
    end
  endtask

  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 4) != 0);
    for (int r = 0; r < 4; r++) if (rst_n && drop[r]) seen[r]++;
    if (out_valid && out_ready) begin
      exp_t x;
      x = expq.pop_front();
      checks++;
      if (x.ch < 0) begin
        if (!out_pulse.eoe) begin failures++; $display("expected eoe"); end
      end else if (out_pulse.eoe || int'(out_pulse.channel) != x.ch ||
                   out_pulse.val_a != 32'(x.a) || out_pulse.width != 32'(x.w)) begin
        failures++;
        $display("pulse mismatch: got eoe=%0d ch=%0d a=%0d w=%0d exp ch=%0d a=%0d w=%0d",
                 out_pulse.eoe, out_pulse.channel, out_pulse.val_a, out_pulse.width, x.ch, x.a, x.w);
      end
    end
  end

  initial begin
    out_ready = 1;
    for (int ev = 0; ev < 200; ev++) run_event(64'd1_000_000_000 * (ev + 1) + $urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (expq.size() == 0);
    repeat (5) @(posedge clk);
    for (int r = 0; r < 4; r++) begin
      checks++;
      if (seen[r] != inj[r]) begin
        failures++;
        $display("drop[%0d]: seen %0d injected %0d", r, seen[r], inj[r]);
      end
    end
    $display("pulses=%0d injected drops=%0d/%0d/%0d/%0d", npulses, inj[0], inj[1], inj[2], inj[3]);
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
