// tb_tdc_time_calc: checks t = fine + 500*(coarse + 2048*epoch) on random
// measurements (including the extremes), under random output back-pressure,
// and that end-of-event markers pass through in order. Latency must be 1.
module tb_tdc_time_calc;
  import daq_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, out_valid, out_ready;
  in_item_t    in_item;
  timed_item_t out_item;
  int checks = 0, failures = 0;

  tdc_time_calc dut (.*);

  longint unsigned exp_t[$];
  bit              exp_e[$];
  int sent = 0, got = 0;
  localparam int N = 2000;

  function automatic in_item_t rnd_item(int i);
    in_item_t it;
    it.eoe         = ($urandom_range(0, 9) == 0);
    it.hit.channel = 7'($urandom);
    it.hit.rising  = 1'($urandom);
    it.hit.fine    = 10'($urandom_range(0, 499));
    it.hit.coarse  = 11'($urandom);
    it.hit.epoch   = 28'($urandom);
    if (i == 0) begin it.eoe = 0; it.hit.fine = 499; it.hit.coarse = 2047; it.hit.epoch = '1; end
    if (i == 1) begin it.eoe = 0; it.hit.fine = 0;   it.hit.coarse = 0;    it.hit.epoch = '0; end
    return it;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  // source: a new item whenever the previous one was taken (or none pending)
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_valid <= 1'b0;
      in_item  <= '0;
    end else if (!in_valid || in_ready) begin
      if (sent < N && $urandom_range(0, 2) != 0) begin
        in_valid <= 1'b1;
        in_item  <= rnd_item(sent);
        sent++;
      end else begin
        in_valid <= 1'b0;
      end
    end
  end

  // latency: an item accepted into an empty stage is valid on the next cycle
  logic acc_q = 1'b0;
  int   lat_checks = 0;
  always @(posedge clk) begin
    acc_q <= in_valid && in_ready && !out_valid;
    if (acc_q) begin
      checks++;
      lat_checks++;
      if (!out_valid) begin failures++; $display("latency not 1"); end
    end
  end

  // scoreboard
  always @(posedge clk) begin
    if (in_valid && in_ready) begin
      exp_t.push_back(longint'(in_item.hit.fine) +
                      500 * (longint'(in_item.hit.coarse) + 2048 * longint'(in_item.hit.epoch)));
      exp_e.push_back(in_item.eoe);
    end
    if (out_valid && out_ready) begin
      longint unsigned t;
      bit e;
      t = exp_t.pop_front();
      e = exp_e.pop_front();
      checks++;
      if (out_item.eoe != e || (!e && out_item.t != t[ABS_W-1:0])) begin
        failures++;
        $display("mismatch: got t=%0d eoe=%0d exp t=%0d eoe=%0d", out_item.t, out_item.eoe, t, e);
      end
      got++;
    end
    out_ready <= ($urandom_range(0, 3) != 0);
  end

  // latency: a single item into an empty stage appears on the next cycle
  initial begin
    wait (got == N);
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("sent=%0d got=%0d", sent, got);
    failures++;
    $display("watchdog expired at %0t", $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
