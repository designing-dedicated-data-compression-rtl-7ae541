// tb_raw_formatter: random events (some empty) whose hits mostly share an
// epoch and sometimes move to the next one. Expected words are built from the
// word layout: an epoch word at the first hit of an event and whenever the
// epoch changes, then the main word of every hit; the last word of a non-empty
// event carries out_last. Random output back-pressure.
module tb_raw_formatter;
  import daq_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        in_valid, in_ready, out_valid, out_ready, out_last;
  in_item_t    in_item;
  logic [31:0] out_data;

  raw_formatter dut (.*);

  in_item_t srcq[$];
  logic [32:0] expq[$];   // {last, word}
  int n_epoch_words = 0;

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

  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && out_valid && out_ready) begin
      logic [32:0] x;
      x = expq.pop_front();
      checks++;
      if ({out_last, out_data} !== x) begin
        failures++;
        $display("word mismatch: got %0d/%h exp %0d/%h", out_last, out_data, x[32], x[31:0]);
      end
    end
  end

  initial begin
    logic [27:0] ep = 28'h0ABCDE0;
    out_ready = 0;
    for (int e = 0; e < 300; e++) begin
      int nh;
      logic [32:0] ev[$];
      logic [27:0] last_ep;
      ev.delete();
      nh = ($urandom_range(0, 4) == 0) ? 0 : $urandom_range(1, 12);
      for (int h = 0; h < nh; h++) begin
        in_item_t it;
        if ($urandom_range(0, 5) == 0) ep++;
        it.eoe = 0;
        it.hit.channel = 7'($urandom_range(0, 47));
        it.hit.rising = 1'($urandom);
        it.hit.fine = 10'($urandom_range(0, 499));
        it.hit.coarse = 11'($urandom);
        it.hit.epoch = ep;
        srcq.push_back(it);
        if (h == 0 || ep != last_ep) begin
          ev.push_back({1'b0, 3'b011, 1'b0, ep});
          n_epoch_words++;
        end
        last_ep = ep;
        ev.push_back({1'b0, 3'b100, it.hit.channel, it.hit.rising, it.hit.coarse, it.hit.fine});
      end
      begin in_item_t it = '0; it.eoe = 1; srcq.push_back(it); end
      if (ev.size() != 0) ev[ev.size() - 1][32] = 1'b1;
      foreach (ev[i]) expq.push_back(ev[i]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (expq.size() == 0 && srcq.size() == 0);
    repeat (10) @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("extra word"); end
    $display("epoch words=%0d", n_epoch_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
