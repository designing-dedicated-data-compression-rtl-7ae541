// tb_bit_packer: random fields of 0..64 bits with random frame ends and
// random output back-pressure. For each frame the output words (bit 31 first,
// only out_nbits bits of the last word) must reproduce exactly the
// concatenated field bits, the last word must carry out_last, the padding
// must be zero, and no other word may carry it.
module tb_bit_packer;
  import daq_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        in_valid, in_ready, out_valid, out_ready, out_last;
  field_t      in_field;
  logic [31:0] out_data;
  logic [5:0]  out_nbits;

  bit_packer dut (.*);

  field_t srcq[$];
  string  exp_frames[$];
  string  cur = "";
  int     nframes = 0, done_frames = 0;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_valid <= 1'b0;
      in_field <= '0;
    end else if (!in_valid || in_ready) begin
      if (srcq.size() != 0 && $urandom_range(0, 3) != 0) begin
        in_valid <= 1'b1;
        in_field <= srcq.pop_front();
      end else begin
        in_valid <= 1'b0;
      end
    end
  end

  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && out_valid && out_ready) begin
      for (int b = 0; b < int'(out_nbits); b++) cur = {cur, out_data[31 - b] ? "1" : "0"};
      if (out_nbits < 32) begin
        checks++;
        if ((out_data & ((32'd1 << (32 - out_nbits)) - 1)) != 0) begin
          failures++; $display("padding not zero");
        end
      end
      if (out_last) begin
        string e;
        e = exp_frames.pop_front();
        checks++;
        if (cur != e) begin
          failures++;
          $display("frame %0d differs:\n got %s\n exp %s", done_frames, cur, e);
        end
        cur = "";
        done_frames++;
      end else begin
        checks++;
        if (out_nbits != 32) begin failures++; $display("short word without last"); end
      end
    end
  end

  initial begin
    string e = "";
    out_ready = 0;
    for (int n = 0; n < 6000; n++) begin
      field_t f;
      int len;
      len = $urandom_range(0, 64);
      f.data = {$urandom, $urandom};
      f.len = 7'(len);
      f.last = ($urandom_range(0, 20) == 0) || (n == 5999);
      for (int b = len - 1; b >= 0; b--) e = {e, f.data[b] ? "1" : "0"};
      if (f.last && e.len() == 0) begin
        f.len = 1; e = f.data[0] ? "1" : "0";
      end
      srcq.push_back(f);
      if (f.last) begin exp_frames.push_back(e); e = ""; nframes++; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done_frames == nframes);
    repeat (3) @(posedge clk);
    $display("frames=%0d", nframes);
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
