// tb_tans_encoder: two instances.
//  1. The 4-state example: L = 4, Pr(a) = 3/4, Pr(b) = 1/4 with nb[a] = 2,
//     nb[b] = 12, start[a] = -3, start[b] = 2, encodingTable = {4,6,7,5}.
//     Encoding "baaaabb" from x = 4 must give the bits 00100001 and end in
//     state 5, which is appended as 5 - 4 = 01.
//  2. L = 2048, 256-symbol alphabets, tables from the reference model with
//     random counts for each of the four value types; random symbols with
//     random low bits and frame ends are compared field by field with the
//     model's encoding step.
// One value per cycle at full rate, latency 1.
module tb_tans_encoder;
  import daq_pkg::*;
  import tans_model_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---------------------------------------------------- example instance
  logic    s_in_valid, s_in_ready, s_out_valid;
  binned_t s_in_bin;
  field_t  s_out_field;
  tbl_wr_if #(.R(2)) s_tw ();
  tans_encoder #(.R(2), .M(2)) dut_s (
    .clk, .rst_n, .in_valid(s_in_valid), .in_ready(s_in_ready), .in_bin(s_in_bin),
    .out_valid(s_out_valid), .out_ready(1'b1), .out_field(s_out_field), .tw(s_tw.dst));

  // ---------------------------------------------------- full-size instance
  logic    in_valid, in_ready, out_valid;
  binned_t in_bin;
  field_t  out_field;
  tbl_wr_if #(.R(11)) tw ();
  tans_encoder dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_bin,
    .out_valid, .out_ready(1'b1), .out_field, .tw(tw.dst));

  string s_bits = "";
  int    nout = 0;

  function automatic string bstr(longint unsigned v, int n);
    string r = "";
    for (int i = n - 1; i >= 0; i--) r = {r, v[i] ? "1" : "0"};
    return r;
  endfunction

  always @(posedge clk) if (rst_n && s_out_valid) s_bits = {s_bits, bstr(s_out_field.data, int'(s_out_field.len))};

  // expected fields of the large instance
  field_t expq[$];
  binned_t inq[$];
  logic [31:0] fw[$];
  int          fb = 0;
  tans_tab tt[4];
  bin_tab  bt[4];

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      field_t x;
      binned_t dbg;
      x = expq.pop_front();
      dbg = inq.pop_front();
      nout++;
      checks++;
      if (out_field.len != x.len || out_field.last != x.last ||
          (out_field.data & ((64'd1 << out_field.len) - 1)) != x.data) begin
        failures++;
        $display("field mismatch: got %0d/%h exp %0d/%h (n=%0d t=%0d s=%0d nl=%0d last=%0d)", out_field.len, out_field.data, x.len, x.data, nout, dbg.vtype, dbg.bin, dbg.nlow, dbg.last);
      end
    end
  end

  task automatic tw_small(tw_kind_e k, int a, int e, int n, int s);
    @(negedge clk);
    s_tw.we = 1; s_tw.kind = k; s_tw.vtype = VT_PULSES; s_tw.addr = 2'(a);
    s_tw.enc_x = 3'(e); s_tw.nb = 6'(n); s_tw.st = 4'(s);
  endtask

  initial begin
    s_tw.we = 0; s_in_valid = 0; s_in_bin = '0;
    tw.we = 0; in_valid = 0; in_bin = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // example tables
    tw_small(TW_NB, 0, 0, 2, -3);
    tw_small(TW_NB, 1, 0, 12, 2);
    tw_small(TW_ENC, 0, 4, 0, 0);
    tw_small(TW_ENC, 1, 6, 0, 0);
    tw_small(TW_ENC, 2, 7, 0, 0);
    tw_small(TW_ENC, 3, 5, 0, 0);
    @(negedge clk); s_tw.we = 0;
    begin
      string msg = "baaaabb";
      for (int i = 0; i < msg.len(); i++) begin
        s_in_valid = 1;
        s_in_bin = '0;
        s_in_bin.vtype = VT_PULSES;
        s_in_bin.bin = (msg[i] == "b") ? 8'd1 : 8'd0;
        s_in_bin.last = (i == msg.len() - 1);
        @(negedge clk);
      end
      s_in_valid = 0;
    end
    repeat (2) @(negedge clk);
    checks++;
    if (s_bits != "0010000101") begin
      failures++;
      $display("example: got %s expected 00100001 then final state 01", s_bits);
    end else $display("example baaaabb -> %s (bits 00100001, final state 5)", s_bits);

    // full-size tables from random counts
    for (int t = 0; t < 4; t++) begin
      int m, left;
      m = (t == 0) ? 10 : $urandom_range(2, 256);
      left = 2048;
      tt[t] = new(11, 256);
      for (int s = 0; s < m; s++) begin
        tt[t].ls[s] = (s == m - 1) ? left : $urandom_range(1, (left - (m - 1 - s)) / 2 > 1 ? (left - (m - 1 - s)) / 2 : 1);
        left -= tt[t].ls[s];
      end
      tt[t].build();
      for (int s = 0; s < 256; s++) if (tt[t].ls[s] > 0) begin
        @(negedge clk);
        tw.we = 1; tw.kind = TW_NB; tw.vtype = val_type_e'(t); tw.addr = 11'(s);
        tw.nb = 17'(tt[t].nb[s]); tw.st = 13'(tt[t].start[s]);
      end
      for (int a = 0; a < 2048; a++) begin
        @(negedge clk);
        tw.we = 1; tw.kind = TW_ENC; tw.vtype = val_type_e'(t); tw.addr = 11'(a);
        tw.enc_x = 12'(tt[t].enc[a]);
      end
    end
    @(negedge clk); tw.we = 0;
    // random symbols
    begin
      int x = 2048;
      for (int n = 0; n < 5000; n++) begin
        int t, s, nbits, bits, nl;
        longint unsigned low;
        field_t f;
        t = $urandom_range(0, 3);
        do s = $urandom_range(0, 255); while (tt[t].ls[s] == 0);
        nl = $urandom_range(0, 32);
        low = (nl == 0) ? 0 : (longint'($urandom) & ((64'd1 << nl) - 1));
        in_bin.vtype = val_type_e'(t); in_bin.bin = 8'(s); in_bin.low = 32'(low);
        in_bin.nlow = 6'(nl); in_bin.last = ($urandom_range(0, 30) == 0) || (n == 4999);
        tt[t].enc_step(s, x, nbits, bits);
        f.data = (64'(bits) << nl) | low;
        f.len = 7'(nbits + nl);
        f.last = in_bin.last;
        if (in_bin.last) begin
          f.data = (f.data << 11) | 64'(x - 2048);
          f.len += 11;
          x = 2048;
        end
        expq.push_back(f);
        inq.push_back(in_bin);
        in_valid = 1;
        @(negedge clk);
      end
      in_valid = 0;
    end
    repeat (3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d fields missing", expq.size()); end
    $display("fields=%0d", nout);
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
