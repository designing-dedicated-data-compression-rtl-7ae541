// tb_tans_table_builder: writes random symbol counts L_s (summing to L) for
// the four value types, runs a build and captures every table write. nb[s],
// start[s] and the encoding table must equal those of the reference model,
// which follows the spread and preparation algorithms independently. The
// build must take 4 * (2M + 2L) cycles. A second build with counts that do
// not sum to L must raise err.
module tb_tans_table_builder;
  import daq_pkg::*;
  import tans_model_pkg::*;

  localparam int R = 11, L = 1 << R, M = 256;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              cfg_we;
  cfg_sel_e          cfg_sel;
  val_type_e         cfg_vtype;
  logic [SYM_W-1:0]  cfg_addr;
  logic [TIME_W-1:0] cfg_data;
  logic              start, busy, done, err;
  tbl_wr_if #(.R(R)) tw ();

  tans_table_builder #(.R(R), .M(M)) dut (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_vtype, .cfg_addr, .cfg_data,
    .start, .busy, .done, .err, .tw(tw.src));

  tans_tab tt[4];
  int enc_got [4][L];
  int nb_got  [4][M];
  int st_got  [4][M];
  int busy_cycles = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (busy) busy_cycles++;
      if (tw.we) begin
        if (tw.kind == TW_ENC) enc_got[tw.vtype][tw.addr] = int'(tw.enc_x);
        else begin
          nb_got[tw.vtype][tw.addr] = int'(tw.nb);
          st_got[tw.vtype][tw.addr] = int'(tw.st);
        end
      end
    end
  end

  task automatic cfg(int t, int a, int d);
    @(negedge clk);
    cfg_we = 1; cfg_sel = CFG_LS; cfg_vtype = val_type_e'(t); cfg_addr = 8'(a); cfg_data = 32'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    cfg_we = 0; cfg_sel = CFG_LS; cfg_vtype = VT_PULSES; cfg_addr = 0; cfg_data = 0; start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      int m, left;
      m = (t == 0) ? 9 : $urandom_range(1, 256);
      left = L;
      tt[t] = new(R, M);
      for (int s = 0; s < m; s++) begin
        int hi;
        hi = (left - (m - 1 - s)) / 2;
        if (hi < 1) hi = 1;
        tt[t].ls[s] = (s == m - 1) ? left : $urandom_range(1, hi);
        if ($urandom_range(0, 4) == 0 && s != m - 1) tt[t].ls[s] = 0;  // unused symbol
        left -= tt[t].ls[s];
      end
      tt[t].build();
      for (int s = 0; s < M; s++) cfg(t, s, tt[t].ls[s]);
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    busy_cycles = 0;
    wait (done);
    @(negedge clk);
    checks++;
    if (busy_cycles != 4 * (2 * M + 2 * L)) begin
      failures++; $display("build took %0d cycles", busy_cycles);
    end
    checks++;
    if (err) begin failures++; $display("err raised on a valid table"); end
    for (int t = 0; t < 4; t++) begin
      for (int s = 0; s < M; s++) if (tt[t].ls[s] > 0) begin
        checks++;
        if (nb_got[t][s] != tt[t].nb[s] || st_got[t][s] != tt[t].start[s]) begin
          failures++;
          $display("t%0d s%0d: nb %0d/%0d start %0d/%0d", t, s, nb_got[t][s], tt[t].nb[s], st_got[t][s], tt[t].start[s]);
        end
      end
      for (int a = 0; a < L; a++) begin
        checks++;
        if (enc_got[t][a] != tt[t].enc[a]) begin
          failures++;
          if (failures < 10) $display("t%0d enc[%0d]: %0d exp %0d", t, a, enc_got[t][a], tt[t].enc[a]);
        end
      end
    end
    // counts that do not sum to L
    cfg(2, 0, tt[2].ls[0] + 1);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    checks++;
    if (!err) begin failures++; $display("err not raised for a bad table"); end
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
