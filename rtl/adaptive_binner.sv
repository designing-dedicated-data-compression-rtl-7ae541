// adaptive_binner: splits a value into a bin number and low bits.
//
// Large values (start, width, distance) are not entropy coded whole. The value
// range of each value type is cut into bins of power-of-two size: bin i covers
// binStart[i] .. binStart[i] + 2^binWidth[i] - 1 and the next bin starts where
// it ends. The bin number goes to the entropy coder, the offset inside the bin
// (binWidth[i] bits) is written directly. With adaptive bins the widths vary:
// narrow where values are frequent, a zero-width bin for a value as common as
// start = 0, a wide bin at the end to catch exceptions. Simple binning is the
// special case of equal widths, and the pulse count uses one zero-width bin per
// count.
//
// Finding the bin: the paper suggests a table indexed by the value's top bits.
// This design instead compares the value with every binStart of its type in
// parallel: bin = (number of i in 1..nbins-1 with binStart[i] <= value), which
// is the last bin starting at or below the value when the starts are sorted
// ascending. The tables are loaded through the cfg port and must be sorted;
// bin 0 should start at 0. A value outside every bin raises the one-cycle
// strobe miss (the value is still passed on, with a wrong offset).
//
// Interface: value_t stream in, binned_t stream out (valid/ready), one value
// per cycle, latency 1. cfg writes: sel = CFG_BIN_START / CFG_BIN_WIDTH /
// CFG_NBINS, vtype selects the table, addr the bin. Tables must not be
// written while values flow.
module adaptive_binner
  import daq_pkg::*;
#(
  parameter int unsigned MAX_BINS = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  value_t            in_val,
  output logic              out_valid,
  input  logic              out_ready,
  output binned_t           out_bin,
  output logic              miss,
  // configuration
  input  logic              cfg_we,
  input  cfg_sel_e          cfg_sel,
  input  val_type_e         cfg_vtype,
  input  logic [SYM_W-1:0]  cfg_addr,
  input  logic [TIME_W-1:0] cfg_data
);

  localparam int unsigned BIW = clog2u(MAX_BINS);
  localparam int unsigned CW  = $clog2(MAX_BINS + 1);

  logic [TIME_W-1:0] bstart [NTYPES][MAX_BINS];
  logic [BW_W-1:0]   bwidth [NTYPES][MAX_BINS];
  logic [CW-1:0]     nbins  [NTYPES];

  logic [CW-1:0]     cnt;
  logic [BIW-1:0]    bin;
  logic [TIME_W-1:0] low;
  logic [BW_W-1:0]   nlow;
  logic              bad;

  always_comb begin
    cnt = '0;
    for (int i = 1; i < MAX_BINS; i++)
      if (CW'(i) < nbins[in_val.vtype] && bstart[in_val.vtype][i] <= in_val.value)
        cnt = cnt + 1'b1;
    bin  = BIW'(cnt);
    low  = in_val.value - bstart[in_val.vtype][bin];
    nlow = bwidth[in_val.vtype][bin];
    bad  = (in_val.value < bstart[in_val.vtype][bin]) ||
           ((nlow < BW_W'(TIME_W)) && ((low >> nlow) != '0));
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_bin   <= '0;
      miss      <= 1'b0;
      for (int t = 0; t < NTYPES; t++) nbins[t] <= '0;
    end else begin
      miss <= 1'b0;
      if (in_ready) begin
        out_valid <= in_valid;
        if (in_valid) begin
          out_bin.vtype <= in_val.vtype;
          out_bin.bin   <= SYM_W'(bin);
          out_bin.low   <= low;
          out_bin.nlow  <= nlow;
          out_bin.last  <= in_val.last;
          miss          <= bad;
        end
      end
      if (cfg_we) begin
        unique case (cfg_sel)
          CFG_BIN_START: bstart[cfg_vtype][BIW'(cfg_addr)] <= cfg_data;
          CFG_BIN_WIDTH: bwidth[cfg_vtype][BIW'(cfg_addr)] <= BW_W'(cfg_data);
          CFG_NBINS:     nbins[cfg_vtype] <= CW'(cfg_data);
          default: ;
        endcase
      end
    end
  end

endmodule
