// daq_compressor: event data compressor for a TDC-based readout FPGA.
//
// The time-sorted TDC measurements of one event go in; one compressed frame
// per event comes out as 32-bit words. The path, stage by stage:
//   tdc_time_calc    fine/coarse/epoch -> absolute time (10 ps units)
//   pulse_builder    relative to the event's first hit; rising/falling pairs
//                    per channel -> start or distance, and width; filtering
//   channel_buffer   group by channel; at event end emit per channel the
//                    pulse count and the pulse values (in reverse order)
//   adaptive_binner  value -> (bin, low bits) with a table per value type
//   tans_encoder     bin -> tANS bits, + low bits, + final state at frame end
//   bit_packer       bit fields -> 32-bit words, last word flagged with its
//                    number of valid bits
// tans_table_builder fills the encoder tables from per-symbol counts L_s that,
// like the bin tables, are written through the cfg port by the control
// system (the tables are computed offline from recorded statistics).
//
// Modes: mode = 0 is normal running (compressed frames). mode = 1 is the
// diagnostic mode: raw_formatter sends every measurement unfiltered in the
// original 32-bit word format, out_diag = 1. The mode is sampled at the first
// item of each event; a change waits until the other path has sent all it
// holds. While tables are being built (build_busy) the input is stalled.
//
// Input: in_item stream (valid/ready); an item with eoe = 1 ends the event.
// Output: out_data words (valid/ready); out_last marks the last word of an
// event, out_nbits its valid bits (always 32 in diagnostic mode).
// Status strobes (one cycle each): drop[3:0] from pulse_builder, overflow
// (more than MAX_PULSES pulses on a channel), bin_miss (value outside every
// bin). Frames leave in order; there is no frame header (building packets
// from frames is left to the next readout stage).
//
// Lint notes: the channel buffer's draining flag is left unread here (the
// buffer already stalls its own input while it drains); rst_n feeds the
// asynchronous reset and also the disable condition of the assertion below,
// which is why a linter sees it used both ways.
module daq_compressor
  import daq_pkg::*;
#(
  parameter int unsigned N_CHANNELS = 48,
  parameter int unsigned MAX_PULSES = 8,
  parameter int unsigned MAX_BINS   = 256,
  parameter int unsigned R          = 11,
  parameter int unsigned M          = 256,
  parameter logic [TIME_W-1:0] MAX_WIDTH = TIME_W'((1 << 27) - 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mode,
  // measurements
  input  logic              in_valid,
  output logic              in_ready,
  input  in_item_t          in_item,
  // configuration
  input  logic              cfg_we,
  input  cfg_sel_e          cfg_sel,
  input  val_type_e         cfg_vtype,
  input  logic [SYM_W-1:0]  cfg_addr,
  input  logic [TIME_W-1:0] cfg_data,
  input  logic              build_start,
  output logic              build_busy,
  output logic              build_done,
  output logic              build_err,
  // output words
  output logic              out_valid,
  input  logic              out_ready,
  output logic [31:0]       out_data,
  output logic              out_last,
  output logic [5:0]        out_nbits,
  output logic              out_diag,
  // status
  output logic [3:0]        drop,
  output logic              overflow,
  output logic              bin_miss
);

  // ---------------------------------------------------------------- mode
  logic        evt_open;      // an item of the current event was accepted
  logic        cur_mode;
  logic        mode_eff;
  logic        switch_wait;
  logic        gate;
  logic [7:0]  comp_inflight; // events in the compressed path
  logic        comp_in_valid, comp_in_ready;
  logic        raw_in_valid,  raw_in_ready;
  logic        raw_out_valid, raw_out_ready, raw_out_last;
  logic [31:0] raw_out_data;
  logic        pk_out_valid,  pk_out_ready, pk_out_last;
  logic [31:0] pk_out_data;
  logic [5:0]  pk_out_nbits;
  logic        acc_in;

  assign mode_eff    = evt_open ? cur_mode : mode;
  assign switch_wait = !evt_open && (mode != cur_mode) &&
                       ((comp_inflight != '0) || raw_out_valid);
  assign gate          = !build_busy && !switch_wait;
  assign comp_in_valid = in_valid && gate && !mode_eff;
  assign raw_in_valid  = in_valid && gate &&  mode_eff;
  assign in_ready      = gate && (mode_eff ? raw_in_ready : comp_in_ready);
  assign acc_in        = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      evt_open      <= 1'b0;
      cur_mode      <= 1'b0;
      comp_inflight <= '0;
    end else begin
      if (acc_in) begin
        evt_open <= !in_item.eoe;
        cur_mode <= mode_eff;
      end
      comp_inflight <= comp_inflight
                     + 8'(acc_in && !mode_eff && in_item.eoe)
                     - 8'(pk_out_valid && pk_out_ready && pk_out_last);
    end
  end

  // ------------------------------------------------------ compressed path
  logic        tc_valid, tc_ready;
  timed_item_t tc_item;
  logic        pb_valid, pb_ready;
  pulse_t      pb_pulse;
  logic        cb_valid, cb_ready;
  value_t      cb_val;
  logic        cb_draining;
  logic        bn_valid, bn_ready;
  binned_t     bn_bin;
  logic        en_valid, en_ready;
  field_t      en_field;

  tbl_wr_if #(.R(R)) tw ();

  tdc_time_calc u_time (
    .clk, .rst_n,
    .in_valid (comp_in_valid), .in_ready (comp_in_ready), .in_item,
    .out_valid(tc_valid),      .out_ready(tc_ready),      .out_item(tc_item)
  );

  pulse_builder #(.N_CHANNELS(N_CHANNELS), .MAX_WIDTH(MAX_WIDTH)) u_pulse (
    .clk, .rst_n,
    .in_valid (tc_valid), .in_ready (tc_ready), .in_item(tc_item),
    .out_valid(pb_valid), .out_ready(pb_ready), .out_pulse(pb_pulse),
    .drop
  );

  channel_buffer #(.N_CHANNELS(N_CHANNELS), .MAX_PULSES(MAX_PULSES)) u_chbuf (
    .clk, .rst_n,
    .in_valid (pb_valid), .in_ready (pb_ready), .in_pulse(pb_pulse),
    .out_valid(cb_valid), .out_ready(cb_ready), .out_val (cb_val),
    .overflow, .draining(cb_draining)
  );

  adaptive_binner #(.MAX_BINS(MAX_BINS)) u_bin (
    .clk, .rst_n,
    .in_valid (cb_valid), .in_ready (cb_ready), .in_val (cb_val),
    .out_valid(bn_valid), .out_ready(bn_ready), .out_bin(bn_bin),
    .miss(bin_miss),
    .cfg_we, .cfg_sel, .cfg_vtype, .cfg_addr, .cfg_data
  );

  tans_table_builder #(.R(R), .M(M)) u_build (
    .clk, .rst_n,
    .cfg_we, .cfg_sel, .cfg_vtype, .cfg_addr, .cfg_data,
    .start(build_start), .busy(build_busy), .done(build_done), .err(build_err),
    .tw(tw.src)
  );

  tans_encoder #(.R(R), .M(M)) u_enc (
    .clk, .rst_n,
    .in_valid (bn_valid), .in_ready (bn_ready), .in_bin(bn_bin),
    .out_valid(en_valid), .out_ready(en_ready), .out_field(en_field),
    .tw(tw.dst)
  );

  bit_packer #(.WORD_W(32)) u_pack (
    .clk, .rst_n,
    .in_valid (en_valid),     .in_ready (en_ready), .in_field(en_field),
    .out_valid(pk_out_valid), .out_ready(pk_out_ready),
    .out_data (pk_out_data),  .out_last (pk_out_last), .out_nbits(pk_out_nbits)
  );

  // ------------------------------------------------------ diagnostic path
  raw_formatter u_raw (
    .clk, .rst_n,
    .in_valid (raw_in_valid),  .in_ready (raw_in_ready), .in_item,
    .out_valid(raw_out_valid), .out_ready(raw_out_ready),
    .out_data (raw_out_data),  .out_last (raw_out_last)
  );

  // ------------------------------------------------------ output select
  always_comb begin
    out_diag      = cur_mode;
    out_valid     = cur_mode ? raw_out_valid : pk_out_valid;
    out_data      = cur_mode ? raw_out_data  : pk_out_data;
    out_last      = cur_mode ? raw_out_last  : pk_out_last;
    out_nbits     = cur_mode ? 6'd32         : pk_out_nbits;
    raw_out_ready = cur_mode && out_ready;
    pk_out_ready  = !cur_mode && out_ready;
  end

  // tables may only change while no event is being compressed
  a_no_build_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    build_start |-> (comp_inflight == '0));

endmodule
