// raw_formatter: diagnostic-mode output in the device's original word format.
//
// In normal running only filtered, compressed data leave the FPGA. For
// diagnostics the readout can be switched to a mode that sends every
// measurement unfiltered, in the original 32-bit format:
//   - one main word per measurement with fine time (10 bits), coarse time
//     (11 bits), channel (7 bits) and edge type (1 bit);
//   - before it, an epoch word with the 28-bit epoch counter whenever the
//     epoch differs from the one last written (and at the first hit of an
//     event, so that each event can be read on its own).
// The field contents follow the original format; the bit positions and the
// 3-bit word-type headers below are this design's choice:
//   main  word: [31:29]=3'b100 [28:22]=channel [21]=rising [20:10]=coarse [9:0]=fine
//   epoch word: [31:29]=3'b011 [28]=0 [27:0]=epoch
// The last word of an event is flagged with out_last, for which one word is
// held back until the next word or the end-of-event marker arrives. An event
// without hits produces no words.
//
// Interface: in_item_t stream in, 32-bit words out (valid/ready). One word
// per cycle; a hit with a new epoch takes two cycles.
module raw_formatter
  import daq_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  in_item_t    in_item,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_data,
  output logic        out_last
);

  localparam logic [2:0] HDR_MAIN  = 3'b100;
  localparam logic [2:0] HDR_EPOCH = 3'b011;

  logic               pv;          // a word is held back
  logic [31:0]        pword;
  logic               ep_valid;    // last_epoch valid within this event
  logic [EPOCH_W-1:0] last_epoch;
  logic               ep_done;     // epoch word of the current hit written
  logic               free;
  logic               need_ep;
  logic [31:0]        w_main;
  logic [31:0]        w_epoch;
  logic               step;        // a word is produced or the eoe handled

  assign free    = !out_valid || out_ready;
  assign need_ep = !in_item.eoe && (!ep_valid || (in_item.hit.epoch != last_epoch));
  assign in_ready = free && (in_item.eoe || !need_ep || ep_done);
  assign step    = in_valid && free;
  assign w_main  = {HDR_MAIN, in_item.hit.channel, in_item.hit.rising,
                    in_item.hit.coarse, in_item.hit.fine};
  assign w_epoch = {HDR_EPOCH, 1'b0, in_item.hit.epoch};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pv         <= 1'b0;
      pword      <= '0;
      ep_valid   <= 1'b0;
      last_epoch <= '0;
      ep_done    <= 1'b0;
      out_valid  <= 1'b0;
      out_data   <= '0;
      out_last   <= 1'b0;
    end else begin
      if (free) out_valid <= 1'b0;
      if (step) begin
        if (in_item.eoe) begin
          if (pv) begin
            out_valid <= 1'b1;
            out_data  <= pword;
            out_last  <= 1'b1;
          end
          pv       <= 1'b0;
          ep_valid <= 1'b0;
        end else begin
          if (pv) begin
            out_valid <= 1'b1;
            out_data  <= pword;
            out_last  <= 1'b0;
          end
          pv <= 1'b1;
          if (need_ep && !ep_done) begin
            pword      <= w_epoch;
            ep_done    <= 1'b1;
          end else begin
            pword      <= w_main;
            ep_done    <= 1'b0;
            ep_valid   <= 1'b1;
            last_epoch <= in_item.hit.epoch;
          end
        end
      end
    end
  end

endmodule
