// tdc_time_calc: absolute time of a TDC measurement.
//
// The TDC reports a time as three counters: fine time (10 ps units, 0..499),
// coarse time (5 ns units, 0..2047) and a 28 bit epoch counter
// (5 ns * 2048 = 10240 ns units). This stage forms the single number
//     t = fine + 500 * (coarse + 2048 * epoch)
// in 10 ps units, as the compression scheme defines it. Because 2048 is a
// power of two, coarse + 2048*epoch is the concatenation {epoch, coarse}; the
// multiplication by 500 is done as (v<<9) - (v<<3) - (v<<2), so no multiplier
// is needed. The result needs 48 bits.
//
// Interface: valid/ready stream of in_item_t in, timed_item_t out. End-of-event
// markers pass through unchanged. One register stage: latency 1 cycle, one
// item per cycle. The register stage is this design's choice.
module tdc_time_calc
  import daq_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  in_item_t    in_item,
  output logic        out_valid,
  input  logic        out_ready,
  output timed_item_t out_item
);

  logic [ABS_W-1:0] ce;     // coarse + 2048*epoch
  logic [ABS_W-1:0] t_abs;

  always_comb begin
    ce    = ABS_W'({in_item.hit.epoch, in_item.hit.coarse});
    t_abs = (ce << 9) - (ce << 3) - (ce << 2) + ABS_W'(in_item.hit.fine);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_item  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_item.eoe     <= in_item.eoe;
        out_item.channel <= in_item.hit.channel;
        out_item.rising  <= in_item.hit.rising;
        out_item.t       <= t_abs;
      end
    end
  end

endmodule
