// pulse_builder: turns the time-sorted edges of one event into pulses.
//
// Each channel should deliver pairs of rising and falling edges, one pair per
// digital pulse. For every channel this block remembers a pending rising edge
// and the falling edge of the last accepted pulse, and on each falling edge
// emits one pulse record:
//   - val_a = start    = rising time - ref      for the channel's first pulse,
//   - val_a = distance = rising time - previous falling time   otherwise,
//   - width = falling time - rising time.
// ref is the event's reference time. Taking it as the smallest time of the
// event makes every start non-negative; since the hits arrive sorted in time,
// the smallest time is the first hit of the event, which is what is used here.
// Relative times are held in 32 bits.
//
// Filtering (the paper asks the peripheral FPGA to discard meaningless signals
// such as two successive rising edges or an extremely long width; the exact
// rules below are this design's choice):
//   drop[0]  a rising edge while one is pending: the older one is discarded,
//   drop[1]  a falling edge with no pending rising edge: discarded,
//   drop[2]  width > MAX_WIDTH: the pulse is discarded,
//   drop[3]  channel number >= N_CHANNELS: discarded.
// A rising edge still pending at the end of the event is discarded silently.
//
// Interface: valid/ready streams. Input timed_item_t, output pulse_t. The
// end-of-event marker is forwarded as a pulse_t with eoe=1 and clears all
// per-channel state. One item per cycle, output registered (latency 1).
// drop is a one-cycle strobe per discarded edge.
module pulse_builder
  import daq_pkg::*;
#(
  parameter int unsigned N_CHANNELS = 48,
  parameter logic [TIME_W-1:0] MAX_WIDTH = TIME_W'((1 << 27) - 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  timed_item_t in_item,
  output logic        out_valid,
  input  logic        out_ready,
  output pulse_t      out_pulse,
  output logic [3:0]  drop
);

  localparam int unsigned CIW = clog2u(N_CHANNELS);

  logic [N_CHANNELS-1:0] pend;        // rising edge pending
  logic [N_CHANNELS-1:0] prev;        // a pulse was already accepted
  logic [TIME_W-1:0]     rise_t [N_CHANNELS];
  logic [TIME_W-1:0]     fall_t [N_CHANNELS];
  logic                  have_ref;
  logic [ABS_W-1:0]      ref_t;

  logic              fire;
  logic              ch_ok;
  logic [CIW-1:0]    ci;
  logic [TIME_W-1:0] rel;
  logic [TIME_W-1:0] width;
  logic              emit;

  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;
  assign ch_ok    = 32'(in_item.channel) < N_CHANNELS;
  assign ci       = CIW'(in_item.channel);

  always_comb begin
    rel   = TIME_W'(in_item.t - (have_ref ? ref_t : in_item.t));
    width = rel - rise_t[ci];
    emit  = fire && !in_item.eoe && ch_ok && !in_item.rising && pend[ci] &&
            (width <= MAX_WIDTH);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend      <= '0;
      prev      <= '0;
      have_ref  <= 1'b0;
      ref_t     <= '0;
      out_valid <= 1'b0;
      out_pulse <= '0;
      drop      <= '0;
    end else begin
      drop <= '0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        if (in_item.eoe) begin
          pend      <= '0;
          prev      <= '0;
          have_ref  <= 1'b0;
          out_valid <= 1'b1;
          out_pulse <= '{eoe: 1'b1, default: '0};
        end else begin
          if (!have_ref) begin
            have_ref <= 1'b1;
            ref_t    <= in_item.t;
          end
          if (!ch_ok) begin
            drop[3] <= 1'b1;
          end else if (in_item.rising) begin
            if (pend[ci]) drop[0] <= 1'b1;
            pend[ci]   <= 1'b1;
            rise_t[ci] <= rel;
          end else if (!pend[ci]) begin
            drop[1] <= 1'b1;
          end else begin
            pend[ci] <= 1'b0;
            if (!emit) begin
              drop[2] <= 1'b1;
            end else begin
              prev[ci]          <= 1'b1;
              fall_t[ci]        <= rel;
              out_valid         <= 1'b1;
              out_pulse.eoe     <= 1'b0;
              out_pulse.channel <= in_item.channel;
              out_pulse.val_a   <= prev[ci] ? rise_t[ci] - fall_t[ci] : rise_t[ci];
              out_pulse.width   <= width;
            end
          end
        end
      end
    end
  end

endmodule
