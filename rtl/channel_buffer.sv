// channel_buffer: groups the pulses of an event by channel.
//
// Instead of labelling every measurement with its channel number, the
// compressed format writes, channel after channel, the number of pulses and
// then start, width, distance, width, distance, width ... of that channel.
// Pulses arrive in time order, mixed over channels, so they are stored here
// per channel (N_CHANNELS x MAX_PULSES slots of start-or-distance and width)
// until the end-of-event marker arrives; then the event is read out.
//
// Read-out order. The entropy coder downstream encodes in forward order and
// its stream is decoded backwards, so a decoder sees the values in the
// reverse of the order they were coded. The buffer therefore emits the event
// reversed: channel N_CHANNELS-1 first, within a channel the last pulse first
// (width, then distance, or start for the first pulse), and the pulse count
// last. Decoding then yields pulses(0), start, width, distance, width, ...,
// pulses(1), ... which is what a decoder needs to know the type of the next
// value. The reversal is this design's choice.
//
// A channel can hold MAX_PULSES pulses (the data sample shows 0..8 pulses per
// channel); further pulses of the channel are discarded and flagged with the
// one-cycle strobe overflow. Handling such exceptions is left open upstream.
//
// Interface: pulse_t stream in (valid/ready), value_t stream out
// (valid/ready, last marks the final value of the event). While an event is
// read out (N_CHANNELS + 2*pulses cycles at full rate) the input is stalled.
// Outputs are read combinationally from the storage arrays.
module channel_buffer
  import daq_pkg::*;
#(
  parameter int unsigned N_CHANNELS = 48,
  parameter int unsigned MAX_PULSES = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  pulse_t in_pulse,
  output logic   out_valid,
  input  logic   out_ready,
  output value_t out_val,
  output logic   overflow,
  output logic   draining
);

  localparam int unsigned CIW = clog2u(N_CHANNELS);
  localparam int unsigned PW  = clog2u(MAX_PULSES);
  localparam int unsigned NW  = $clog2(MAX_PULSES + 1);

  typedef enum logic [1:0] {PH_WIDTH, PH_A, PH_COUNT} phase_e;

  logic [TIME_W-1:0] a_mem [N_CHANNELS][MAX_PULSES];
  logic [TIME_W-1:0] w_mem [N_CHANNELS][MAX_PULSES];
  logic [NW-1:0]     cnt   [N_CHANNELS];

  logic           drain;
  logic [CIW-1:0] dch;
  logic [PW-1:0]  dp;
  phase_e         dph;

  logic [CIW-1:0] ich;
  logic           wr;

  assign draining = drain;
  assign in_ready = !drain;
  assign ich      = CIW'(in_pulse.channel);
  assign wr       = in_valid && in_ready && !in_pulse.eoe;

  // read side
  always_comb begin
    out_valid     = drain;
    out_val.last  = 1'b0;
    out_val.value = '0;
    out_val.vtype = VT_PULSES;
    unique case (dph)
      PH_WIDTH: begin
        out_val.vtype = VT_WIDTH;
        out_val.value = w_mem[dch][dp];
      end
      PH_A: begin
        out_val.vtype = (dp == '0) ? VT_START : VT_DISTANCE;
        out_val.value = a_mem[dch][dp];
      end
      default: begin
        out_val.vtype = VT_PULSES;
        out_val.value = TIME_W'(cnt[dch]);
        out_val.last  = (dch == '0);
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drain    <= 1'b0;
      dch      <= '0;
      dp       <= '0;
      dph      <= PH_COUNT;
      overflow <= 1'b0;
      for (int c = 0; c < N_CHANNELS; c++) cnt[c] <= '0;
    end else begin
      overflow <= 1'b0;
      if (!drain) begin
        if (wr) begin
          if (32'(cnt[ich]) < MAX_PULSES) begin
            a_mem[ich][PW'(cnt[ich])] <= in_pulse.val_a;
            w_mem[ich][PW'(cnt[ich])] <= in_pulse.width;
            cnt[ich] <= cnt[ich] + 1'b1;
          end else begin
            overflow <= 1'b1;
          end
        end else if (in_valid && in_pulse.eoe) begin
          drain <= 1'b1;
          dch   <= CIW'(N_CHANNELS - 1);
          dph   <= (cnt[N_CHANNELS-1] != '0) ? PH_WIDTH : PH_COUNT;
          dp    <= PW'(cnt[N_CHANNELS-1] - 1'b1);
        end
      end else if (out_ready) begin
        unique case (dph)
          PH_WIDTH: dph <= PH_A;
          PH_A: begin
            if (dp != '0) begin
              dp  <= dp - 1'b1;
              dph <= PH_WIDTH;
            end else begin
              dph <= PH_COUNT;
            end
          end
          default: begin
            cnt[dch] <= '0;
            if (dch == '0) begin
              drain <= 1'b0;
            end else begin
              dch <= dch - 1'b1;
              dph <= (cnt[dch-1'b1] != '0) ? PH_WIDTH : PH_COUNT;
              dp  <= PW'(cnt[dch-1'b1] - 1'b1);
            end
          end
        endcase
      end
    end
  end

endmodule
