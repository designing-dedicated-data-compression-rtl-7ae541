// bit_packer: packs variable-length bit fields into 32-bit words.
//
// The compressed format is a plain bit string: values of different lengths
// follow each other without alignment. This block appends each field (its len
// low bits, most significant bit first) to a 128-bit accumulator and sends out
// a 32-bit word whenever 32 bits are available; bit 31 of a word is the
// earliest bit of the stream. After the field marked last, the remaining bits
// are sent left-aligned and zero padded, and that final word carries last = 1
// and nbits = number of valid bits in it (1..32). A reader therefore knows the
// exact bit length of every frame, which the backward-reading decoder needs.
// The word size 32 matches the readout's 32-bit words; the rest is this
// design's choice.
//
// Timing: a field of up to 64 bits per cycle is accepted while at most 64
// bits are buffered; one word per cycle leaves through a registered output.
// During the flush at frame end no new field is accepted.
module bit_packer
  import daq_pkg::*;
#(
  parameter int unsigned WORD_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  field_t            in_field,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [WORD_W-1:0] out_data,
  output logic              out_last,
  output logic [$clog2(WORD_W+1)-1:0] out_nbits
);

  localparam int unsigned ACC_W = 2 * FIELD_W;
  localparam int unsigned CW    = $clog2(ACC_W + 1);

  logic [ACC_W-1:0] acc;
  logic [CW-1:0]    cnt;
  logic             flush;

  logic             oreg_free;
  logic             emit;
  logic [CW-1:0]    n_emit;
  logic [CW-1:0]    cnt_after;
  logic [WORD_W-1:0] word;
  logic             fire;
  logic [FIELD_W-1:0] fdata;

  assign oreg_free = !out_valid || out_ready;
  assign in_ready  = !flush && (cnt <= CW'(FIELD_W));
  assign fire      = in_valid && in_ready;

  always_comb begin
    emit   = oreg_free && ((cnt >= CW'(WORD_W)) || (flush && cnt != '0));
    n_emit = (cnt >= CW'(WORD_W)) ? CW'(WORD_W) : cnt;
    word   = (cnt >= CW'(WORD_W)) ? WORD_W'(acc >> (cnt - CW'(WORD_W)))
                                  : WORD_W'(acc << (CW'(WORD_W) - cnt));
    cnt_after = emit ? cnt - n_emit : cnt;
    fdata  = (in_field.len >= FLEN_W'(FIELD_W)) ? in_field.data
           : in_field.data & ((FIELD_W'(1) << in_field.len) - 1'b1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      cnt       <= '0;
      flush     <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
      out_nbits <= '0;
    end else begin
      if (oreg_free) out_valid <= 1'b0;
      if (emit) begin
        out_valid <= 1'b1;
        out_data  <= word;
        out_nbits <= ($clog2(WORD_W+1))'(n_emit);
        out_last  <= flush && (cnt <= CW'(WORD_W));
        if (flush && (cnt <= CW'(WORD_W))) flush <= 1'b0;
      end
      if (fire) begin
        acc <= (acc << in_field.len) | ACC_W'(fdata);
        cnt <= cnt_after + CW'(in_field.len);
        if (in_field.last) flush <= 1'b1;
      end else begin
        cnt <= cnt_after;
      end
    end
  end

endmodule
