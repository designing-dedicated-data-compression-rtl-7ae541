// tans_encoder: tabled asymmetric numeral systems (tANS) entropy coder.
//
// The coder state x lies in L..2L-1 (L = 2^R) and holds lg(x) in [R, R+1)
// bits of not yet written information, which lets a symbol cost a fractional
// number of bits. Encoding symbol s from state x (r = R+1):
//     nbBits = (x + nb[s]) >> r          -- k[s] or k[s]-1 bits leave the state
//     write the nbBits youngest bits of x
//     x      = encodingTable[start[s] + (x >> nbBits)]
// The tables come from tans_table_builder. There is one set of tables per
// value type (pulses, start, width, distance) and all four share the one
// state, so a single stream carries them all.
//
// Per input (one binned value) the block emits one bit field: the nbBits
// state bits, followed by the value's nlow low bits from the binner. A frame
// (one event here) starts from state x = L. After its last value the final
// state, written as x - L on R bits, is appended to the same field and the
// state returns to L. A decoder starts from that final state and reads the
// frame backwards, getting the symbols in reverse coding order. The frame
// boundaries, the initial state L and the placement of the final state are
// this design's choices; the coding step is the paper's.
//
// Interface: binned_t stream in, field_t stream out (valid/ready). One value
// per cycle, latency 1 cycle. Tables are written through tw (must be idle).
// The longest field is R + 32 + R bits.
// The table index start[s] + (x >> nbBits) is computed one bit wider than
// needed and always lies in 0..L-1 for tables built from valid counts, so
// only its low R bits address the encoding table.
module tans_encoder
  import daq_pkg::*;
#(
  parameter int unsigned R = 11,
  parameter int unsigned M = 256
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  binned_t in_bin,
  output logic    out_valid,
  input  logic    out_ready,
  output field_t  out_field,
  tbl_wr_if.dst   tw
);

  localparam int unsigned L    = 1 << R;
  localparam int unsigned SW   = clog2u(M);
  localparam int unsigned NB_W = $clog2(R + 1) + R + 2;
  localparam int unsigned ST_W = R + 2;
  localparam int unsigned KW   = $clog2(R + 1);

  initial assert (2 * R + TIME_W <= FIELD_W) else $error("field too narrow for R");

  logic [R:0]             enc_tab [NTYPES][L];
  logic signed [NB_W-1:0] nb_tab  [NTYPES][M];
  logic signed [ST_W-1:0] st_tab  [NTYPES][M];

  logic [R:0]             x;
  logic [SW-1:0]          s;
  logic signed [NB_W:0]   sum;
  logic [KW-1:0]          nbits;
  logic [R:0]             bits;
  logic signed [ST_W:0]   idx;
  logic [R:0]             x_next;
  logic [FIELD_W-1:0]     f;
  logic [FLEN_W-1:0]      flen;
  logic                   fire;

  assign s = SW'(in_bin.bin);

  always_comb begin
    sum    = $signed({1'b0, (NB_W)'(x)}) + (NB_W+1)'(nb_tab[in_bin.vtype][s]);
    nbits  = KW'(sum >>> (R + 1));
    bits   = x & (((R+1)'(1) << nbits) - 1'b1);
    idx    = (ST_W+1)'(st_tab[in_bin.vtype][s]) + $signed({1'b0, ST_W'(x >> nbits)});
    x_next = enc_tab[in_bin.vtype][R'(idx)];
    f      = FIELD_W'(bits);
    flen   = FLEN_W'(nbits);
    f      = (in_bin.nlow >= BW_W'(TIME_W)) ? f << TIME_W : f << in_bin.nlow;
    f      = f | (FIELD_W'(in_bin.low) & ((FIELD_W'(1) << in_bin.nlow) - 1'b1));
    flen   = flen + FLEN_W'(in_bin.nlow);
    if (in_bin.last) begin
      f    = (f << R) | FIELD_W'(x_next[R-1:0]);
      flen = flen + FLEN_W'(R);
    end
  end

  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x         <= (R+1)'(L);
      out_valid <= 1'b0;
      out_field <= '0;
    end else begin
      if (in_ready) out_valid <= in_valid;
      if (fire) begin
        out_field.data <= f;
        out_field.len  <= flen;
        out_field.last <= in_bin.last;
        x <= in_bin.last ? (R+1)'(L) : x_next;
      end
    end
  end

  // table writes (no reset: contents are loaded before use)
  always_ff @(posedge clk) begin
    if (tw.we) begin
      if (tw.kind == TW_ENC) begin
        enc_tab[tw.vtype][tw.addr] <= tw.enc_x;
      end else begin
        nb_tab[tw.vtype][SW'(tw.addr)] <= tw.nb;
        st_tab[tw.vtype][SW'(tw.addr)] <= tw.st;
      end
    end
  end

endmodule
