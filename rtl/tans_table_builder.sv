// tans_table_builder: builds the tANS encoding tables from symbol counts.
//
// A tANS coder with L = 2^R states is defined by how often each symbol s
// appears among the states, L_s ~ L * Pr(s), with sum L_s = L. From these
// counts this block computes, for each of the four value types in turn:
//   start[s] = -L_s + sum_{s'<s} L_s'
//   k[s]     = R - floor(lg L_s)            (the symbol costs k[s] or k[s]-1 bits)
//   nb[s]    = (k[s] << (R+1)) - (L_s << k[s])
// then spreads the symbols over the L states pseudo-randomly,
//   X = 0; step = 5/8 L + 3; for each s, L_s times: symbol[X] = s; X = (X+step) mod L,
// and finally fills the encoding table in state order:
//   for x = L .. 2L-1: s = symbol[x-L]; encodingTable[start[s] + next[s]++] = x
// with next[s] starting at L_s. This is the construction of the FSE library
// as the paper gives it; the decoder side must rebuild the same spread from
// the same counts. Symbols with L_s = 0 get no states and cannot be coded.
//
// Timing: one table entry per cycle. A type takes M cycles for nb/start,
// L + M cycles for the spread and L cycles for the encoding table, so a full
// build takes 4 * (2M + 2L) cycles (18432 at L = 2048, M = 256); done pulses
// once after all four types. A type whose
// counts do not sum to L sets err (sticky until the next start).
//
// Interface: cfg port writes L_s (sel = CFG_LS, vtype, addr = symbol,
// data = count); start begins a build; tw is the write bus into the encoder.
// busy is high during the build.
// The cfg data bus is the shared 32-bit one; a count needs only R+1 bits,
// and the upper bits are ignored.
module tans_table_builder
  import daq_pkg::*;
#(
  parameter int unsigned R = 11,
  parameter int unsigned M = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  cfg_sel_e          cfg_sel,
  input  val_type_e         cfg_vtype,
  input  logic [SYM_W-1:0]  cfg_addr,
  input  logic [TIME_W-1:0] cfg_data,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic              err,
  tbl_wr_if.src             tw
);

  localparam int unsigned L    = 1 << R;
  localparam int unsigned SW   = clog2u(M);
  localparam int unsigned NB_W = $clog2(R + 1) + R + 2;
  localparam int unsigned ST_W = R + 2;
  localparam logic [R-1:0] STEP = R'((L >> 1) + (L >> 3) + 3);

  typedef enum logic [1:0] {S_IDLE, S_PREP, S_SPREAD, S_FILL} state_e;

  logic [R:0]     ls_mem  [NTYPES][M];   // L_s, 0..L
  logic [R-1:0]   pos     [M];           // next free encodingTable index of s
  logic [SW-1:0]  sym_mem [L];           // symbol spread

  state_e          st;
  logic [1:0]      ty;
  logic [SW-1:0]   s;
  logic [R:0]      i;        // occurrences of s already spread
  logic [R-1:0]    X;
  logic [R:0]      x;        // fill counter, L..2L-1
  logic [R+1:0]    cum;

  logic [R:0]             ls_cur;
  logic [$clog2(R+1):0]   k;
  logic signed [NB_W-1:0] nb_val;
  logic signed [ST_W-1:0] st_val;
  logic [SW-1:0]          fs;

  function automatic logic [$clog2(R+1):0] flog2(input logic [R:0] v);
    flog2 = '0;
    for (int b = 0; b <= R; b++) if (v[b]) flog2 = ($clog2(R+1)+1)'(b);
  endfunction

  always_comb begin
    ls_cur = ls_mem[ty][s];
    k      = ($clog2(R+1)+1)'(R) - flog2(ls_cur);
    nb_val = $signed(NB_W'(k) << (R + 1)) - $signed(NB_W'(ls_cur) << k);
    st_val = $signed(ST_W'(cum)) - $signed(ST_W'(ls_cur));
    fs     = sym_mem[x[R-1:0]];
  end

  assign busy = (st != S_IDLE);

  always_comb begin
    tw.we    = 1'b0;
    tw.vtype = val_type_e'(ty);
    tw.kind  = TW_NB;
    tw.addr  = R'(s);
    tw.enc_x = x;
    tw.nb    = nb_val;
    tw.st    = st_val;
    unique case (st)
      S_PREP: tw.we = (ls_cur != '0);
      S_FILL: begin
        tw.we   = 1'b1;
        tw.kind = TW_ENC;
        tw.addr = pos[fs];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      ty   <= '0;
      s    <= '0;
      i    <= '0;
      X    <= '0;
      x    <= '0;
      cum  <= '0;
      done <= 1'b0;
      err  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: begin
          if (start) begin
            st  <= S_PREP;
            ty  <= '0;
            s   <= '0;
            cum <= '0;
            err <= 1'b0;
          end
        end
        S_PREP: begin
          pos[s] <= R'(cum);
          cum    <= cum + (R+2)'(ls_cur);
          if (32'(s) == M - 1) begin
            if (cum + (R+2)'(ls_cur) != (R+2)'(L)) err <= 1'b1;
            st <= S_SPREAD;
            s  <= '0;
            i  <= '0;
            X  <= '0;
          end else begin
            s <= s + 1'b1;
          end
        end
        S_SPREAD: begin
          if (i < ls_cur) begin
            sym_mem[X] <= s;
            X <= X + STEP;
            i <= i + 1'b1;
          end else if (32'(s) == M - 1) begin
            st <= S_FILL;
            x  <= (R+1)'(L);
          end else begin
            s <= s + 1'b1;
            i <= '0;
          end
        end
        S_FILL: begin
          pos[fs] <= pos[fs] + 1'b1;
          x <= x + 1'b1;
          if (x == (R+1)'(2 * L - 1)) begin
            if (ty == 2'(NTYPES - 1)) begin
              st   <= S_IDLE;
              done <= 1'b1;
            end else begin
              ty  <= ty + 1'b1;
              st  <= S_PREP;
              s   <= '0;
              cum <= '0;
            end
          end
        end
        default: st <= S_IDLE;
      endcase
      if (cfg_we && cfg_sel == CFG_LS && st == S_IDLE)
        ls_mem[cfg_vtype][SW'(cfg_addr)] <= (R+1)'(cfg_data);
    end
  end

endmodule
