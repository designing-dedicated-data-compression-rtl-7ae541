// tans_model_pkg: reference model of the coding scheme for the testbenches.
//
// Written independently of the RTL, in plain procedural style:
//   - tables(): symbol spread, encoding tables (nb, start, encodingTable) and
//     the decoding table (symbol, nbBits, newX) from the counts L_s;
//   - enc_step(): one tANS encoding step;
//   - a bit reader that walks a frame backwards, as the decoder on the
//     readout computer does, and decode_event(), which turns a compressed
//     frame back into the per-channel pulse counts and values.
package tans_model_pkg;

  localparam int MAXL = 4096;
  localparam int MAXM = 256;
  localparam int NT   = 4;

  class tans_tab;
    int R, L, M;
    int ls      [MAXM];
    int symbol  [MAXL];
    int enc     [MAXL];
    int nb      [MAXM];
    int start   [MAXM];
    int dsym    [MAXL];
    int dnb     [MAXL];
    int dnewx   [MAXL];

    function new(int r, int m);
      R = r; L = 1 << r; M = m;
      foreach (ls[i]) ls[i] = 0;
    endfunction

    static function int flg(int v);
      int b = 0;
      while ((1 << (b + 1)) <= v) b++;
      return b;
    endfunction

    function void build();
      int X, step, cum, k;
      int nxt[MAXM];
      step = (L >> 1) + (L >> 3) + 3;
      X = 0;
      for (int s = 0; s < M; s++)
        for (int i = 0; i < ls[s]; i++) begin
          symbol[X] = s;
          X = (X + step) % L;
        end
      cum = 0;
      for (int s = 0; s < M; s++) begin
        k        = R - flg(ls[s] > 0 ? ls[s] : 1);
        nb[s]    = (k << (R + 1)) - (ls[s] << k);
        start[s] = cum - ls[s];
        nxt[s]   = ls[s];
        cum     += ls[s];
      end
      for (int x = L; x < 2 * L; x++) begin
        int s = symbol[x - L];
        enc[start[s] + nxt[s]] = x;
        nxt[s]++;
      end
      // decoding table
      for (int s = 0; s < M; s++) nxt[s] = ls[s];
      for (int Xd = 0; Xd < L; Xd++) begin
        int s = symbol[Xd];
        int x = nxt[s];
        nxt[s]++;
        dsym[Xd]  = s;
        dnb[Xd]   = R - flg(x);
        dnewx[Xd] = (x << dnb[Xd]) - L;
      end
    endfunction

    // one encoding step: returns the new state, nbits and bits written
    function void enc_step(input int s, inout int x, output int nbits, output int bits);
      nbits = (x + nb[s]) >> (R + 1);
      bits  = x & ((1 << nbits) - 1);
      x     = enc[start[s] + (x >> nbits)];
    endfunction
  endclass

  // bin tables of one value type
  class bin_tab;
    int           n;
    longint unsigned bstart [MAXM];
    int           bwidth [MAXM];

    // contiguous bins from 0 with the given widths
    function void set_widths(int w[$]);
      longint unsigned p = 0;
      n = w.size();
      foreach (w[i]) begin
        bstart[i] = p;
        bwidth[i] = w[i];
        p += (64'd1 << w[i]);
      end
    endfunction

    function int find(longint unsigned v);
      int b = 0;
      for (int i = 0; i < n; i++) if (bstart[i] <= v) b = i;
      return b;
    endfunction
  endclass

  // backward bit reader over a frame of 32-bit words (bit 31 first)
  class bit_reader;
    bit bits[$];
    int pos;

    function void load(logic [31:0] words[$], int last_nbits);
      bits.delete();
      foreach (words[i]) begin
        int nb = (i == words.size() - 1) ? last_nbits : 32;
        for (int b = 0; b < nb; b++) bits.push_back(words[i][31 - b]);
      end
      pos = bits.size();
    endfunction

    function longint unsigned read(int n);
      longint unsigned v = 0;
      if (n > pos) begin pos = -1; return 0; end
      for (int b = pos - n; b < pos; b++) v = (v << 1) | longint'(bits[b]);
      pos -= n;
      return v;
    endfunction
  endclass

  // Decode one frame. vals[c] gets the values of channel c in natural order:
  // start, width, distance, width, ... ; cnt[c] the pulse count.
  // Returns 1 when the frame was consumed exactly and ended in state L.
  function automatic bit decode_event(tans_tab tt[NT], bin_tab bt[NT], bit_reader rd,
                                      int n_channels, ref int cnt[],
                                      ref longint unsigned vals[][$]);
    int X, R, L;
    R = tt[0].R; L = tt[0].L;
    cnt  = new[n_channels];
    vals = new[n_channels];
    X = int'(rd.read(R));
    for (int c = 0; c < n_channels; c++) begin
      int nval, ty;
      // pulses
      begin
        int s = tt[0].dsym[X];
        cnt[c] = int'(bt[0].bstart[s] + rd.read(bt[0].bwidth[s]));
        X = tt[0].dnewx[X] + int'(rd.read(tt[0].dnb[X]));
      end
      nval = 2 * cnt[c];
      for (int j = 0; j < nval; j++) begin
        int s;
        longint unsigned v;
        ty = (j == 0) ? 1 : ((j % 2) == 1 ? 2 : 3);
        s = tt[ty].dsym[X];
        v = bt[ty].bstart[s] + rd.read(bt[ty].bwidth[s]);
        vals[c].push_back(v);
        X = tt[ty].dnewx[X] + int'(rd.read(tt[ty].dnb[X]));
      end
      if (rd.pos < 0) return 0;
    end
    return (rd.pos == 0) && (X == 0);
  endfunction

endpackage
