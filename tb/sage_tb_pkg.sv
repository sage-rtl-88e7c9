// sage_tb_pkg: reference encoder and shared test data for the SAGe testbenches.
//
// build() draws a random consensus and random reads with substitutions,
// insertions, deletions (short and long), N bases and corner-case markers,
// keeps each read's true base sequence as the expected output, and encodes
// the read set into the six byte streams the hardware reads (cfg, MPGA, MPA,
// MMPGA, MMPA, MBTA) plus 64-bit consensus words. The encoder follows the
// bitstream layout documented in the README; it shares no code with the RTL,
// so the reads a design rebuilds are compared against the reads that were
// drawn, not against a second copy of the decoder.
package sage_tb_pkg;

  localparam int MAXCH = 8;
  localparam int NSTREAM = 6;
  localparam int S_CFG = 0, S_MPGA = 1, S_MPA = 2, S_MMPGA = 3, S_MMPA = 4, S_MBTA = 5;

  typedef byte unsigned bq_t[$];

  typedef struct {
    bit        is_mm;
    int        pos;
    int        len;
    int        count;
    int        gap;
  } tok_t;

  // per-channel data
  bq_t       streams   [MAXCH][NSTREAM];
  bit [63:0] cons_words[MAXCH][$];
  bit [2:0]  exp_bases [MAXCH][$];
  int        exp_lens  [MAXCH][$];
  tok_t      exp_toks  [MAXCH][$];
  bit        exp_vd    [MAXCH][$];   // per mismatch entry: indel?
  int        exp_il    [MAXCH][$];   // per indel: length
  int        n_sub[MAXCH], n_ins[MAXCH], n_del[MAXCH], n_corner[MAXCH], n_long[MAXCH];
  int        n_reads[MAXCH];

  // encoder tables (widths per class)
  int wmp[$]  = '{4, 8, 16};
  int wcnt[$] = '{0, 2, 4, 8};
  int wmm[$]  = '{2, 4, 8, 16};

  // bit writers, one per stream, MSB first
  int unsigned acc[NSTREAM];
  int          nacc[NSTREAM];

  function automatic void put(int ch, int s, int unsigned v, int n);
    for (int i = n - 1; i >= 0; i--) begin
      acc[s]  = (acc[s] << 1) | ((v >> i) & 1);
      nacc[s] = nacc[s] + 1;
      if (nacc[s] == 8) begin
        streams[ch][s].push_back(byte'(acc[s] & 8'hff));
        acc[s]  = 0;
        nacc[s] = 0;
      end
    end
  endfunction

  function automatic void flush(int ch);
    for (int s = 0; s < NSTREAM; s++)
      if (nacc[s] != 0) put(ch, s, 0, 8 - nacc[s]);
  endfunction

  function automatic int bits_of(int unsigned v);
    int b = 0;
    while (v != 0) begin b++; v = v >> 1; end
    return b;
  endfunction

  // prefix code into guide stream g, value into array stream a
  function automatic void put_class(int ch, int g, int a, int tab[$], int unsigned v);
    int c = 0;
    while (c < tab.size() - 1 && tab[c] < bits_of(v)) c++;
    if (tab[c] < bits_of(v)) $fatal(1, "value %0d does not fit the table", v);
    if (tab.size() > 1) begin
      for (int i = 0; i < c; i++) put(ch, g, 1, 1);
      put(ch, g, 0, 1);
    end
    put(ch, a, v, tab[c]);
  endfunction

  function automatic void put_table(int ch, int tab[$]);
    streams[ch][S_CFG].push_back(byte'(tab.size()));
    foreach (tab[i]) streams[ch][S_CFG].push_back(byte'(tab[i]));
  endfunction

  function automatic void reset_ch(int ch);
    for (int s = 0; s < NSTREAM; s++) begin
      streams[ch][s].delete();
      acc[s] = 0;
      nacc[s] = 0;
    end
    cons_words[ch].delete();
    exp_bases[ch].delete();
    exp_lens[ch].delete();
    exp_toks[ch].delete();
    exp_vd[ch].delete();
    exp_il[ch].delete();
    n_sub[ch] = 0; n_ins[ch] = 0; n_del[ch] = 0; n_corner[ch] = 0; n_long[ch] = 0;
    n_reads[ch] = 0;
  endfunction

  // fixed_len = 0 selects per-read lengths in [min_len, max_len]
  function automatic void build(int ch, int nreads, int fixed_len, int min_len, int max_len,
                                int mm_pct);
    int cons_len;
    int cons[];
    int prev;
    reset_ch(ch);
    cons_len = nreads * 40 + max_len * 3 + 600;
    cons = new[cons_len];
    foreach (cons[i]) cons[i] = $urandom_range(3);
    for (int w = 0; w < (cons_len + 31) / 32; w++) begin
      bit [63:0] word = '0;
      for (int i = 0; i < 32; i++)
        if (w * 32 + i < cons_len) word[2*i +: 2] = 2'(cons[w*32+i]);
      cons_words[ch].push_back(word);
    end
    // configuration
    for (int i = 3; i >= 0; i--) streams[ch][S_CFG].push_back(byte'(nreads >> (8 * i)));
    streams[ch][S_CFG].push_back(byte'(fixed_len >> 8));
    streams[ch][S_CFG].push_back(byte'(fixed_len));
    put_table(ch, wmp);
    put_table(ch, wcnt);
    put_table(ch, wmm);
    n_reads[ch] = nreads;
    prev = 0;
    for (int r = 0; r < nreads; r++) begin
      int pos, len, cur, out_n, cnt, bw;
      bit corner;
      // entries of this read
      int e_gap[$], e_kind[$], e_base[$], e_len[$];   // kind 0 sub 1 ins 2 del 3 marker
      int e_ins[$];
      int out[$];
      pos = prev + ($urandom_range(9) == 0 ? $urandom_range(400) : $urandom_range(30));
      if (pos > cons_len - max_len * 2 - 300) pos = prev;
      len = (fixed_len != 0) ? fixed_len : $urandom_range(max_len, min_len);
      corner = ($urandom_range(9) == 0);
      bw = corner ? 3 : 2;
      cur = pos;
      if (corner) begin
        e_gap.push_back(0); e_kind.push_back(3); e_base.push_back(0); e_len.push_back(0);
        n_corner[ch]++;
      end
      while (out.size() < len - 1 && $urandom_range(99) < mm_pct) begin
        int room = len - out.size();
        int gap = $urandom_range((room - 1 < 24) ? room - 1 : 24);
        int kind = $urandom_range(9) < 6 ? 0 : ($urandom_range(1) ? 1 : 2);
        int L;
        for (int i = 0; i < gap; i++) out.push_back(cons[cur++]);
        room = len - out.size();
        e_gap.push_back(gap);
        e_kind.push_back(kind);
        if (kind == 0) begin
          int b;
          do b = (corner && $urandom_range(3) == 0) ? 4 : $urandom_range(3);
          while (b == cons[cur]);
          e_base.push_back(b); e_len.push_back(0);
          out.push_back(b); cur++;
          n_sub[ch]++;
        end else if (kind == 1) begin
          L = ($urandom_range(2) == 0) ? 1 : $urandom_range((room < 40) ? room : 40, 1);
          if (L > room) L = room;
          e_base.push_back(cons[cur]); e_len.push_back(L);
          for (int i = 0; i < L; i++) begin
            int b = (corner && $urandom_range(4) == 0) ? 4 : $urandom_range(3);
            e_ins.push_back(b);
            out.push_back(b);
          end
          n_ins[ch]++;
          if (L > 1) n_long[ch]++;
        end else begin
          L = ($urandom_range(2) == 0) ? 1 : $urandom_range(255, 2);
          if (cur + L + len >= cons_len) L = 1;
          e_base.push_back(cons[cur]); e_len.push_back(L);
          cur += L;
          n_del[ch]++;
          if (L > 1) n_long[ch]++;
        end
      end
      while (out.size() < len) out.push_back(cons[cur++]);
      foreach (out[i]) exp_bases[ch].push_back(3'(out[i]));
      exp_lens[ch].push_back(len);
      cnt = e_gap.size();
      // matching position and length
      put_class(ch, S_MPGA, S_MPA, wmp, pos - prev);
      if (fixed_len == 0) put(ch, S_MPA, len, 16);
      put_class(ch, S_MMPGA, S_MMPGA, wcnt, cnt);
      exp_toks[ch].push_back('{0, pos, len, cnt, 0});
      begin
        int k = 0;
        foreach (e_gap[i]) begin
          put_class(ch, S_MMPGA, S_MMPA, wmm, e_gap[i]);
          exp_toks[ch].push_back('{1, 0, 0, 0, e_gap[i]});
          if (i == 0 && e_gap[i] == 0) put(ch, S_MBTA, (e_kind[i] == 3) ? 1 : 0, 1);
          if (e_kind[i] == 3) begin
            exp_vd[ch].push_back(0);
            continue;
          end
          put(ch, S_MBTA, e_base[i], bw);
          if (e_kind[i] == 0) begin
            exp_vd[ch].push_back(0);
          end else begin
            exp_vd[ch].push_back(1);
            exp_il[ch].push_back(e_len[i]);
            put(ch, S_MBTA, (e_kind[i] == 2) ? 1 : 0, 1);
            put(ch, S_MMPGA, (e_len[i] > 1) ? 1 : 0, 1);
            if (e_len[i] > 1) put(ch, S_MMPA, e_len[i], 8);
            if (e_kind[i] == 1)
              for (int j = 0; j < e_len[i]; j++) put(ch, S_MBTA, e_ins[k++], bw);
          end
        end
      end
      prev = pos;
    end
    flush(ch);
  endfunction

  function automatic bit [7:0] fmt_ref(int fmt, bit [2:0] b);
    case (fmt)
      0: return (b == 4) ? 8'd0 : {6'd0, b[1:0]};
      1: return {5'd0, b};
      2: case (b) 0: return "A"; 1: return "C"; 2: return "G"; 3: return "T"; default: return "N"; endcase
      default: return (b == 4) ? 8'd0 : 8'(1 << b);
    endcase
  endfunction

endpackage
