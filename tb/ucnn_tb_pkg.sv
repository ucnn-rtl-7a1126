// ucnn_tb_pkg: test helpers for the UCNN testbenches.
//
// table_builder does what an offline compiler does for the accelerator:
// given the canonical weight index of every tile position for each of G
// filters, it hierarchically sorts the positions (by filter 1's weight, then
// filter 2's, ...), drops positions where every filter has the zero weight
// (the last canonical index), and emits the packed {wiT, iiT} table words,
// inserting skip entries where the 2-bit advance of the innermost filter
// cannot reach the next weight. It also gives the reference dot products.
package ucnn_tb_pkg;
  import ucnn_pkg::*;

  class table_builder;
    int unsigned G, U, RT, ST, CT;
    int          widx [][];      // [g][p] canonical weight index
    logic [15:0] words [$];      // table words
    int          n_skip_entries;

    function new(int unsigned g, int unsigned u, int unsigned rt = R_T,
                 int unsigned st = S_T, int unsigned ct = C_T);
      G = g; U = u; RT = rt; ST = st; CT = ct;
      widx = new[G];
      foreach (widx[i]) widx[i] = new[RT * ST * CT];
    endfunction

    function automatic logic [15:0] pack(bit last, bit skip, int p, int tbits, int adv);
      iit_entry_t e;
      logic [15:0] w;
      e.last = last;
      e.skip = skip;
      e.r    = R_W'(p / (ST * CT));
      e.s    = S_W'((p / CT) % ST);
      e.c    = C_W'(p % CT);
      w = '0;
      w[IIT_W-1:0] = e;
      for (int g = 0; g < G - 1; g++) w[IIT_W + g] = tbits[g];
      w[IIT_W + G - 1 +: 2] = 2'(adv);
      return w;
    endfunction

    // hardware pointer update for an entry ending level g0 with advance adv
    function automatic void move(ref int ptr[], input int g0, input int adv);
      int a;
      a = (adv == 0) ? 1 : adv;
      if (g0 == int'(G) - 1) begin
        ptr[G-1] += a;
      end else begin
        ptr[g0] += 1;
        for (int g = g0 + 1; g < int'(G) - 1; g++) ptr[g] = 0;
        ptr[G-1] = a - 1;
      end
    endfunction

    function automatic int first_diff(int a[], int b[]);
      for (int g = 0; g < int'(G); g++) if (a[g] != b[g]) return g;
      return -1;
    endfunction

    function automatic int pick_adv(int ptr[], int key[], int g0);
      // advance for the innermost filter that gets closest to key
      if (g0 == int'(G) - 1) return (key[G-1] - ptr[G-1] > 3) ? 3 : key[G-1] - ptr[G-1];
      if (ptr[g0] + 1 == key[g0]) begin
        for (int g = g0 + 1; g < int'(G) - 1; g++) if (key[g] != 0) return 1;
        return (key[G-1] + 1 > 3) ? 3 : key[G-1] + 1;
      end
      return 1;
    endfunction

    function automatic void build();
      int order[$];
      int ptr[], key[], nkey[];
      int n;
      words.delete();
      n_skip_entries = 0;
      // positions that are non-zero in at least one filter
      for (int p = 0; p < int'(RT * ST * CT); p++) begin
        bit nz = 0;
        for (int g = 0; g < int'(G); g++) if (widx[g][p] != int'(U) - 1) nz = 1;
        if (nz) order.push_back(p);
      end
      // hierarchical sort (insertion sort on the key tuple, stable)
      for (int i = 1; i < order.size(); i++) begin
        int j = i;
        while (j > 0 && less(order[j], order[j-1])) begin
          int t = order[j]; order[j] = order[j-1]; order[j-1] = t; j--;
        end
      end
      ptr = new[G]; key = new[G]; nkey = new[G];
      foreach (ptr[g]) ptr[g] = 0;
      if (order.size() == 0) begin
        words.push_back(pack(1, 1, 0, 1, 1));
        n_skip_entries++;
        return;
      end
      for (int i = 0; i < order.size(); i++) begin
        int p = order[i];
        int g0, adv, tb;
        foreach (key[g]) key[g] = widx[g][p];
        // skip entries until the pointers reach this entry's weights
        while (first_diff(ptr, key) >= 0) begin
          g0  = first_diff(ptr, key);
          adv = pick_adv(ptr, key, g0);
          tb  = (g0 < int'(G) - 1) ? (1 << g0) : 0;
          words.push_back(pack(0, 1, 0, tb, adv));
          n_skip_entries++;
          move(ptr, g0, adv);
        end
        if (i == order.size() - 1) begin
          words.push_back(pack(1, 0, p, (G > 1) ? 1 : 0, 1));
        end else begin
          foreach (nkey[g]) nkey[g] = widx[g][order[i+1]];
          g0 = first_diff(key, nkey);
          if (g0 < 0) begin
            words.push_back(pack(0, 0, p, 0, 0));
          end else begin
            adv = pick_adv(ptr, nkey, g0);
            tb  = (g0 < int'(G) - 1) ? (1 << g0) : 0;
            words.push_back(pack(0, 0, p, tb, adv));
            move(ptr, g0, adv);
          end
        end
      end
    endfunction

    function automatic bit less(int a, int b);
      for (int g = 0; g < int'(G); g++) begin
        if (widx[g][a] < widx[g][b]) return 1;
        if (widx[g][a] > widx[g][b]) return 0;
      end
      return 0;
    endfunction
  endclass

  // A whole layer: random INQ-like weights (16 non-zero powers of two of
  // either sign, plus zero), random post-ReLU inputs, the DRAM image the
  // scheduler expects, and the expected output activations.
  class layer_gen;
    int unsigned W, H, C, K, R, S, U, G, V, shift;
    int unsigned wo, ho, nct, nfg;
    int          wv [];
    int          widx [];   // [((k*C + c)*R + r)*S + s]
    int          act [];    // [(c*H + y)*W + x]
    int          expect_out []; // [(k*ho + y)*wo + x]
    int          dram [int];
    int          n_skip_entries;

    function new(int unsigned w, int unsigned h, int unsigned c, int unsigned k,
                 int unsigned r, int unsigned s, int unsigned u, int unsigned g,
                 int unsigned v, int unsigned sh);
      W = w; H = h; C = c; K = k; R = r; S = s; U = u; G = g; V = v; shift = sh;
      wo = W - R + 1; ho = H - S + 1;
      nct = (C + C_T - 1) / C_T;
      nfg = (K + G - 1) / G;
    endfunction

    function automatic void generate_layer(int density_pct, int act_density_pct);
      wv = new[U];
      for (int i = 0; i < int'(U) - 1; i++) wv[i] = ((i % 2) ? -1 : 1) * (1 << ((i / 2) % 8));
      wv[U-1] = 0;
      widx = new[K * C * R * S];
      foreach (widx[i]) widx[i] = (($urandom % 100) < density_pct) ? ($urandom % (U - 1)) : U - 1;
      act = new[C * H * W];
      foreach (act[i]) act[i] = (($urandom % 100) < act_density_pct) ? ($urandom % 32) : 0;
    endfunction

    function automatic int wi(int k, int c, int r, int s);
      return widx[((k * C + c) * R + r) * S + s];
    endfunction

    function automatic void build(int unsigned base);
      table_builder tb;
      dram.delete();
      n_skip_entries = 0;
      for (int i = 0; i < int'(U); i++) dram[base + i] = wv[i] & 16'hffff;
      for (int f = 0; f < int'(nfg); f++)
        for (int t = 0; t < int'(nct); t++) begin
          int unsigned rec = base + U + (f * nct + t) * REC_WORDS;
          tb = new(G, U);
          for (int g = 0; g < int'(G); g++)
            for (int p = 0; p < int'(R_T * S_T * C_T); p++) begin
              int r = p / (S_T * C_T), s = (p / C_T) % S_T, cl = p % C_T;
              int k = f * G + g, ch = t * C_T + cl;
              tb.widx[g][p] = (k < int'(K) && ch < int'(C) && r < int'(R) && s < int'(S))
                              ? wi(k, ch, r, s) : U - 1;
            end
          tb.build();
          n_skip_entries += tb.n_skip_entries;
          dram[rec] = tb.words.size();
          foreach (tb.words[i]) dram[rec + 1 + i] = tb.words[i];
        end
      // expected outputs
      expect_out = new[K * ho * wo];
      for (int k = 0; k < int'(K); k++)
        for (int y = 0; y < int'(ho); y++)
          for (int x = 0; x < int'(wo); x++) begin
            longint sum = 0;
            for (int c = 0; c < int'(C); c++)
              for (int r = 0; r < int'(R); r++)
                for (int s = 0; s < int'(S); s++)
                  sum += longint'(wv[wi(k, c, r, s)]) * act[(c * H + y + s) * W + x + r];
            sum = sum >>> shift;
            expect_out[(k * ho + y) * wo + x] = (sum < 0) ? 0 : (sum > 32767) ? 32767 : int'(sum);
          end
    endfunction
  endclass

endpackage
