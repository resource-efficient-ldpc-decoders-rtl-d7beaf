// ldpc_ref_pkg: reference model of the decoder, for the testbenches.
//
// ldpc_ref #(P, N) builds the parity-check matrix edge by edge from its own copy
// of the code tables (Permuted matrices R_0..R_2 with their circulant shifts,
// which of them each core element uses, and the Level-2 shifts), independently of the RTL's routing, and offers:
//   decode()        : flooding min-sum decoding on the edge list with the same
//                     arithmetic as the hardware (3-bit saturated sign-magnitude
//                     messages, 4-bit LLRs), stopping when all checks hold;
//   rand_codeword() : a uniformly random codeword, from a reduced row echelon
//                     form of H computed once by GF(2) elimination;
//   syndrome_ok()   : whether a word satisfies every parity check.
// Index conventions: column c = ((j*N+n)*6+r)*P+p, row h = ((i*N+m)*6+a)*P+q.
package ldpc_ref_pkg;

  class ldpc_ref #(int P = 16, int N = 4);
    localparam int R  = 6;
    localparam int NC = 6 * N * R * P;
    localparam int NR = 3 * N * R * P;
    localparam int NE = 3 * NC;

    int rcol [3][6] = '{'{0, 2, 4, 5, 3, 1}, '{1, 3, 0, 5, 4, 2}, '{2, 4, 1, 5, 3, 0}};
    int rshf [3][6] = '{'{1, 3, 5, 6, 4, 2}, '{2, 4, 1, 6, 5, 3}, '{1, 5, 4, 3, 6, 2}};
    int rsel [3][6] = '{'{0, 1, 2, 0, 1, 2}, '{1, 2, 0, 1, 2, 0}, '{2, 0, 1, 2, 0, 1}};
    int lsh  [3][6] = '{'{0, 1, 2, 3, 0, 1}, '{0, 2, 1, 3, 1, 0}, '{0, 3, 1, 2, 2, 3}};

    int e_col[], e_row[], col_e[], row_e[];
    int build_errors;

    logic [NC-1:0] hr[];
    int            piv[];
    int            rank;
    bit            have_rref;

    function new();
      int e, cnt_c[], cnt_h[];
      e_col = new[NE]; e_row = new[NE];
      col_e = new[NC * 3]; row_e = new[NR * 6];
      cnt_c = new[NC]; cnt_h = new[NR];
      build_errors = 0;
      e = 0;
      for (int i = 0; i < 3; i++)
        for (int j = 0; j < 6; j++)
          for (int n = 0; n < N; n++)
            for (int r = 0; r < R; r++)
              for (int p = 0; p < P; p++) begin
                int a, s, q, m, c, h, x;
                x = rsel[i][j];
                a = -1;
                for (int k = 0; k < R; k++) if (rcol[x][k] == r) a = k;
                s = rshf[x][a] % P;
                q = (p - s + P) % P;
                m = (n - (lsh[i][j] % N) + N) % N;
                c = ((j * N + n) * R + r) * P + p;
                h = ((i * N + m) * R + a) * P + q;
                e_col[e] = c; e_row[e] = h;
                if (cnt_c[c] < 3) col_e[c * 3 + cnt_c[c]] = e;
                if (cnt_h[h] < 6) row_e[h * 6 + cnt_h[h]] = e;
                cnt_c[c]++; cnt_h[h]++;
                e++;
              end
      foreach (cnt_c[c]) if (cnt_c[c] != 3) build_errors++;
      foreach (cnt_h[h]) if (cnt_h[h] != 6) build_errors++;
      have_rref = 0;
    endfunction

    static function int sat(int x);
      return (x > 3) ? 3 : (x < -3) ? -3 : x;
    endfunction

    function void decode(input int llr[], input int max_iter,
                         output bit hd[], output int iters, output bit conv);
      int c2v[], v2c[];
      c2v = new[NE]; v2c = new[NE]; hd = new[NC];
      conv = 0; iters = max_iter;
      for (int it = 1; it <= max_iter; it++) begin
        int fails;
        for (int c = 0; c < NC; c++) begin
          int tot;
          tot = llr[c];
          for (int k = 0; k < 3; k++) tot += c2v[col_e[c * 3 + k]];
          for (int k = 0; k < 3; k++) v2c[col_e[c * 3 + k]] = sat(tot - c2v[col_e[c * 3 + k]]);
          hd[c] = (tot < 0);
        end
        fails = 0;
        for (int h = 0; h < NR; h++) begin
          bit par;
          par = 0;
          for (int k = 0; k < 6; k++) begin
            int e, mag;
            bit sg;
            e = row_e[h * 6 + k];
            par ^= hd[e_col[e]];
            mag = 3; sg = 0;
            for (int o = 0; o < 6; o++) if (o != k) begin
              int v;
              v = v2c[row_e[h * 6 + o]];
              sg ^= (v < 0);
              if ((v < 0 ? -v : v) < mag) mag = (v < 0 ? -v : v);
            end
            c2v[e] = sg ? -mag : mag;
          end
          if (par) fails++;
        end
        if (fails == 0) begin
          conv = 1; iters = it;
          return;
        end
      end
    endfunction

    function bit syndrome_ok(input bit x[]);
      for (int h = 0; h < NR; h++) begin
        bit par;
        par = 0;
        for (int k = 0; k < 6; k++) par ^= x[e_col[row_e[h * 6 + k]]];
        if (par) return 0;
      end
      return 1;
    endfunction

    // Reduced row echelon form of H over GF(2).
    function void build_rref();
      logic [NC-1:0] t;
      hr = new[NR]; piv = new[NR];
      foreach (hr[h]) hr[h] = '0;
      for (int e = 0; e < NE; e++) begin
        t = hr[e_row[e]];
        t[e_col[e]] = 1'b1;
        hr[e_row[e]] = t;
      end
      rank = 0;
      for (int c = 0; c < NC && rank < NR; c++) begin
        int sel;
        sel = -1;
        for (int h = rank; h < NR; h++) if (hr[h][c]) begin sel = h; break; end
        if (sel < 0) continue;
        t = hr[sel]; hr[sel] = hr[rank]; hr[rank] = t;
        for (int h = 0; h < NR; h++) if (h != rank && hr[h][c]) hr[h] ^= hr[rank];
        piv[rank] = c;
        rank++;
      end
      have_rref = 1;
    endfunction

    function void rand_codeword(output bit x[]);
      logic [NC-1:0] v;
      bit is_piv[];
      if (!have_rref) build_rref();
      is_piv = new[NC];
      for (int r = 0; r < rank; r++) is_piv[piv[r]] = 1;
      for (int c = 0; c < NC; c++) v[c] = is_piv[c] ? 1'b0 : 1'($urandom_range(0, 1));
      for (int r = 0; r < rank; r++) v[piv[r]] = ^(hr[r] & v);
      x = new[NC];
      for (int c = 0; c < NC; c++) x[c] = v[c];
    endfunction
  endclass

endpackage
