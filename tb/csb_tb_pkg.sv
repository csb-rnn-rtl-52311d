// csb_tb_pkg: testbench helpers for the CSB-Engine and the full accelerator.
//
// csb_model generates a random CSB-pruned weight matrix (every block keeps a
// random subset of its rows and columns, so kernel sizes differ from block to
// block), computes the reference matrix-vector product, and plays the role of
// the micro-instruction compiler: it packs each PEGroup's work into weight
// tiles, item headers, RowIdx and ColIdx entries. Its workload-sharing
// schedule is a simple greedy row split, not the SMT search of the original
// flow: a PEGroup whose block is heavier than the average of its block
// iteration hands whole groups of P kernel rows to its right neighbour
// (horizontal item) and to its lower neighbour (vertical item) while they
// are lighter. Any split is valid for the hardware; only the balance differs.
package csb_tb_pkg;
  import csb_pkg::*;

  class csb_model #(int P = 4, int Q = 4, int K = 4, int L = 4);
    int blk_m, blk_n, count_h, count_v, rows, cols;
    int w [][];                       // dense pruned matrix, Q8.8 integers
    // per block: kept rows / columns (indices inside the block)
    int krow [][][$];
    int kcol [][][$];
    // per PEGroup streams
    logic [P*Q*DW-1:0] tiles [K*L][$];
    uitem_t            items [K*L][$];
    logic [31:0]       ridx  [K*L][$];
    logic [31:0]       cidx  [K*L][$];
    int total_passes_max;             // sum over iterations of the busiest group
    int n_horiz, n_vert;              // shared items that are not empty

    function new(int bm, int bn, int ch, int cv);
      blk_m = bm; blk_n = bn; count_h = ch; count_v = cv;
      rows = cv * K * bn; cols = ch * L * bm;
      w = new[rows];
      foreach (w[r]) begin w[r] = new[cols]; foreach (w[r][c]) w[r][c] = 0; end
      krow = new[cv*K]; kcol = new[cv*K];
      foreach (krow[i]) begin krow[i] = new[ch*L]; kcol[i] = new[ch*L]; end
    endfunction

    // density in percent per block is drawn from [lo, hi]
    function void randomize_matrix(int lo, int hi, int wmax);
      for (int bi = 0; bi < count_v*K; bi++)
        for (int bj = 0; bj < count_h*L; bj++) begin
          int dens = lo + $urandom % (hi - lo + 1);
          krow[bi][bj].delete(); kcol[bi][bj].delete();
          for (int r = 0; r < blk_n; r++) if ($urandom % 100 < dens) krow[bi][bj].push_back(r);
          for (int c = 0; c < blk_m; c++) if ($urandom % 100 < dens) kcol[bi][bj].push_back(c);
          foreach (krow[bi][bj][a]) foreach (kcol[bi][bj][b])
            w[bi*blk_n + krow[bi][bj][a]][bj*blk_m + kcol[bi][bj][b]] = $signed($urandom % (2*wmax+1)) - wmax;
        end
    endfunction

    function int cdiv(int a, int b); return (a + b - 1) / b; endfunction

    // append one item (kernel rows rs x columns cs of block (bi,bj)) to group g
    function void add_item(int g, sharing_e sh, int bi, int bj, int rs[$], int cs[$]);
      uitem_t it;
      it.sharing = sh; it.tn = 7'(rs.size()); it.tm = 7'(cs.size());
      if (rs.size() == 0 || cs.size() == 0) begin it.tn = 0; it.tm = 0; end
      items[g].push_back(it);
      if (it.tn == 0) return;
      for (int rp = 0; rp < cdiv(rs.size(), P); rp++) begin
        logic [31:0] e = '0;
        for (int p = 0; p < P; p++) if (rp*P+p < rs.size()) e[p*5 +: 5] = 5'(rs[rp*P+p]);
        ridx[g].push_back(e);
      end
      for (int cp = 0; cp < cdiv(cs.size(), Q); cp++) begin
        logic [31:0] e = '0;
        for (int q = 0; q < Q; q++) if (cp*Q+q < cs.size()) e[q*5 +: 5] = 5'(cs[cp*Q+q]);
        cidx[g].push_back(e);
      end
      for (int rp = 0; rp < cdiv(rs.size(), P); rp++)
        for (int cp = 0; cp < cdiv(cs.size(), Q); cp++) begin
          logic [P*Q*DW-1:0] t = '0;
          for (int p = 0; p < P; p++) for (int q = 0; q < Q; q++)
            if (rp*P+p < rs.size() && cp*Q+q < cs.size())
              t[(p*Q+q)*DW +: DW] = DW'(w[bi*blk_n + rs[rp*P+p]][bj*blk_m + cs[cp*Q+q]]);
          tiles[g].push_back(t);
        end
    endfunction

    // Build the micro-instruction streams. share=0: no workload sharing.
    function void compile(bit share);
      foreach (tiles[g]) begin tiles[g].delete(); items[g].delete(); ridx[g].delete(); cidx[g].delete(); end
      total_passes_max = 0; n_horiz = 0; n_vert = 0;
      for (int i = 0; i < count_v; i++)
        for (int j = 0; j < count_h; j++) begin
          int load [K][L];      // passes per group
          int nh [K][L], nv [K][L];  // rows given right / down
          int avg = 0, mx = 0;
          for (int k = 0; k < K; k++) for (int l = 0; l < L; l++) begin
            load[k][l] = cdiv(krow[i*K+k][j*L+l].size(), P) * cdiv(kcol[i*K+k][j*L+l].size(), Q);
            nh[k][l] = 0; nv[k][l] = 0; avg += load[k][l];
          end
          avg = cdiv(avg, K*L);
          if (share)
            for (int k = 0; k < K; k++) for (int l = 0; l < L; l++) begin
              int nr = krow[i*K+k][j*L+l].size(), cp = cdiv(kcol[i*K+k][j*L+l].size(), Q);
              int lr = (l+1) % L, kd = (k+1) % K;
              // move P-row slices while the giver stays above the receiver
              while (cp > 0 && nr - nh[k][l] - nv[k][l] > P) begin
                bit moved = 0;
                if (load[k][l] > avg && load[k][lr] + cp < load[k][l] - cp && nv[k][l] == 0) begin
                  nh[k][l] += P; load[k][l] -= cp; load[k][lr] += cp; moved = 1;
                end
                if (nr - nh[k][l] - nv[k][l] > P &&
                    load[k][l] > avg && load[kd][l] + cp < load[k][l] - cp) begin
                  nv[k][l] += P; load[k][l] -= cp; load[kd][l] += cp; moved = 1;
                end
                if (!moved) break;
              end
            end
          begin
            int m = 0;
            for (int k = 0; k < K; k++) for (int l = 0; l < L; l++) if (load[k][l] > m) m = load[k][l];
            total_passes_max += m;
          end
          for (int k = 0; k < K; k++) for (int l = 0; l < L; l++) begin
            int g = k*L + l;
            int ll = (l + L - 1) % L, ku = (k + K - 1) % K;
            int rs[$], cs[$], own[$];
            // local: rows after the shared slices
            own = krow[i*K+k][j*L+l];
            rs = own[nh[k][l] + nv[k][l] : $];
            if (nh[k][l] + nv[k][l] >= own.size()) rs.delete();
            cs = kcol[i*K+k][j*L+l];
            add_item(g, SH_LOCAL, i*K+k, j*L+l, rs, cs);
            // horizontal: slice given by the left neighbour
            own = krow[i*K+k][j*L+ll]; rs.delete();
            for (int a = 0; a < nh[k][ll]; a++) rs.push_back(own[a]);
            cs = kcol[i*K+k][j*L+ll];
            if (rs.size() > 0) n_horiz++;
            add_item(g, SH_HORIZ, i*K+k, j*L+ll, rs, cs);
            // vertical: slice given by the upper neighbour
            own = krow[i*K+ku][j*L+l]; rs.delete();
            for (int a = nh[ku][l]; a < nh[ku][l] + nv[ku][l]; a++) rs.push_back(own[a]);
            cs = kcol[i*K+ku][j*L+l];
            if (rs.size() > 0) n_vert++;
            add_item(g, SH_VERT, i*K+ku, j*L+l, rs, cs);
          end
        end
    endfunction

    // reference y = sat((W x) >> FRAC)
    function void mvm(input int x [], output int y []);
      y = new[rows];
      foreach (y[r]) begin
        longint s = 0;
        foreach (x[c]) s += longint'(w[r][c]) * longint'(x[c]);
        s = s >>> FRAC;
        if (s > 32767) s = 32767; if (s < -32768) s = -32768;
        y[r] = int'(s);
      end
    endfunction
  endclass
endpackage
