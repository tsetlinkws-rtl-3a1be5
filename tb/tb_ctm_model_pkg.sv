// tb_ctm_model_pkg: reference model of a convolutional Tsetlin machine for
// the accelerator testbenches.
//
// The class `ctm_model` holds a random sparse model (12 classes x 120 clauses,
// each clause a set of included literals over the 64 feature rows and the 16
// literal columns), encodes it into the OG-BCSR lists the accelerator reads
// (block-index words, per-unit row counts and column/clause words), computes
// the clause outputs and class sums straight from the definition of a
// convolutional clause, and predicts the accelerator's clock count.
//
// Literal column k of row r at window w: k < 7 is feature bit (r, w+k);
// k == 7 is the position literal (w > r); k >= 8 is the negation of k-8.
// A clause fires when, for at least one of the 58 windows, all its included
// literals are 1; a clause with no literal fires.
// Clause numbering inside a batch: clause = 8*unit + 2*code + pair bit,
// matrix = 4*unit + code.
package tb_ctm_model_pkg;
  localparam int NCL = 12, NCLS = 120, NR = 64, NW = 58;

  class ctm_model;
    bit [15:0] incl [NCL][NCLS][NR];
    int        wgt  [NCL][NCLS];
    // encoded lists
    bit [19:0] bi   [NCL*3*32];
    int        rc   [5][$];
    int        ccl  [5][$];
    int        cycles;
    int        n_ta, n_empty_blocks, n_matrix_switch;
    // loop bounds kept in variables so that the simulator compiles the
    // loops as loops instead of unrolling them
    int ncl = NCL, ncls = NCLS, nr = NR, nw = NW, ncol = 16, nunit = 5, ngrp = 4,
        nblk = 32, nrnd = 3, two = 2;

    // rows_per_clause rows get cols_per_row literals each
    function void gen(int rows_per_clause, int cols_per_row, int p_empty_pct);
      n_ta = 0;
      for (int c = 0; c < ncl; c++)
        for (int j = 0; j < ncls; j++)
          for (int r = 0; r < nr; r++) incl[c][j][r] = '0;
      for (int c = 0; c < ncl; c++)
        for (int j = 0; j < ncls; j++) begin
          wgt[c][j] = int'($urandom_range(0, 255)) - 128;
          if (int'($urandom_range(0, 99)) < p_empty_pct) continue;
          for (int k = 0; k < rows_per_clause; k++) begin
            int r;
            r = int'($urandom_range(0, NR - 1));
            for (int q = 0; q < cols_per_row; q++) begin
              int col;
              col = int'($urandom_range(0, 15));
              // never include a literal and its negation: such a clause never fires
              if (incl[c][j][r][col ^ 8] == 1'b0) incl[c][j][r][col] = 1'b1;
            end
          end
        end
    endfunction

    function void encode();
      cycles = 0; n_empty_blocks = 0; n_matrix_switch = 0;
      for (int u = 0; u < nunit; u++) begin rc[u].delete(); ccl[u].delete(); end
      for (int c = 0; c < ncl; c++) begin
        for (int rnd = 0; rnd < nrnd; rnd++) begin
          cycles += 3;                       // batch set-up, load of block 0, drain
          for (int b = 0; b < nblk; b++) begin
            bit [19:0] word;
            int maxn;
            word = '0; maxn = 0;
            for (int u = 0; u < nunit; u++) begin
              int nu, nm;
              nu = 0; nm = 0;
              for (int code = 0; code < ngrp; code++) begin
                int cnt [2];
                for (int h = 0; h < two; h++) begin
                  cnt[h] = 0;
                  for (int p = 0; p < two; p++)
                    for (int col = 0; col < ncol; col++)
                      if (incl[c][rnd*40 + 8*u + 2*code + p][2*b + h][col]) cnt[h]++;
                end
                if (cnt[0] + cnt[1] == 0) continue;
                if (cnt[0] > 7 || cnt[1] > 7) $fatal(1, "row count above 7");
                word[4*u + code] = 1'b1;
                rc[u].push_back(cnt[1] * 8 + cnt[0]);
                for (int h = 0; h < two; h++)
                  for (int p = 0; p < two; p++)
                    for (int col = 0; col < ncol; col++)
                      if (incl[c][rnd*40 + 8*u + 2*code + p][2*b + h][col])
                        ccl[u].push_back(col * 2 + p);
                nu += cnt[0] + cnt[1];
                nm++;
              end
              if (nm > 1) n_matrix_switch += nm - 1;
              if (nu > maxn) maxn = nu;
            end
            bi[(c*3 + rnd)*32 + b] = word;
            if (maxn == 0) n_empty_blocks++;
            cycles += (maxn < 2) ? 2 : maxn;
          end
          cycles += 40;                      // clause results to the summation
        end
        cycles += 1;                         // class result to the argmax
      end
      cycles += 1;                           // done
      for (int u = 0; u < nunit; u++) n_ta += ccl[u].size();
    endfunction

    function bit lit(bit [63:0] feat [NR], int r, int col, int w);
      bit b;
      if ((col & 7) == 7) b = (w > r);
      else b = feat[r][w + (col & 7)];
      return (col >= 8) ? !b : b;
    endfunction

    function bit clause_out(bit [63:0] feat [NR], int c, int j);
      for (int w = 0; w < nw; w++) begin
        bit all;
        all = 1'b1;
        for (int r = 0; r < nr && all; r++)
          if (incl[c][j][r] != 0)
            for (int col = 0; col < ncol; col++)
              if (incl[c][j][r][col] && !lit(feat, r, col, w)) all = 1'b0;
        if (all) return 1'b1;
      end
      return 1'b0;
    endfunction

    function void classify(bit [63:0] feat [NR], output int best, output int best_sum,
                           output int sums [NCL]);
      for (int c = 0; c < ncl; c++) begin
        sums[c] = 0;
        for (int j = 0; j < ncls; j++) if (clause_out(feat, c, j)) sums[c] += wgt[c][j];
        if (c == 0 || sums[c] > best_sum) begin best = c; best_sum = sums[c]; end
      end
    endfunction
  endclass
endpackage
