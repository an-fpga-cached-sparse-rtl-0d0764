// spmv_tb_pkg: host-side model for the SpMV testbenches.
//
// SpmvProblem plays the part of the host preprocessing: it generates a
// banded sparse matrix with at most NNZ stored entries per row, as a
// Cuthill-McKee-reordered tetrahedral mesh would give (diagonal, the two
// neighbours and two further couplings within a band whose width changes
// from slice to slice), pads it to whole slices, splits the slices into
// contiguous blocks (one per core), and for every block computes the slice
// headers and rewrites each column index as the cache position its vector
// component will occupy. It also computes the expected result with the
// simulator's double arithmetic in the same order as the hardware:
// y[r] = ((((0 + a0*x0) + a1*x1) + a2*x2) + a3*x3) + a4*x4.
//
// Memory image (64-bit words): headers, values, packed 16-bit indexes, x
// and y each in their own region; all regions are laid out over the whole
// matrix and each block's descriptor points into them.
package spmv_tb_pkg;

  class SpmvProblem;
    int unsigned S, CACHE_LEN, NNZ, NB;
    int unsigned n_rows, n_pad, n_slices, n_x;
    int unsigned band_max;

    int          gcol [];   // [row*NNZ + k], global column
    bit          pad  [];   // entry is padding
    logic [63:0] val  [];   // [row*NNZ + k]
    logic [63:0] x    [];
    logic [63:0] y_ref[];
    int unsigned ccol [];   // cache-relative index [row*NNZ + k]
    logic [63:0] hdr  [];   // per slice
    int unsigned blk_first[]; // first slice of each block
    int unsigned blk_count[]; // slices of each block

    // statistics of mechanisms exercised
    int unsigned n_reuse_slices;   // slices with nwords == 0
    int unsigned n_load_slices;    // slices with nwords > 0
    int unsigned n_wraps;          // cache write pointer wrap-arounds
    int unsigned n_padding;        // padded entries
    int unsigned n_errors;         // violated preprocessing assumptions

    // word addresses of the regions
    longint unsigned hdr_w, val_w, col_w, x_w, y_w, total_w;

    function new(int unsigned S, int unsigned CACHE_LEN, int unsigned NNZ,
                 int unsigned NB, int unsigned n_rows, int unsigned band_max);
      this.S = S; this.CACHE_LEN = CACHE_LEN; this.NNZ = NNZ; this.NB = NB;
      this.n_rows = n_rows; this.band_max = band_max;
    endfunction

    static function logic [63:0] rnd_double();
      logic [63:0] v;
      v[63]    = 1'($urandom);
      v[62:52] = 11'(1023 - 4 + ($urandom % 9));
      v[51:0]  = {20'($urandom), 32'($urandom)};
      return v;
    endfunction

    function void generate_matrix();
      int unsigned band;
      n_pad    = ((n_rows + S - 1) / S) * S;
      n_slices = n_pad / S;
      n_x      = n_pad;
      gcol  = new[n_pad * NNZ];
      pad   = new[n_pad * NNZ];
      val   = new[n_pad * NNZ];
      ccol  = new[n_pad * NNZ];
      x     = new[n_x];
      y_ref = new[n_pad];
      hdr   = new[n_slices];
      n_padding = 0;
      foreach (x[i]) x[i] = (i < n_rows) ? rnd_double() : 64'h0;
      band = 2;
      for (int unsigned r = 0; r < n_pad; r++) begin
        int c [5];
        int n;
        if (r % S == 0) begin
          // the band width changes per slice: different mesh regions
          band = ($urandom % 4 == 0) ? 2 + ($urandom % 4) : 2 + ($urandom % band_max);
        end
        n = 0;
        if (r < n_rows) begin
          int cand [5];
          cand[0] = r; cand[1] = r - 1; cand[2] = r + 1;
          cand[3] = r - 2 - ($urandom % band); cand[4] = r + 2 + ($urandom % band);
          for (int k = 0; k < 5 && n < NNZ; k++) begin
            bit dup = 0;
            if (cand[k] < 0 || cand[k] >= int'(n_rows)) continue;
            for (int j = 0; j < n; j++) if (c[j] == cand[k]) dup = 1;
            // boundary faces: drop a coupling now and then
            if (k == 4 && ($urandom % 16) == 0) continue;
            if (!dup) begin c[n] = cand[k]; n++; end
          end
        end
        for (int unsigned k = 0; k < NNZ; k++) begin
          int unsigned e = r * NNZ + k;
          if (int'(k) < n) begin
            gcol[e] = c[k]; pad[e] = 0; val[e] = rnd_double();
          end else begin
            gcol[e] = (r < n_rows) ? int'(r) : int'(n_rows) - 1;
            pad[e] = 1; val[e] = 64'h0; n_padding++;
          end
        end
      end
      // reference result
      for (int unsigned r = 0; r < n_pad; r++) begin
        real acc;
        acc = 0.0;
        for (int unsigned k = 0; k < NNZ; k++)
          acc = acc + $bitstoreal(val[r*NNZ+k]) * $bitstoreal(x[gcol[r*NNZ+k]]);
        y_ref[r] = $realtobits(acc);
      end
    endfunction

    // Split slices into NB contiguous blocks and do the cache preprocessing.
    function void partition_and_preprocess();
      blk_first = new[NB];
      blk_count = new[NB];
      n_reuse_slices = 0; n_load_slices = 0; n_wraps = 0; n_errors = 0;
      for (int unsigned b = 0; b < NB; b++) begin
        blk_first[b] = (n_slices * b) / NB;
        blk_count[b] = (n_slices * (b + 1)) / NB - blk_first[b];
      end
      for (int unsigned b = 0; b < NB; b++) begin
        longint block_start, loaded_end, total_loaded;
        total_loaded = 0;
        for (int unsigned j = blk_first[b]; j < blk_first[b] + blk_count[b]; j++) begin
          int cs, ce;
          longint new_end, offset;
          int unsigned nwords;
          cs = gcol[j*S*NNZ]; ce = cs;
          for (int unsigned e = j*S*NNZ; e < (j+1)*S*NNZ; e++) begin
            if (gcol[e] < cs) cs = gcol[e];
            if (gcol[e] > ce) ce = gcol[e];
          end
          if (j == blk_first[b]) begin
            // The first load of a block starts low enough for every slice
            // of the block: a later slice may reach further back than the
            // first one where the band widens.
            int bs = cs;
            for (int unsigned e = j*S*NNZ; e < (blk_first[b] + blk_count[b])*S*NNZ; e++)
              if (gcol[e] < bs) bs = gcol[e];
            block_start = (bs / S) * S;
            loaded_end  = block_start;
          end
          new_end = ((ce + 1 + S - 1) / S) * S;
          if (new_end < loaded_end) new_end = loaded_end;
          nwords = int'((new_end - loaded_end) / S);
          offset = loaded_end;
          hdr[j] = {16'h0, 16'(nwords), 32'(offset)};
          if (nwords == 0) n_reuse_slices++; else n_load_slices++;
          if ((total_loaded % CACHE_LEN) + nwords * S >= CACHE_LEN) n_wraps++;
          total_loaded += nwords * S;
          loaded_end = new_end;
          if (nwords * S > CACHE_LEN) n_errors++;
          // every component of the slice must be cached and not overwritten
          for (int unsigned e = j*S*NNZ; e < (j+1)*S*NNZ; e++) begin
            if (gcol[e] < block_start || gcol[e] < loaded_end - longint'(CACHE_LEN) || gcol[e] >= loaded_end)
              n_errors++;
            ccol[e] = int'((gcol[e] - block_start) % CACHE_LEN);
          end
        end
      end
      // memory layout (word addresses)
      hdr_w   = 16;
      val_w   = hdr_w + n_slices + 16;
      col_w   = val_w + n_pad * NNZ + 16;
      x_w     = col_w + (n_pad * NNZ) / 4 + 16;
      y_w     = x_w + n_x + 16;
      total_w = y_w + n_pad + 16;
    endfunction

    // Word at address w of the memory image (0 outside the regions).
    function logic [63:0] image_word(longint unsigned w);
      if (w >= hdr_w && w < hdr_w + n_slices) return hdr[w - hdr_w];
      if (w >= val_w && w < val_w + n_pad * NNZ) begin
        // storage order: slice j, entry e = k*S + r
        longint unsigned i = w - val_w;
        longint unsigned j = i / (S * NNZ), e = i % (S * NNZ);
        return val[(j*S + e % S) * NNZ + e / S];
      end
      if (w >= col_w && w < col_w + (n_pad * NNZ) / 4) begin
        logic [63:0] v;
        for (int l = 0; l < 4; l++) begin
          longint unsigned i = (w - col_w) * 4 + l;
          longint unsigned j = i / (S * NNZ), e = i % (S * NNZ);
          v[l*16 +: 16] = 16'(ccol[(j*S + e % S) * NNZ + e / S]);
        end
        return v;
      end
      if (w >= x_w && w < x_w + n_x) return x[w - x_w];
      return 64'h0;
    endfunction

    // Byte-address descriptor fields of block b.
    function longint unsigned blk_hdr(int unsigned b); return (hdr_w + blk_first[b]) * 8; endfunction
    function longint unsigned blk_val(int unsigned b); return (val_w + blk_first[b] * S * NNZ) * 8; endfunction
    function longint unsigned blk_col(int unsigned b); return col_w * 8 + blk_first[b] * S * NNZ * 2; endfunction
    function longint unsigned blk_y(int unsigned b);   return (y_w + blk_first[b] * S) * 8; endfunction
    function longint unsigned x_base();                return x_w * 8; endfunction
  endclass

endpackage
