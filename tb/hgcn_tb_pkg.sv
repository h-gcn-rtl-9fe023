// hgcn_tb_pkg: software side of the accelerator, for the testbenches.
//
// encode_tile() turns one 64x64 tile of A into the word stream an STPE column expects
// and into the list of non-zeros left to the PL SpMM. In sparse mode it keeps at most
// `cap` non-zeros per row (the rest go to the PL, as the paper's coverage step does),
// groups consecutive rows with the moving-average rule of the paper's grouping
// algorithm (a new group starts when the running mean of the row non-zero counts moves
// by a relative amount >= tau) and pads every row of a group to the group's largest
// count. Dense mode sends the tile as it is; skip mode sends only a header and gives
// every non-zero to the PL.
package hgcn_tb_pkg;
  import hgcn_pkg::*;

  localparam int TS = TILE_S;

  typedef struct {
    int    row;
    int    col;
    elem_t val;
  } nz_t;

  typedef elem_t tile_t[TS][TS];

  function automatic word_t mkword(input elem_t l0, input elem_t l1, input elem_t l2);
    word_t w = '0;
    w[0] = l0; w[1] = l1; w[2] = l2;
    return w;
  endfunction

  // Grouping of rows by moving average; returns group sizes.
  function automatic void group_rows(input int nnz[TS], input real tau, ref int sizes[$]);
    real sum, cur, pre;
    int  cnt, gsz;
    sizes.delete();
    sum = 0; cnt = 0; cur = 0; gsz = 0;
    for (int i = 0; i < TS; i++) begin
      pre = cur;
      sum += nnz[i]; cnt++;
      cur = sum / cnt;
      if (pre == 0) pre = cur;
      if (pre != 0 && ((cur > pre ? cur - pre : pre - cur) / pre) >= tau && gsz > 0) begin
        sizes.push_back(gsz);
        gsz = 1;
        sum = nnz[i]; cnt = 1; cur = sum;
      end else begin
        gsz++;
      end
    end
    if (gsz > 0) sizes.push_back(gsz);
  endfunction

  function automatic void encode_tile(input tile_t a, input tile_mode_e mode, input int cap,
                                      input real tau, input int row_off,
                                      ref word_t words[$], ref nz_t resid[$],
                                      output int work_cycles);
    int nnz[TS];
    int sizes[$];
    int gmax[$];
    elem_t pv[$];
    int    pc[$];
    words.delete();
    work_cycles = 0;
    if (mode == TILE_SKIP) begin
      words.push_back(mkword(0, 0, 0));
      for (int i = 0; i < TS; i++)
        for (int k = 0; k < TS; k++)
          if (a[i][k] != 0) resid.push_back('{row: row_off + i, col: k, val: a[i][k]});
      return;
    end
    if (mode == TILE_DENSE) begin
      words.push_back(mkword(2, 1, TS * TS / LANES));
      for (int n = 0; n < TS * TS / LANES; n++) begin
        word_t w;
        for (int l = 0; l < LANES; l++) w[l] = a[(n * LANES + l) / TS][(n * LANES + l) % TS];
        words.push_back(w);
      end
      work_cycles = TS * TS * (TILE_D / LANES);
      return;
    end
    // sparse: cap rows, send the excess to the PL
    for (int i = 0; i < TS; i++) begin
      nnz[i] = 0;
      for (int k = 0; k < TS; k++)
        if (a[i][k] != 0) begin
          if (nnz[i] < cap) nnz[i]++;
          else resid.push_back('{row: row_off + i, col: k, val: a[i][k]});
        end
    end
    group_rows(nnz, tau, sizes);
    begin
      int r = 0;
      foreach (sizes[g]) begin
        int m = 0;
        for (int i = r; i < r + sizes[g]; i++) if (nnz[i] > m) m = nnz[i];
        gmax.push_back(m);
        r += sizes[g];
        work_cycles += (m == 0) ? 1 : sizes[g] * m * (TILE_D / LANES);
      end
    end
    // entries
    begin
      int r = 0;
      foreach (sizes[g]) begin
        for (int i = r; i < r + sizes[g]; i++) begin
          int kept = 0;
          for (int k = 0; k < TS && kept < nnz[i]; k++)
            if (a[i][k] != 0) begin pc.push_back(k); pv.push_back(a[i][k]); kept++; end
          for (int p = kept; p < gmax[g]; p++) begin pc.push_back(0); pv.push_back(0); end
        end
        r += sizes[g];
      end
    end
    while (pc.size() % (LANES / 2) != 0) begin pc.push_back(0); pv.push_back(0); end
    words.push_back(mkword(1, sizes.size(), sizes.size() + pc.size() / (LANES / 2)));
    foreach (sizes[g]) words.push_back(mkword(sizes[g], gmax[g], 0));
    for (int n = 0; n < pc.size(); n += LANES / 2) begin
      word_t w;
      for (int m = 0; m < LANES / 2; m++) begin
        w[2*m]   = pc[n + m];
        w[2*m+1] = pv[n + m];
      end
      words.push_back(w);
    end
  endfunction

  // Pack PL entries two per word: {row, col, val, flag}.
  function automatic void pack_pl(ref nz_t list[$], ref word_t words[$]);
    words.delete();
    for (int n = 0; n < list.size(); n += 2) begin
      word_t w = '0;
      for (int m = 0; m < 2; m++)
        if (n + m < list.size()) begin
          w[4*m]   = list[n+m].row;
          w[4*m+1] = list[n+m].col;
          w[4*m+2] = list[n+m].val;
          w[4*m+3] = 1;
        end
      words.push_back(w);
    end
  endfunction

  // Random tile: each element non-zero with probability per100k/100000, only in the
  // first nrows rows and ncols columns (the rest is padding of a smaller graph).
  function automatic void rand_tile_fine(input int per100k, input int nrows, input int ncols,
                                         output tile_t a);
    for (int i = 0; i < TS; i++)
      for (int k = 0; k < TS; k++)
        a[i][k] = (i < nrows && k < ncols && $urandom_range(0, 99999) < per100k)
                  ? elem_t'($urandom_range(1, 9)) * (($urandom_range(0, 1) == 1) ? 1 : -1) : 0;
  endfunction

  // Random tile: each element non-zero with probability permille/1000.
  function automatic void rand_tile(input int permille, output tile_t a);
    for (int i = 0; i < TS; i++)
      for (int k = 0; k < TS; k++)
        a[i][k] = ($urandom_range(0, 999) < permille) ? elem_t'($urandom_range(1, 9)) * (($urandom_range(0, 1) == 1) ? 1 : -1) : 0;
  endfunction

endpackage
