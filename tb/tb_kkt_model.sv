// tb_kkt_model: testbench-side model of the KKT matrix used to drive and
// check the matrix-vector unit and the solver. It draws a random symmetric
// in-block sparsity pattern (diagonal always present), numbers its
// lower-triangular non-zeros, builds a greedy MAC schedule that keeps updates
// of one row at least LAT_ADD entries apart (inserting empty entries where
// nothing can go), draws block values, and forms the full matrix in double
// precision with the -I couplings, for reference products and residuals.
package tb_kkt_model;
  import nmpc_pkg::*;
  import tb_fp_pkg::*;

  localparam int MAXD   = 48;         // rows per block
  localparam int MAXB   = 20;         // blocks
  localparam int MAXDIM = MAXD * MAXB + 8;

  int     blk_d, nx, crow, nblk, dim;
  bit     nz   [MAXD][MAXD];
  int     aid  [MAXD][MAXD];
  int     nstored;
  sched_t sched_q [$];
  logic [31:0] aval [MAXB][256];
  real    A [MAXDIM][MAXDIM];
  int     nbubbles;

  function automatic int gidx(int part, int row);   // partition 0 = lead
    return (part == 0) ? row : nx + (part - 1) * blk_d + row;
  endfunction

  function automatic void setup(int d, int x, int c, int nb, int density_pct);
    int last [MAXD];
    int pr [$], pc [$];
    int nm, pick;
    blk_d = d; nx = x; crow = c; nblk = nb; dim = nx + nb * d;
    nstored = 0;
    for (int r = 0; r < d; r++)
      for (int cc = 0; cc <= r; cc++) begin
        nz[r][cc] = (r == cc) || (int'($urandom_range(0, 99)) < density_pct);
        nz[cc][r] = nz[r][cc];
        if (nz[r][cc]) begin aid[r][cc] = nstored; aid[cc][r] = nstored; nstored++; end
      end
    for (int r = 0; r < d; r++) last[r] = -1000;
    for (int r = 0; r < d; r++) for (int cc = 0; cc < d; cc++)
      if (nz[r][cc]) begin pr.push_back(r); pc.push_back(cc); end
    sched_q.delete();
    nm = 0; nbubbles = 0;
    while (pr.size() > 0) begin
      sched_t e;
      pick = -1;
      for (int k = 0; k < pr.size(); k++)
        if (nm - last[pr[k]] >= int'(LAT_ADD)) begin pick = k; break; end
      e = '0;
      if (pick >= 0) begin
        e.valid = 1'b1; e.aidx = NZ_W'(aid[pr[pick]][pc[pick]]);
        e.col = ROW_W'(pc[pick]); e.row = ROW_W'(pr[pick]);
        last[pr[pick]] = nm;
        pr.delete(pick); pc.delete(pick);
      end else nbubbles++;
      sched_q.push_back(e);
      nm++;
    end
  endfunction

  // values: diagonal of magnitude in [diag_lo, diag_lo+1], off-diagonals in (-1,1)
  function automatic void draw_values(real diag_lo, bit indefinite);
    for (int b = 0; b < nblk; b++)
      for (int r = 0; r < blk_d; r++)
        for (int c = 0; c <= r; c++) if (nz[r][c]) begin
          real v;
          v = (real'($urandom_range(0, 1999)) - 1000.0) / 1000.0;
          if (r == c) begin
            v = diag_lo + (v + 1.0) / 2.0;
            if (indefinite && (r % 2 == 1)) v = -v;
          end
          aval[b][aid[r][c]] = r2f(v);
        end
    for (int i = 0; i < dim; i++) for (int j = 0; j < dim; j++) A[i][j] = 0.0;
    for (int b = 0; b < nblk; b++)
      for (int r = 0; r < blk_d; r++) for (int c = 0; c < blk_d; c++)
        if (nz[r][c]) A[gidx(b + 1, r)][gidx(b + 1, c)] = f2r(aval[b][aid[r][c]]);
    for (int i = 0; i < nx; i++) begin
      A[gidx(0, i)][gidx(1, i)] = -1.0; A[gidx(1, i)][gidx(0, i)] = -1.0;
    end
    for (int b = 0; b + 1 < nblk; b++)
      for (int i = 0; i < nx; i++) begin
        A[gidx(b + 1, crow + i)][gidx(b + 2, i)] = -1.0;
        A[gidx(b + 2, i)][gidx(b + 1, crow + i)] = -1.0;
      end
  endfunction

  // partition / row of a global index
  function automatic void split(int g, output int part, output int row);
    if (g < nx) begin part = 0; row = g; end
    else begin part = (g - nx) / blk_d + 1; row = (g - nx) % blk_d; end
  endfunction

endpackage
