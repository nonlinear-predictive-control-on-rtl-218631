// tb_spmv_lane: drives spmv_lane with (1) the 4x4 example matrix of the
// paper's sparse-multiplication figure, replayed with the multiplier/adder
// latencies drawn there (3 and 2 slots) and the schedule printed there, and
// (2) random symmetric blocks at the default latencies (5 and 6) with a
// greedy schedule that keeps same-row updates LAT_ADD apart, over several
// blocks per lane. Results are compared with a double-precision reference and
// the start-to-done time with nblk*nmac + LAT_MUL + LAT_ADD + 2 cycles.
module tb_spmv_lane;
  import nmpc_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int unsigned BW = 3;
  localparam int unsigned D  = 10;

  // shared memory models for both lanes under test
  sched_t sched [256];
  fp32_t  amem  [8][256];
  fp32_t  xmem  [8][D];
  fp32_t  ymem  [8][D];

  // ---------- lane A: figure latencies ----------
  logic             st_a, busy_a, done_a;
  logic [BW-1:0]    nblk_a;
  logic [NZ_W:0]    nmac_a;
  logic [NZ_W-1:0]  sa_a, aa_a;
  logic [BW-1:0]    ib_a, rb_a, wb_a;
  logic [ROW_W-1:0] xa_a, rr_a, wr_a;
  logic             we_a;
  fp32_t            wd_a;
  spmv_lane #(.BLK_W(BW), .LAT_M(3), .LAT_A(2)) lane_a (
    .clk, .rst_n, .start(st_a), .nblk(nblk_a), .nmac(nmac_a), .busy(busy_a), .done(done_a),
    .sched_addr(sa_a), .sched_data(sched[sa_a]), .iss_blk(ib_a),
    .a_addr(aa_a), .a_data(amem[ib_a][aa_a]), .x_addr(xa_a), .x_data(xmem[ib_a][xa_a]),
    .y_rd_blk(rb_a), .y_rd_row(rr_a), .y_rd_data(ymem[rb_a][rr_a]),
    .y_wr_en(we_a), .y_wr_blk(wb_a), .y_wr_row(wr_a), .y_wr_data(wd_a));

  // ---------- lane B: default latencies ----------
  logic             st_b, busy_b, done_b;
  logic [BW-1:0]    nblk_b;
  logic [NZ_W:0]    nmac_b;
  logic [NZ_W-1:0]  sa_b, aa_b;
  logic [BW-1:0]    ib_b, rb_b, wb_b;
  logic [ROW_W-1:0] xa_b, rr_b, wr_b;
  logic             we_b;
  fp32_t            wd_b;
  spmv_lane #(.BLK_W(BW)) lane_b (
    .clk, .rst_n, .start(st_b), .nblk(nblk_b), .nmac(nmac_b), .busy(busy_b), .done(done_b),
    .sched_addr(sa_b), .sched_data(sched[sa_b]), .iss_blk(ib_b),
    .a_addr(aa_b), .a_data(amem[ib_b][aa_b]), .x_addr(xa_b), .x_data(xmem[ib_b][xa_b]),
    .y_rd_blk(rb_b), .y_rd_row(rr_b), .y_rd_data(ymem[rb_b][rr_b]),
    .y_wr_en(we_b), .y_wr_blk(wb_b), .y_wr_row(wr_b), .y_wr_data(wd_b));

  always @(posedge clk) begin
    if (we_a) ymem[wb_a][wr_a] <= wd_a;
    if (we_b) ymem[wb_b][wr_b] <= wd_b;
  end

  function automatic sched_t ent(int aidx, int col, int row, bit v = 1);
    sched_t e;
    e.valid = v; e.aidx = NZ_W'(aidx); e.col = ROW_W'(col); e.row = ROW_W'(row);
    return e;
  endfunction

  real    ref_y [8][D];
  real    ref_abs [8][D];

  task automatic check_y(int nb, int d, string what);
    for (int b = 0; b < nb; b++)
      for (int r = 0; r < d; r++) begin
        real got, err;
        got = 0; err = 0;
        got = f2r(ymem[b][r]);
        err = got - ref_y[b][r];
        if (err < 0) err = -err;
        checks++;
        if (err > 1e-5 * (ref_abs[b][r] + 1e-30)) begin
          failures++;
          if (failures < 10) $display("%s blk %0d row %0d: got %f exp %f", what, b, r, got, ref_y[b][r]);
        end
      end
  endtask

  initial begin
    int unsigned t0, cycles;
    real av [4];
    st_a = 0; st_b = 0; nblk_a = 0; nblk_b = 0; nmac_a = 0; nmac_b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // ---- (1) figure example: stored a11 a21 a32 a44, matrix addresses
    // 0 1 2 3 1 2, input addresses 0 0 1 3 1 2; output rows follow the
    // matrix-vector product: a11*x1->y1, a21*x1->y2, a32*x2->y3, a44*x4->y4,
    // a12*x2->y1, a23*x3->y2.
    sched[0] = ent(0, 0, 0); sched[1] = ent(1, 0, 1); sched[2] = ent(2, 1, 2);
    sched[3] = ent(3, 3, 3); sched[4] = ent(1, 1, 0); sched[5] = ent(2, 2, 1);
    av[0] = 2.0; av[1] = -0.5; av[2] = 3.0; av[3] = 1.25;
    for (int i = 0; i < 4; i++) amem[0][i] = r2f(av[i]);
    for (int i = 0; i < 4; i++) xmem[0][i] = r2f(real'(i + 1));
    for (int i = 0; i < D; i++) ymem[0][i] = 0;
    ref_y[0][0] = 2.0 * 1 + (-0.5) * 2; ref_y[0][1] = -0.5 * 1 + 3.0 * 3;
    ref_y[0][2] = 3.0 * 2;              ref_y[0][3] = 1.25 * 4;
    for (int i = 0; i < 4; i++) ref_abs[0][i] = 10.0;
    @(negedge clk); st_a = 1; nblk_a = 1; nmac_a = 6;
    t0 = $time / 10;
    @(negedge clk); st_a = 0;
    while (!done_a) @(negedge clk);
    cycles = $time / 10 - t0;
    check_y(1, 4, "fig");
    checks++;
    if (cycles != 6 + 3 + 2 + 2) begin failures++; $display("fig cycles %0d", cycles); end

    // ---- (2) random symmetric blocks, default latencies, 5 blocks
    for (int rep = 0; rep < 4; rep++) begin
      bit     nz [D][D];
      int     aid [D][D];
      int     nst, nm, last [D], pend_r [$], pend_c [$];
      nst = 0;
      for (int r = 0; r < D; r++)
        for (int c = 0; c <= r; c++) begin
          nz[r][c] = (r == c) || ($urandom_range(0, 99) < 30);
          nz[c][r] = nz[r][c];
          if (nz[r][c]) begin aid[r][c] = nst; aid[c][r] = nst; nst++; end
        end
      // greedy list schedule: pick the first pending entry whose row is free
      for (int r = 0; r < D; r++) last[r] = -100;
      for (int r = 0; r < D; r++) for (int c = 0; c < D; c++)
        if (nz[r][c]) begin pend_r.push_back(r); pend_c.push_back(c); end
      nm = 0;
      while (pend_r.size() > 0) begin
        int pick;
        pick = -1;
        for (int k = 0; k < pend_r.size(); k++)
          if (nm - last[pend_r[k]] >= int'(LAT_ADD)) begin pick = k; break; end
        if (pick < 0) sched[nm] = ent(0, 0, 0, 0);
        else begin
          sched[nm] = ent(aid[pend_r[pick]][pend_c[pick]], pend_c[pick], pend_r[pick]);
          last[pend_r[pick]] = nm;
          pend_r.delete(pick); pend_c.delete(pick);
        end
        nm++;
      end
      for (int b = 0; b < 5; b++) begin
        for (int i = 0; i < nst; i++) amem[b][i] = rand_fp(3);
        for (int i = 0; i < D; i++) begin xmem[b][i] = rand_fp(3); ymem[b][i] = 0; end
        for (int r = 0; r < D; r++) begin
          ref_y[b][r] = 0; ref_abs[b][r] = 0;
          for (int c = 0; c < D; c++) if (nz[r][c]) begin
            real t;
            t = f2r(amem[b][aid[r][c]]) * f2r(xmem[b][c]);
            ref_y[b][r] += t;
            ref_abs[b][r] += (t < 0) ? -t : t;
          end
        end
      end
      @(negedge clk); st_b = 1; nblk_b = 5; nmac_b = (NZ_W+1)'(nm);
      t0 = $time / 10;
      @(negedge clk); st_b = 0;
      while (!done_b) @(negedge clk);
      cycles = $time / 10 - t0;
      check_y(5, D, "rand");
      checks++;
      if (cycles != 5 * nm + LAT_MUL + LAT_ADD + 2) begin
        failures++; $display("rand cycles %0d exp %0d", cycles, 5 * nm + LAT_MUL + LAT_ADD + 2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
