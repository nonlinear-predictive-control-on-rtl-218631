// tb_nmpc_hg3_full: one complete KKT solve with the top at its default size
// (no parameter overrides): a horizon of 10 blocks of 38 rows on 10 MAC
// lanes, 386 unknowns, about 161 MACs per block as in the crane example, and
// as many MINRES iterations as the system has rows (386). The testbench loads
// a random block-sparse KKT system (one sparsity pattern and one greedy MAC
// schedule shared by all blocks, per-block values, -I couplings) and a
// right-hand side, runs the solver, and checks z by its residual
// ||b - A z|| / ||b|| worked out in double precision. It also counts -I
// coupling transfers, empty schedule slots, write-to-read bypasses and
// divide/square-root operations, and fails if one never happened. Lane reuse,
// the iteration limit and the early exit cannot occur at this size with P = N
// and are exercised by tb_nmpc_hg3_top at reduced size.
module tb_nmpc_hg3_full;
  import nmpc_pkg::*;
  import tb_fp_pkg::*;
  import tb_kkt_model::*;

  localparam int unsigned NN = 10, PP = 10, BLKV = 38, NXV = 6, CRV = 32;
  localparam int unsigned DIMV = NXV + NN * BLKV;
  localparam int unsigned PW = $clog2(NN + 2), IW = $clog2(DIMV + 1);

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sched_we = 0, a_we = 0, b_we = 0, start = 0, busy, done;
  logic [NZ_W-1:0] sched_waddr = 0, a_waddr = 0;
  sched_t sched_wdata = '0;
  logic [PW-1:0] a_wblk = 0;
  fp32_t a_wdata = 0, b_wdata = 0, z_rdata;
  logic [NZ_W:0] nmac = 0;
  logic [IW-1:0] b_idx = 0, z_idx = 0;
  logic [15:0] niter = 0, iters;

  nmpc_hg3_top dut (.*);

  // mechanism counters
  int n_couple = 0, n_reuse = 0, n_bubble = 0, n_bypass = 0, n_ds = 0;
  always @(posedge clk) begin
    if (dut.u_spmv.busy && !dut.u_spmv.g_lane[0].u_lane.busy && !dut.u_spmv.lanes_start) n_couple++;
    if (dut.u_spmv.g_lane[0].u_lane.issue && dut.u_spmv.g_lane[0].u_lane.b_idx != 0) n_reuse++;
    if (dut.u_spmv.g_lane[0].u_lane.issue && !dut.u_spmv.g_lane[0].u_lane.u_mul.in_valid) n_bubble++;
    if (dut.u_spmv.g_lane[0].u_lane.y_wr_en && dut.u_spmv.g_lane[0].u_lane.m_valid &&
        dut.u_spmv.g_lane[0].u_lane.y_wr_blk == dut.u_spmv.g_lane[0].u_lane.y_rd_blk &&
        dut.u_spmv.g_lane[0].u_lane.y_wr_row == dut.u_spmv.g_lane[0].u_lane.y_rd_row) n_bypass++;
    if (dut.u_minres.ds_done) n_ds++;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real bv [MAXDIM];

  task automatic load_matrix();
    @(negedge clk);
    foreach (sched_q[i]) begin
      sched_we = 1; sched_waddr = NZ_W'(i); sched_wdata = sched_q[i];
      @(negedge clk);
    end
    sched_we = 0;
    nmac = (NZ_W+1)'(sched_q.size());
    for (int b = 0; b < nblk; b++)
      for (int i = 0; i < nstored; i++) begin
        a_we = 1; a_wblk = PW'(b); a_waddr = NZ_W'(i); a_wdata = aval[b][i];
        @(negedge clk);
      end
    a_we = 0;
  endtask

  task automatic run_solve(input int it, input bit zero_b, output real relres, output int ran,
                           output int cycles);
    real sb, sr;
    int unsigned t0;
    @(negedge clk);
    for (int g = 0; g < dim; g++) begin
      b_we = 1; b_idx = IW'(g);
      b_wdata = zero_b ? 32'h0 : rand_fp(2);
      bv[g] = f2r(b_wdata);
      @(negedge clk);
    end
    b_we = 0;
    niter = 16'(it); start = 1; t0 = $time / 10;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    cycles = $time / 10 - t0;
    ran = int'(iters);
    sb = 0; sr = 0;
    for (int g = 0; g < dim; g++) begin
      real r;
      r = bv[g];
      for (int j = 0; j < dim; j++) if (A[g][j] != 0.0) begin
        z_idx = IW'(j); #1;
        r -= A[g][j] * f2r(z_rdata);
      end
      sb += bv[g] * bv[g]; sr += r * r;
    end
    relres = (sb > 0) ? $sqrt(sr / sb) : $sqrt(sr);
  endtask

  initial begin
    real rr;
    int ran, cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 1; rep++) begin
      setup(BLKV, NXV, CRV, NN, 9);
      draw_values(3.0, rep == 1);
      load_matrix();
      run_solve(int'(DIMV), 0, rr, ran, cyc);
      $display("system %0d: %0d MACs/block, %0d iterations in %0d cycles, relative residual %e",
               rep, sched_q.size(), ran, cyc, rr);
      checks++; if (rr > 1e-4) begin failures++; $display("residual too large"); end
    end
    checks++; if (nstored > 161 || sched_q.size() > 255) failures++;
    $display("mechanisms: couple=%0d bubbles=%0d bypass=%0d divsqrt=%0d ",
             n_couple, n_bubble, n_bypass, n_ds);
    checks++; if (n_couple == 0) failures++;
    checks++; if (n_bubble == 0) failures++;
    checks++; if (n_bypass == 0) failures++;
    checks++; if (n_ds == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
