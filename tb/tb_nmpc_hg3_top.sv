// tb_nmpc_hg3_top: end-to-end test of the KKT solver. Loads a random
// block-sparse KKT system (shared sparsity pattern and MAC schedule, per-block
// values, -I couplings) and a right-hand side, runs MINRES for as many
// iterations as the system has rows, and checks z by its residual
// ||b - A z|| / ||b|| in double precision. It counts how often each
// mechanism of the design occurred and fails if one never did: -I coupling
// transfers, a lane working through more than one block, empty schedule
// slots, the write-to-read bypass at the adder-latency distance, square roots
// and divisions, the iteration limit and the early exit on a zero vector.
// Parameters default to a reduced size; tb_nmpc_hg3_full runs the defaults.
module tb_nmpc_hg3_top;
  import nmpc_pkg::*;
  import tb_fp_pkg::*;
  import tb_kkt_model::*;

  localparam int unsigned NN = 3, PP = 2, BLKV = 8, NXV = 2, CRV = 6, NNZV = 40;
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

  nmpc_hg3_top #(.N(NN), .P(PP), .BLK(BLKV), .NX(NXV), .CROW(CRV), .NNZ(NNZV)) dut (.*);

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
    repeat (2000000) @(posedge clk);
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
    int ran, cyc, n_limit = 0, n_early = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      setup(BLKV, NXV, CRV, NN, 35);
      draw_values(3.0, rep == 1);
      load_matrix();
      run_solve(int'(DIMV), 0, rr, ran, cyc);
      $display("system %0d: %0d MACs/block, %0d iterations in %0d cycles, relative residual %e",
               rep, sched_q.size(), ran, cyc, rr);
      checks++; if (rr > 1e-4) begin failures++; $display("residual too large"); end
    end
    run_solve(4, 0, rr, ran, cyc);
    checks++; if (ran != 4 || rr < 1e-6 || rr > 0.999) failures++; else n_limit++;
    run_solve(int'(DIMV), 1, rr, ran, cyc);
    checks++; if (ran != 0 || rr != 0.0) failures++; else n_early++;
    $display("mechanisms: couple=%0d lane_reuse=%0d bubbles=%0d bypass=%0d divsqrt=%0d limit=%0d early_exit=%0d",
             n_couple, n_reuse, n_bubble, n_bypass, n_ds, n_limit, n_early);
    checks++; if (n_couple == 0) failures++;
    checks++; if (n_reuse == 0) failures++;
    checks++; if (n_bubble == 0) failures++;
    checks++; if (n_bypass == 0) failures++;
    checks++; if (n_ds == 0) failures++;
    checks++; if (n_limit == 0) failures++;
    checks++; if (n_early == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
