// tb_minres_engine: runs minres_engine against a behavioural matrix-vector
// unit (a dense double-precision model of the KKT matrix that answers with a
// fixed delay) and checks the solution by its residual ||b - A z|| / ||b||,
// computed in double precision. Covers a positive-definite and an indefinite
// system, the iteration limit (niter smaller than the system size) and the
// early exit when b = 0.
module tb_minres_engine;
  import nmpc_pkg::*;
  import tb_fp_pkg::*;
  import tb_kkt_model::*;

  localparam int unsigned NB = 3, BLK = 6, NXP = 2, CR = 4;
  localparam int unsigned DIMV = NXP + NB * BLK;
  localparam int unsigned PW = $clog2(NB + 2), IW = $clog2(DIMV + 1);

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done, hv_we = 0;
  logic [15:0] niter = 0, iters;
  logic [4:0] hv_sel = 0;
  logic [IW-1:0] hv_idx = 0;
  fp32_t hv_wdata = 0, hv_rdata;
  logic sp_x_we, sp_start, sp_done;
  logic [PW-1:0] sp_x_part, sp_y_part;
  logic [ROW_W-1:0] sp_x_row, sp_y_row;
  fp32_t sp_x_wdata, sp_y_rdata;

  minres_engine #(.NB(NB), .BLK(BLK), .NX(NXP)) dut (.*);

  // behavioural matrix-vector unit
  fp32_t xm [NB+1][BLK];
  fp32_t ym [NB+1][BLK];
  int spmv_calls = 0;
  assign sp_y_rdata = ym[sp_y_part][sp_y_row];
  always @(posedge clk) if (sp_x_we) xm[sp_x_part][sp_x_row] <= sp_x_wdata;
  initial begin
    sp_done = 0;
    forever begin
      @(posedge clk);
      if (sp_start) begin
        repeat (20) @(posedge clk);
        for (int g = 0; g < dim; g++) begin
          int pp, rr, pj, rj;
          real s;
          s = 0;
          split(g, pp, rr);
          for (int j = 0; j < dim; j++) if (A[g][j] != 0.0) begin
            split(j, pj, rj);
            s += A[g][j] * f2r(xm[pj][rj]);
          end
          ym[pp][rr] = r2f(s);
        end
        spmv_calls++;
        #1 sp_done = 1;
        @(posedge clk); #1 sp_done = 0;
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real bv [MAXDIM];

  task automatic run_solve(input int it, input bit zero_b, output real relres, output int ran);
    real sumb, sumr;
    @(negedge clk);
    for (int g = 0; g < dim; g++) begin
      hv_we = 1; hv_sel = V_B; hv_idx = IW'(g);
      hv_wdata = zero_b ? 32'h0 : rand_fp(2);
      bv[g] = f2r(hv_wdata);
      @(negedge clk);
    end
    hv_we = 0;
    niter = 16'(it); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    ran = int'(iters);
    sumb = 0; sumr = 0;
    hv_sel = V_X;
    for (int g = 0; g < dim; g++) begin
      real r;
      r = bv[g];
      for (int j = 0; j < dim; j++) if (A[g][j] != 0.0) begin
        hv_idx = IW'(j); #1;
        r -= A[g][j] * f2r(hv_rdata);
      end
      sumb += bv[g] * bv[g]; sumr += r * r;
    end
    relres = (sumb > 0) ? $sqrt(sumr / sumb) : $sqrt(sumr);
  endtask

  initial begin
    real rr;
    int ran;
    repeat (3) @(posedge clk);
    rst_n = 1;
    setup(BLK, NXP, CR, NB, 40);
    for (int rep = 0; rep < 2; rep++) begin
      draw_values(3.0, rep == 1);
      run_solve(int'(DIMV), 0, rr, ran);
      $display("system %0d: %0d iterations, relative residual %e", rep, ran, rr);
      checks++; if (rr > 1e-4) failures++;
      checks++; if (ran != int'(DIMV) && ran > 0 && rr > 1e-6) failures++;
    end
    // iteration limit: 3 iterations reduce the residual but stop early
    run_solve(3, 0, rr, ran);
    $display("limited: %0d iterations, relative residual %e", ran, rr);
    checks++; if (ran != 3) failures++;
    checks++; if (rr > 0.999 || rr < 1e-6) failures++;
    // b = 0: z = 0 without any matrix-vector product
    begin
      int c0;
      c0 = spmv_calls;
      run_solve(int'(DIMV), 1, rr, ran);
      checks++; if (spmv_calls != c0 || ran != 0) failures++;
      checks++; if (rr != 0.0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
