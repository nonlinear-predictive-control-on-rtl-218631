// tb_kkt_spmv: checks kkt_spmv against a dense double-precision product with
// the full KKT matrix (grey blocks plus -I couplings). Uses 5 blocks on 3
// lanes, so lanes 0 and 1 each handle two blocks in sequence, and checks the
// start-to-done time BLK + ceil(NB/P)*nmac + LAT_MUL + LAT_ADD + 4 cycles.
module tb_kkt_spmv;
  import nmpc_pkg::*;
  import tb_fp_pkg::*;
  import tb_kkt_model::*;

  localparam int unsigned NB = 5, P = 3, BLK = 9, NXP = 2, CR = 7;
  localparam int unsigned PW = $clog2(NB + 2);

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sched_we = 0, a_we = 0, x_we = 0, start = 0, busy, done;
  logic [NZ_W-1:0] sched_waddr = 0, a_waddr = 0;
  sched_t sched_wdata = '0;
  logic [PW-1:0] a_wblk = 0, x_part = 0, y_part = 0;
  logic [ROW_W-1:0] x_row = 0, y_row = 0;
  fp32_t a_wdata = 0, x_wdata = 0, y_rdata;
  logic [NZ_W:0] nmac = 0;

  kkt_spmv #(.NB(NB), .P(P), .BLK(BLK), .NX(NXP), .CROW(CR), .NNZ(64)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real xv [MAXDIM];
    int unsigned t0, cyc, expc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      setup(BLK, NXP, CR, NB, 35);
      draw_values(2.0, rep == 1);
      foreach (sched_q[i]) begin
        @(negedge clk); sched_we = 1; sched_waddr = NZ_W'(i); sched_wdata = sched_q[i];
      end
      @(negedge clk); sched_we = 0;
      for (int b = 0; b < NB; b++)
        for (int i = 0; i < nstored; i++) begin
          a_we = 1; a_wblk = PW'(b); a_waddr = NZ_W'(i); a_wdata = aval[b][i];
          @(negedge clk);
        end
      a_we = 0;
      for (int g = 0; g < dim; g++) begin
        int pp, rr;
        split(g, pp, rr);
        x_wdata = rand_fp(2); xv[g] = f2r(x_wdata);
        x_we = 1; x_part = PW'(pp); x_row = ROW_W'(rr);
        @(negedge clk);
      end
      x_we = 0;
      nmac = (NZ_W+1)'(sched_q.size());
      start = 1; t0 = $time / 10;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      cyc = $time / 10 - t0;
      expc = BLK + ((NB + P - 1) / P) * sched_q.size() + LAT_MUL + LAT_ADD + 4;
      checks++;
      if (cyc != expc) begin failures++; $display("cycles %0d exp %0d", cyc, expc); end
      for (int g = 0; g < dim; g++) begin
        int pp, rr;
        real ref_v, mag, got, err;
        split(g, pp, rr);
        y_part = PW'(pp); y_row = ROW_W'(rr);
        #1;
        ref_v = 0; mag = 0;
        for (int j = 0; j < dim; j++) begin
          ref_v += A[g][j] * xv[j];
          mag += ((A[g][j] * xv[j]) < 0) ? -(A[g][j] * xv[j]) : (A[g][j] * xv[j]);
        end
        got = f2r(y_rdata);
        err = got - ref_v; if (err < 0) err = -err;
        checks++;
        if (err > 1e-5 * mag + 1e-30) begin
          failures++;
          if (failures < 10) $display("rep %0d g %0d: got %f exp %f", rep, g, got, ref_v);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
