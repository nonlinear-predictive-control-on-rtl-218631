// tb_kkt_spmv_sweep: the time/resource trade-off of the matrix-vector unit.
// Five copies of kkt_spmv are built for a horizon of N = 20 blocks of the
// crane-sized KKT block (38 rows, 6 coupled states, up to 161 stored
// non-zeros), with P = 1, 2, 5, 10 and 20 MAC lanes. All copies are loaded
// with the same random matrix, schedule and input vector and started
// together. For each copy the testbench checks every output element against a
// dense double-precision product and checks the start-to-done time
// BLK + ceil(N/P)*nmac + LAT_MUL + LAT_ADD + 4 cycles, then prints the cycle
// count per lane count: halving the time needs about twice the lanes.
// Own choices: the random pattern (about 9 % in-block density) and the greedy
// schedule, which stand in for the crane model's matrix.
module tb_kkt_spmv_sweep;
  import nmpc_pkg::*;
  import tb_fp_pkg::*;
  import tb_kkt_model::*;

  localparam int unsigned NB = 20, BLK = 38, NXP = 6, CR = 32, NNZV = 161;
  localparam int unsigned PW = $clog2(NB + 2);
  localparam int NCFG = 5;
  localparam int unsigned PLIST [NCFG] = '{1, 2, 5, 10, 20};

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sched_we = 0, a_we = 0, x_we = 0, start = 0;
  logic [NZ_W-1:0] sched_waddr = 0, a_waddr = 0;
  sched_t sched_wdata = '0;
  logic [PW-1:0] a_wblk = 0, x_part = 0, y_part = 0;
  logic [ROW_W-1:0] x_row = 0, y_row = 0;
  fp32_t a_wdata = 0, x_wdata = 0;
  logic [NZ_W:0] nmac = 0;
  logic  busy [NCFG], done [NCFG];
  fp32_t y_rdata [NCFG];

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    kkt_spmv #(.NB(NB), .P(PLIST[c]), .BLK(BLK), .NX(NXP), .CROW(CR), .NNZ(NNZV)) dut (
      .clk, .rst_n, .sched_we, .sched_waddr, .sched_wdata, .a_we, .a_wblk, .a_waddr,
      .a_wdata, .x_we, .x_part, .x_row, .x_wdata, .y_part, .y_row,
      .y_rdata(y_rdata[c]), .start, .nmac, .busy(busy[c]), .done(done[c]));
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cycle (relative to start) at which each copy pulsed done
  int unsigned t_start, t_done [NCFG];
  always @(posedge clk)
    for (int c = 0; c < NCFG; c++) if (done[c]) t_done[c] = $time / 10 - t_start;

  initial begin
    real xv [MAXDIM];
    repeat (3) @(posedge clk);
    rst_n = 1;
    do setup(BLK, NXP, CR, NB, 9); while (nstored > int'(NNZV));
    draw_values(2.0, 1'b1);
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
    for (int c = 0; c < NCFG; c++) t_done[c] = 0;
    start = 1; t_start = $time / 10;
    @(negedge clk); start = 0;
    wait (t_done[0] != 0);
    @(negedge clk);
    $display("N=%0d, %0d schedule entries per block (%0d stored non-zeros, %0d spacers)",
             NB, sched_q.size(), nstored, nbubbles);
    for (int c = 0; c < NCFG; c++) begin
      int unsigned expc;
      expc = BLK + ((NB + PLIST[c] - 1) / PLIST[c]) * sched_q.size() + LAT_MUL + LAT_ADD + 4;
      $display("  P=%2d lanes: %0d cycles", PLIST[c], t_done[c]);
      checks++;
      if (t_done[c] != expc) begin
        failures++; $display("  P=%0d: %0d cycles, expected %0d", PLIST[c], t_done[c], expc);
      end
    end
    for (int g = 0; g < dim; g++) begin
      int pp, rr;
      real ref_v, mag;
      split(g, pp, rr);
      y_part = PW'(pp); y_row = ROW_W'(rr);
      #1;
      ref_v = 0; mag = 0;
      for (int j = 0; j < dim; j++) begin
        ref_v += A[g][j] * xv[j];
        mag += ((A[g][j] * xv[j]) < 0) ? -(A[g][j] * xv[j]) : (A[g][j] * xv[j]);
      end
      for (int c = 0; c < NCFG; c++) begin
        real got, err;
        got = f2r(y_rdata[c]);
        err = got - ref_v; if (err < 0) err = -err;
        checks++;
        if (err > 1e-5 * mag + 1e-30) begin
          failures++;
          if (failures < 10) $display("P=%0d g %0d: got %f exp %f", PLIST[c], g, got, ref_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
