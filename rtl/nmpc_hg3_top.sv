// nmpc_hg3_top: FPGA part of a heterogeneous interior-point NMPC controller
// in which the whole KKT linear-system solve runs in hardware.
//
// Each interior-point iteration of the controller forms a symmetric KKT
// system A z = b on the processor (derivatives, Gauss-Newton Hessian blocks,
// right-hand side) and hands it to this block, which solves it with MINRES
// (minres_engine) built on the block-sparse, offline-scheduled matrix-vector
// multiplier (kkt_spmv with P MAC lanes). The processor then reads z back
// and completes the iteration (dual update, step length, line search).
// Interface (plain load/read ports, one word per cycle, from the processor
// side): sched_* writes the shared MAC schedule, a_* the stored non-zeros of
// each grey block, nmac the schedule length, b_* the right-hand side by
// global index (lead rows first, then block 0, 1, ...); pulse start with
// niter (the paper sets it to the system size); when done pulses, z is read
// by global index on z_idx/z_rdata and iters tells how many iterations ran.
// Defaults: N = 10 blocks on P = 10 lanes (the configuration of the paper's
// closed-loop experiment); the block size, coupling size and position are
// this design's assumptions for the crane example (6 states, 2 inputs, a
// two-stage trapezoidal integrator).
module nmpc_hg3_top
  import nmpc_pkg::*;
#(
  parameter int unsigned N    = 10,
  parameter int unsigned P    = 10,
  parameter int unsigned BLK  = 38,
  parameter int unsigned NX   = 6,
  parameter int unsigned CROW = 32,
  parameter int unsigned NNZ  = 161,
  parameter int unsigned DIM  = NX + N * BLK,
  parameter int unsigned PW   = $clog2(N + 2),
  parameter int unsigned IW   = $clog2(DIM + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sched_we,
  input  logic [NZ_W-1:0] sched_waddr,
  input  sched_t          sched_wdata,
  input  logic            a_we,
  input  logic [PW-1:0]   a_wblk,
  input  logic [NZ_W-1:0] a_waddr,
  input  fp32_t           a_wdata,
  input  logic [NZ_W:0]   nmac,
  input  logic            b_we,
  input  logic [IW-1:0]   b_idx,
  input  fp32_t           b_wdata,
  input  logic [IW-1:0]   z_idx,
  output fp32_t           z_rdata,
  input  logic            start,
  input  logic [15:0]     niter,
  output logic            busy,
  output logic            done,
  output logic [15:0]     iters
);

  logic             sp_x_we, sp_start, sp_done, sp_busy;
  logic [PW-1:0]    sp_x_part, sp_y_part;
  logic [ROW_W-1:0] sp_x_row, sp_y_row;
  fp32_t            sp_x_wdata, sp_y_rdata;

  minres_engine #(.NB(N), .BLK(BLK), .NX(NX), .DIM(DIM), .PW(PW), .IW(IW)) u_minres (
    .clk, .rst_n, .start, .niter, .busy, .done, .iters,
    .hv_we   (b_we),
    .hv_sel  (b_we ? V_B : V_X),
    .hv_idx  (b_we ? b_idx : z_idx),
    .hv_wdata(b_wdata),
    .hv_rdata(z_rdata),
    .sp_x_we, .sp_x_part, .sp_x_row, .sp_x_wdata,
    .sp_y_part, .sp_y_row, .sp_y_rdata, .sp_start, .sp_done
  );

  kkt_spmv #(.NB(N), .P(P), .BLK(BLK), .NX(NX), .CROW(CROW), .NNZ(NNZ), .PW(PW)) u_spmv (
    .clk, .rst_n,
    .sched_we, .sched_waddr, .sched_wdata,
    .a_we, .a_wblk, .a_waddr, .a_wdata,
    .x_we(sp_x_we), .x_part(sp_x_part), .x_row(sp_x_row), .x_wdata(sp_x_wdata),
    .y_part(sp_y_part), .y_row(sp_y_row), .y_rdata(sp_y_rdata),
    .start(sp_start), .nmac, .busy(sp_busy), .done(sp_done)
  );

  // the matrix must not be reloaded while the solver runs
  assert property (@(posedge clk) disable iff (!rst_n) (sched_we || a_we) |-> !busy);
  assert property (@(posedge clk) disable iff (!rst_n) sp_start |-> !sp_busy);

endmodule
