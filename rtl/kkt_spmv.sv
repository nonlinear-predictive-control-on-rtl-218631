// kkt_spmv: block-sparse matrix-vector multiplier for the interior-point KKT
// matrix of an N-step horizon, y = A x.
//
// A is block diagonal with NB grey blocks of BLK rows (one per sampling
// instant; all share one sparsity pattern and therefore one MAC schedule),
// preceded by a lead partition of NX rows for the initial-state constraint.
// Neighbouring partitions are coupled only through negative identity
// matrices of size NX: lead row i <-> block 0 row i, and block k row CROW+i
// <-> block k+1 row i. The unit works in two phases, as the paper proposes:
//  1. coupling: every output partition is initialised in parallel, one row
//     per cycle (BLK cycles), to the sign-flipped input element it is coupled
//     with, or to zero. No arithmetic is used, only a sign-bit flip.
//  2. blocks: P MAC lanes (spmv_lane) run the schedule over the grey blocks;
//     lane l takes blocks l, l+P, l+2P, ..., so P trades time for resources.
// Vectors and stored non-zeros are partitioned per block, so lanes never
// touch the same partition.
// Interface: load the schedule (sched_we), the non-zeros of each block
// (a_we), the input vector (x_we, by partition and row: partition 0 is the
// lead, partition k+1 is block k); pulse start with nmac; when done pulses,
// read y by partition/row (combinational read). Time from start to done is
// BLK + ceil(NB/P)*nmac + LAT_MUL + LAT_ADD + 4 cycles.
// Following the paper: block-sparse storage, sign-flip handling of the -I
// couplings before the parallel grey-block phase, P lanes, one schedule for
// all blocks, lower-triangle storage. Own choices: the uniform block size
// (the terminal block uses the same size and pattern, with whatever values
// the host stores), the lead partition, the port layout and timing.
module kkt_spmv
  import nmpc_pkg::*;
#(
  parameter int unsigned NB   = 10,   // grey blocks = horizon length N
  parameter int unsigned P    = 10,   // MAC lanes
  parameter int unsigned BLK  = 38,   // rows per block
  parameter int unsigned NX   = 6,    // size of the -I coupling (states)
  parameter int unsigned CROW = 32,   // first coupled row inside a block
  parameter int unsigned NNZ  = 161,  // stored non-zeros per block (capacity)
  parameter int unsigned PW   = $clog2(NB + 2)
) (
  input  logic             clk,
  input  logic             rst_n,
  // schedule and matrix loading
  input  logic             sched_we,
  input  logic [NZ_W-1:0]  sched_waddr,
  input  sched_t           sched_wdata,
  input  logic             a_we,
  input  logic [PW-1:0]    a_wblk,
  input  logic [NZ_W-1:0]  a_waddr,
  input  fp32_t            a_wdata,
  // input vector write, output vector read
  input  logic             x_we,
  input  logic [PW-1:0]    x_part,
  input  logic [ROW_W-1:0] x_row,
  input  fp32_t            x_wdata,
  input  logic [PW-1:0]    y_part,
  input  logic [ROW_W-1:0] y_row,
  output fp32_t            y_rdata,
  // control
  input  logic             start,
  input  logic [NZ_W:0]    nmac,
  output logic             busy,
  output logic             done
);

  localparam int unsigned NBL = (NB + P - 1) / P;     // blocks per lane (max)
  localparam int unsigned BW  = $clog2(NBL + 1);

  sched_t sched [2**NZ_W];
  fp32_t  amem  [NB][NNZ];
  fp32_t  xmem  [NB+1][BLK];
  fp32_t  ymem  [NB+1][BLK];

  typedef enum logic [1:0] {K_IDLE, K_COUPLE, K_BLOCKS} kstate_t;
  kstate_t state;
  logic [ROW_W-1:0] crow_cnt;
  logic [P-1:0] lane_busy, lane_done, lane_fin;
  logic lanes_start;

  // per-lane signals
  logic [NZ_W-1:0]  l_saddr [P];
  logic [BW-1:0]    l_iblk  [P], l_rblk [P], l_wblk [P];
  logic [NZ_W-1:0]  l_aaddr [P];
  logic [ROW_W-1:0] l_xaddr [P], l_rrow [P], l_wrow [P];
  logic             l_we    [P];
  fp32_t            l_wdata [P];

  for (genvar l = 0; l < P; l++) begin : g_lane
    localparam int unsigned NBLK_L = (NB > l) ? (NB - l + P - 1) / P : 0;
    // global block of the entry being issued (gi) and being accumulated (gr)
    logic [PW-1:0] gi, gr;
    assign gi = PW'(l + P * int'(l_iblk[l]));
    assign gr = PW'(l + P * int'(l_rblk[l]));
    spmv_lane #(.BLK_W(BW)) u_lane (
      .clk, .rst_n,
      .start     (lanes_start),
      .nblk      (BW'(NBLK_L)),
      .nmac      (nmac),
      .busy      (lane_busy[l]),
      .done      (lane_done[l]),
      .sched_addr(l_saddr[l]),
      .sched_data(sched[l_saddr[l]]),
      .iss_blk   (l_iblk[l]),
      .a_addr    (l_aaddr[l]),
      .a_data    (amem[gi][l_aaddr[l]]),
      .x_addr    (l_xaddr[l]),
      .x_data    (xmem[gi + 1'b1][l_xaddr[l]]),
      .y_rd_blk  (l_rblk[l]),
      .y_rd_row  (l_rrow[l]),
      .y_rd_data (ymem[gr + 1'b1][l_rrow[l]]),
      .y_wr_en   (l_we[l]),
      .y_wr_blk  (l_wblk[l]),
      .y_wr_row  (l_wrow[l]),
      .y_wr_data (l_wdata[l])
    );
  end

  // coupling value for partition p, row r: the sign-flipped partner element
  function automatic fp32_t couple(int unsigned p, int unsigned r);
    if (p == 0)
      return (r < NX) ? fp_neg(xmem[1][r]) : FP_ZERO;
    if (r < NX)
      return (p == 1) ? fp_neg(xmem[0][r]) : fp_neg(xmem[p-1][CROW + r]);
    if (r >= CROW && r < CROW + NX && p < NB)
      return fp_neg(xmem[p+1][r - CROW]);
    return FP_ZERO;
  endfunction

  always_ff @(posedge clk) begin
    if (sched_we) sched[sched_waddr] <= sched_wdata;
    if (a_we)     amem[a_wblk][a_waddr] <= a_wdata;
    if (x_we)     xmem[x_part][x_row] <= x_wdata;
    if (state == K_COUPLE) begin
      for (int p = 0; p <= NB; p++) ymem[p][crow_cnt] <= couple(p, crow_cnt);
    end
    for (int l = 0; l < P; l++)
      if (l_we[l]) ymem[l + P * int'(l_wblk[l]) + 1][l_wrow[l]] <= l_wdata[l];
  end

  assign y_rdata = ymem[y_part][y_row];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= K_IDLE; crow_cnt <= '0; lanes_start <= 1'b0; lane_fin <= '0; done <= 1'b0;
    end else begin
      lanes_start <= 1'b0;
      done <= 1'b0;
      case (state)
        K_IDLE: if (start) begin
          crow_cnt <= '0;
          state <= K_COUPLE;
        end
        K_COUPLE: begin
          crow_cnt <= crow_cnt + 1'b1;
          if (crow_cnt == ROW_W'(BLK - 1)) begin
            lanes_start <= 1'b1;
            lane_fin <= '0;
            state <= K_BLOCKS;
          end
        end
        K_BLOCKS: begin
          if (!lanes_start) begin
            if ((lane_fin | lane_done) == '1) begin
              state <= K_IDLE;
              done <= 1'b1;
            end
            lane_fin <= lane_fin | lane_done;
          end
        end
        default: state <= K_IDLE;
      endcase
    end
  end
  assign busy = (state != K_IDLE);

  // the grey-block phase must not start while a lane is still busy
  assert property (@(posedge clk) disable iff (!rst_n) lanes_start |-> lane_busy == '0);

endmodule
