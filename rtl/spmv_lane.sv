// spmv_lane: one multiply-accumulate lane of the sparse matrix-vector unit.
//
// The lane replays an offline schedule of multiply-accumulate operations,
// y[row] += a[aidx] * x[col], over every KKT block assigned to it (its blocks
// share one sparsity pattern, hence one schedule). Each cycle it issues one
// schedule entry: it reads the stored non-zero and the input element and
// feeds the multiplier; LAT_MUL cycles later it reads the output element
// (output-vector port 2) and feeds the adder; LAT_ADD cycles after that it
// writes the sum back (output-vector port 1). The schedule is responsible for
// keeping two updates of the same output row at least LAT_ADD entries apart
// (empty entries with valid = 0 may be used as spacers); a write-to-read
// bypass makes exactly LAT_ADD entries sufficient.
// Interface: pulse start with nblk (blocks for this lane) and nmac (schedule
// entries per block); the lane then issues nblk*nmac entries on consecutive
// cycles, drains its pipelines and pulses done. The memories live outside the
// lane; all their reads are combinational (same-cycle) and addressed by the
// lane's local block counter plus the in-block index.
// Following the paper (Fig. 6): the finite state machine driving separate
// address streams for the matrix, the input vector and both ports of the
// output vector, the MAC built from one multiplier and one adder, storage of
// only the lower-triangular non-zeros (aidx may repeat). Own choices: the
// schedule-entry format, the bypass and the start/done handshake.
module spmv_lane
  import nmpc_pkg::*;
#(
  parameter int unsigned BLK_W   = 4,    // width of the local block counter
  parameter int unsigned LAT_M   = LAT_MUL,
  parameter int unsigned LAT_A   = LAT_ADD
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [BLK_W-1:0] nblk,
  input  logic [NZ_W:0]    nmac,
  output logic             busy,
  output logic             done,
  // schedule memory
  output logic [NZ_W-1:0]  sched_addr,
  input  sched_t           sched_data,
  // issue side: matrix values and input vector of block iss_blk
  output logic [BLK_W-1:0] iss_blk,
  output logic [NZ_W-1:0]  a_addr,
  input  fp32_t            a_data,
  output logic [ROW_W-1:0] x_addr,
  input  fp32_t            x_data,
  // output vector port 2 (read) and port 1 (write)
  output logic [BLK_W-1:0] y_rd_blk,
  output logic [ROW_W-1:0] y_rd_row,
  input  fp32_t            y_rd_data,
  output logic             y_wr_en,
  output logic [BLK_W-1:0] y_wr_blk,
  output logic [ROW_W-1:0] y_wr_row,
  output fp32_t            y_wr_data
);

  localparam int unsigned TAG_W = BLK_W + ROW_W;
  localparam int unsigned DRAIN = LAT_M + LAT_A + 1;

  typedef enum logic [1:0] {L_IDLE, L_ISSUE, L_DRAIN} lstate_t;
  lstate_t state;

  logic [NZ_W:0]    s_idx;
  logic [BLK_W-1:0] b_idx;
  logic [5:0]       drain_cnt;

  logic             issue;
  assign issue      = (state == L_ISSUE);
  assign sched_addr = s_idx[NZ_W-1:0];
  assign iss_blk    = b_idx;
  assign a_addr     = sched_data.aidx;
  assign x_addr     = sched_data.col;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= L_IDLE; s_idx <= '0; b_idx <= '0; drain_cnt <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        L_IDLE: if (start) begin
          s_idx <= '0; b_idx <= '0;
          if (nblk == 0 || nmac == 0) begin
            drain_cnt <= 6'(DRAIN);
            state <= L_DRAIN;
          end else begin
            state <= L_ISSUE;
          end
        end
        L_ISSUE: begin
          if (s_idx == nmac - 1) begin
            s_idx <= '0;
            if (b_idx == nblk - 1) begin
              drain_cnt <= 6'(DRAIN);
              state <= L_DRAIN;
            end else begin
              b_idx <= b_idx + 1'b1;
            end
          end else begin
            s_idx <= s_idx + 1'b1;
          end
        end
        L_DRAIN: begin
          drain_cnt <= drain_cnt - 6'd1;
          if (drain_cnt == 6'd1) begin
            state <= L_IDLE;
            done <= 1'b1;
          end
        end
        default: state <= L_IDLE;
      endcase
    end
  end
  assign busy = (state != L_IDLE);

  // multiply stage
  logic             m_valid;
  fp32_t            m_y;
  logic [TAG_W-1:0] m_tag;
  fp_mul #(.LAT(LAT_M), .TAG_W(TAG_W)) u_mul (
    .clk, .rst_n,
    .in_valid (issue & sched_data.valid),
    .a        (a_data),
    .b        (x_data),
    .in_tag   ({b_idx, sched_data.row}),
    .out_valid(m_valid),
    .y        (m_y),
    .out_tag  (m_tag)
  );

  // accumulate stage: read y (port 2) with bypass from the write port (port 1)
  assign y_rd_blk = m_tag[TAG_W-1:ROW_W];
  assign y_rd_row = m_tag[ROW_W-1:0];
  fp32_t y_old;
  always_comb begin
    if (y_wr_en && y_wr_blk == y_rd_blk && y_wr_row == y_rd_row) y_old = y_wr_data;
    else                                                          y_old = y_rd_data;
  end

  logic [TAG_W-1:0] a_tag;
  fp_add #(.LAT(LAT_A), .TAG_W(TAG_W)) u_add (
    .clk, .rst_n,
    .in_valid (m_valid),
    .a        (m_y),
    .b        (y_old),
    .in_tag   (m_tag),
    .out_valid(y_wr_en),
    .y        (y_wr_data),
    .out_tag  (a_tag)
  );
  assign y_wr_blk = a_tag[TAG_W-1:ROW_W];
  assign y_wr_row = a_tag[ROW_W-1:0];

endmodule
