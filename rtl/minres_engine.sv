// minres_engine: Lanczos kernel and MINRES iteration for A z = b.
//
// A small sequencer executes the MINRES micro-program of nmpc_pkg
// (Paige-Saunders MINRES with the Lanczos three-term recurrence, so only the
// last two Lanczos and search vectors are stored). It owns the vector store
// (NVEC vectors of DIM single-precision words), 32 scalar registers, two
// pipelined multipliers, one pipelined adder and one iterative divide/sqrt
// unit, and drives the external matrix-vector unit (kkt_spmv).
//  * Vector-vector operations stream one element per cycle:
//    v[d] = s[a]*v[va] + s[b]*v[vb] runs both multipliers into the adder and
//    writes back LAT_MUL+LAT_ADD cycles later; a dot product feeds the
//    products into LAT_ADD interleaved partial sums (one per adder pipeline
//    slot, so no sum is read before it is written) and adds the partial sums
//    at the end.
//  * Scalar operations use the same units one at a time.
//  * A matrix-vector product copies v[va] into the unit's partitioned input
//    vector, runs it and copies the result back into v[d].
// One iteration has two square roots and two divisions. The loop ends after
// niter iterations, or early when the Lanczos vector vanishes (beta = 0).
// Interface: while idle the host writes b into vector slot V_B and, after
// done, reads z from slot V_X (hv_* ports, combinational read). Pulse start
// with niter; done pulses when the program halts; iters gives the number of
// iterations run.
// Following the paper: MINRES on the full KKT system in hardware (its HG3
// split), pipelined vector-vector operations, few scalar divisions and square
// roots, iteration count set by the caller. Own choices: the micro-program
// organisation, the partial-sum dot product, copying vectors to and from the
// matrix-vector unit, the early exit on beta = 0 and all timing.
module minres_engine
  import nmpc_pkg::*;
#(
  parameter int unsigned NB   = 10,
  parameter int unsigned BLK  = 38,
  parameter int unsigned NX   = 6,
  parameter int unsigned DIM  = NX + NB * BLK,
  parameter int unsigned PW   = $clog2(NB + 2),
  parameter int unsigned IW   = $clog2(DIM + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [15:0]      niter,
  output logic             busy,
  output logic             done,
  output logic [15:0]      iters,
  // host access to the vector store
  input  logic             hv_we,
  input  logic [4:0]       hv_sel,
  input  logic [IW-1:0]    hv_idx,
  input  fp32_t            hv_wdata,
  output fp32_t            hv_rdata,
  // matrix-vector unit
  output logic             sp_x_we,
  output logic [PW-1:0]    sp_x_part,
  output logic [ROW_W-1:0] sp_x_row,
  output fp32_t            sp_x_wdata,
  output logic [PW-1:0]    sp_y_part,
  output logic [ROW_W-1:0] sp_y_row,
  input  fp32_t            sp_y_rdata,
  output logic             sp_start,
  input  logic             sp_done
);

  localparam int unsigned TW = IW + 1;

  fp32_t vmem [NVEC][DIM];
  fp32_t sreg [32];

  typedef enum logic [3:0] {
    E_IDLE, E_EXEC, E_WMUL, E_WADD, E_WDS, E_VSTREAM, E_VDRAIN,
    E_DOT, E_DOTDRAIN, E_DOTRED, E_SPLOAD, E_SPRUN, E_SPSTORE
  } estate_t;
  estate_t state;

  logic [6:0]    pc;
  instr_t        ins;
  assign ins = minres_prog(int'(pc));

  logic [IW-1:0] vi;          // issue index
  logic [IW:0]   vcnt;        // completed elements
  logic [PW-1:0] wpart;       // partition walker for the matrix-vector copies
  logic [ROW_W-1:0] wrow;
  fp32_t         acc [LAT_ADD];
  logic [2:0]    slot;
  logic [2:0]    red_k;
  fp32_t         red_sum;

  // ---------------- arithmetic units ----------------
  logic          m0_v, m1_v, ad_v, m0_ov, m1_ov, ad_ov;
  fp32_t         m0_a, m0_b, m1_a, m1_b, ad_a, ad_b, m0_y, m1_y, ad_y;
  logic [TW-1:0] m0_t, m0_ot, m1_ot, ad_t, ad_ot;
  logic          ds_start, ds_op, ds_busy, ds_done;
  fp32_t         ds_y;

  fp_mul #(.TAG_W(TW)) u_m0 (.clk, .rst_n, .in_valid(m0_v), .a(m0_a), .b(m0_b), .in_tag(m0_t),
                             .out_valid(m0_ov), .y(m0_y), .out_tag(m0_ot));
  fp_mul #(.TAG_W(TW)) u_m1 (.clk, .rst_n, .in_valid(m1_v), .a(m1_a), .b(m1_b), .in_tag(m0_t),
                             .out_valid(m1_ov), .y(m1_y), .out_tag(m1_ot));
  fp_add #(.TAG_W(TW)) u_add (.clk, .rst_n, .in_valid(ad_v), .a(ad_a), .b(ad_b), .in_tag(ad_t),
                              .out_valid(ad_ov), .y(ad_y), .out_tag(ad_ot));
  fp_divsqrt u_ds (.clk, .rst_n, .start(ds_start), .op(ds_op), .a(sreg[ins.a]), .b(sreg[ins.b]),
                   .busy(ds_busy), .done(ds_done), .y(ds_y));

  // partial-sum operand for the dot product, with bypass from the adder output
  fp32_t acc_cur;
  always_comb begin
    acc_cur = acc[m0_ot[2:0]];
    if (ad_ov && ad_ot[2:0] == m0_ot[2:0]) acc_cur = ad_y;
  end

  always_comb begin
    m0_v = 1'b0; m1_v = 1'b0; ad_v = 1'b0; ds_start = 1'b0; ds_op = 1'b0;
    m0_a = sreg[ins.a]; m0_b = sreg[ins.b]; m1_a = sreg[ins.b]; m1_b = FP_ZERO;
    m0_t = TW'(vi);
    ad_a = sreg[ins.a]; ad_b = sreg[ins.b]; ad_t = '0;
    case (state)
      E_EXEC: begin
        case (ins.op)
          OP_SMUL:  m0_v = 1'b1;
          OP_SADD:  ad_v = 1'b1;
          OP_SSUB:  begin ad_v = 1'b1; ad_b = fp_neg(sreg[ins.b]); end
          OP_SDIV:  ds_start = 1'b1;
          OP_SSQRT: begin ds_start = 1'b1; ds_op = 1'b1; end
          default: ;
        endcase
      end
      E_VSTREAM, E_VDRAIN: begin
        m0_v = (state == E_VSTREAM) && (ins.op == OP_VAXPBY);
        m1_v = m0_v;
        m0_a = sreg[ins.a]; m0_b = vmem[ins.va][vi];
        m1_a = sreg[ins.b]; m1_b = vmem[ins.vb][vi];
        ad_v = m0_ov; ad_a = m0_y; ad_b = m1_y; ad_t = m0_ot;
      end
      E_DOT, E_DOTDRAIN: begin
        m0_v = (state == E_DOT);
        m0_a = vmem[ins.va][vi]; m0_b = vmem[ins.vb][vi];
        m0_t = TW'(slot);
        ad_v = m0_ov; ad_a = m0_y; ad_b = acc_cur; ad_t = m0_ot;
      end
      E_DOTRED: begin
        ad_v = (vcnt != '0);
        ad_a = red_sum; ad_b = acc[red_k]; ad_t = '0;
      end
      default: ;
    endcase
  end

  // ---------------- matrix-vector unit copies ----------------
  assign sp_x_we    = (state == E_SPLOAD);
  assign sp_x_part  = wpart;
  assign sp_x_row   = wrow;
  assign sp_x_wdata = vmem[ins.va][vi];
  assign sp_y_part  = wpart;
  assign sp_y_row   = wrow;

  logic wlast;
  assign wlast = (wpart == 0) ? (wrow == ROW_W'(NX - 1)) : (wrow == ROW_W'(BLK - 1));

  assign hv_rdata = vmem[hv_sel][hv_idx];

  // ---------------- sequencer ----------------
  always_ff @(posedge clk) begin
    // vector store writes
    if (hv_we && state == E_IDLE) vmem[hv_sel][hv_idx] <= hv_wdata;
    if (state == E_VSTREAM && ins.op == OP_VZERO) vmem[ins.d][vi] <= FP_ZERO;
    if ((state == E_VSTREAM || state == E_VDRAIN) && ins.op == OP_VAXPBY && ad_ov)
      vmem[ins.d][ad_ot[IW-1:0]] <= ad_y;
    if (state == E_SPSTORE) vmem[ins.d][vi] <= sp_y_rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= E_IDLE; pc <= '0; vi <= '0; vcnt <= '0; wpart <= '0; wrow <= '0;
      slot <= '0; red_k <= '0; red_sum <= '0; iters <= '0; done <= 1'b0; sp_start <= 1'b0;
      for (int i = 0; i < 32; i++) sreg[i] <= '0;
      for (int i = 0; i < int'(LAT_ADD); i++) acc[i] <= '0;
    end else begin
      done <= 1'b0;
      sp_start <= 1'b0;
      case (state)
        E_IDLE: if (start) begin
          pc <= '0; iters <= '0;
          for (int i = 0; i < 32; i++) sreg[i] <= '0;
          state <= E_EXEC;
        end
        E_EXEC: begin
          vi <= '0; vcnt <= '0; wpart <= '0; wrow <= '0; slot <= '0;
          case (ins.op)
            OP_HALT:  begin done <= 1'b1; state <= E_IDLE; end
            OP_SLI:   begin sreg[ins.d] <= ins.imm; pc <= pc + 1'b1; end
            OP_SMOV:  begin sreg[ins.d] <= sreg[ins.a]; pc <= pc + 1'b1; end
            OP_SNEG:  begin sreg[ins.d] <= fp_neg(sreg[ins.a]); pc <= pc + 1'b1; end
            OP_SMUL:  state <= E_WMUL;
            OP_SADD, OP_SSUB: state <= E_WADD;
            OP_SDIV, OP_SSQRT: state <= E_WDS;
            OP_VZERO, OP_VAXPBY: state <= E_VSTREAM;
            OP_VDOT:  begin
              for (int i = 0; i < int'(LAT_ADD); i++) acc[i] <= FP_ZERO;
              state <= E_DOT;
            end
            OP_VSPMV: state <= E_SPLOAD;
            OP_BEQZ:  pc <= (sreg[ins.a][30:0] == 31'd0) ? ins.imm[6:0] : pc + 1'b1;
            OP_LOOP:  begin
              iters <= iters + 16'd1;
              pc <= (iters + 16'd1 < niter) ? ins.imm[6:0] : pc + 1'b1;
            end
            default:  state <= E_IDLE;
          endcase
        end
        E_WMUL: if (m0_ov) begin sreg[ins.d] <= m0_y; pc <= pc + 1'b1; state <= E_EXEC; end
        E_WADD: if (ad_ov) begin sreg[ins.d] <= ad_y; pc <= pc + 1'b1; state <= E_EXEC; end
        E_WDS:  if (ds_done) begin sreg[ins.d] <= ds_y; pc <= pc + 1'b1; state <= E_EXEC; end
        E_VSTREAM: begin
          vi <= vi + 1'b1;
          if (ad_ov) vcnt <= vcnt + 1'b1;
          if (vi == IW'(DIM - 1)) begin
            if (ins.op == OP_VZERO) begin pc <= pc + 1'b1; state <= E_EXEC; end
            else state <= E_VDRAIN;
          end
        end
        E_VDRAIN: begin
          if (ad_ov) begin
            vcnt <= vcnt + 1'b1;
            if (vcnt == (IW+1)'(DIM - 1)) begin pc <= pc + 1'b1; state <= E_EXEC; end
          end
        end
        E_DOT, E_DOTDRAIN: begin
          if (state == E_DOT) begin
            vi <= vi + 1'b1;
            slot <= (slot == 3'(LAT_ADD - 1)) ? 3'd0 : slot + 3'd1;
            if (vi == IW'(DIM - 1)) state <= E_DOTDRAIN;
          end
          if (ad_ov) begin
            acc[ad_ot[2:0]] <= ad_y;
            vcnt <= vcnt + 1'b1;
            if (vcnt == (IW+1)'(DIM - 1)) begin
              red_k <= 3'd1;
              vcnt <= 1;
              red_sum <= (ad_ot[2:0] == 3'd0) ? ad_y : acc[0];
              state <= E_DOTRED;
            end
          end
        end
        E_DOTRED: begin
          // one addition of a partial sum in flight at a time
          if (!ad_ov && vcnt != '0) begin
            vcnt <= '0;                                  // issue
          end else if (ad_ov) begin
            red_sum <= ad_y;
            if (red_k == 3'(LAT_ADD - 1)) begin
              sreg[ins.d] <= ad_y; pc <= pc + 1'b1; state <= E_EXEC;
            end else begin
              red_k <= red_k + 3'd1;
              vcnt <= 1;
            end
          end
        end
        E_SPLOAD: begin
          vi <= vi + 1'b1;
          if (wlast) begin wpart <= wpart + 1'b1; wrow <= '0; end
          else wrow <= wrow + 1'b1;
          if (vi == IW'(DIM - 1)) begin sp_start <= 1'b1; state <= E_SPRUN; end
        end
        E_SPRUN: if (sp_done) begin
          vi <= '0; wpart <= '0; wrow <= '0; state <= E_SPSTORE;
        end
        E_SPSTORE: begin
          vi <= vi + 1'b1;
          if (wlast) begin wpart <= wpart + 1'b1; wrow <= '0; end
          else wrow <= wrow + 1'b1;
          if (vi == IW'(DIM - 1)) begin pc <= pc + 1'b1; state <= E_EXEC; end
        end
        default: state <= E_IDLE;
      endcase
    end
  end

  assign busy = (state != E_IDLE);

  // the host may touch the vector store only while the engine is idle
  assert property (@(posedge clk) disable iff (!rst_n) hv_we |-> state == E_IDLE);
  // a reduction step issues only when the adder has nothing else in flight
  assert property (@(posedge clk) disable iff (!rst_n) (state == E_DOTRED && ad_v) |-> !ad_ov);

endmodule
